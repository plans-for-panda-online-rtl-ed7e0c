// tb_event_selector: event filtering between two memory regions.
//
// The testbench holds a behavioural DDR2 memory: requests are granted on
// random clocks and read data come back in order after a random delay.
// Run 1 fills a source region with random events of 1 to 5 k words (4 to
// 20 kB) with random ids, so that events straddle the 8192-word DMA block
// end (reload) and the accepted events overflow the output buffer (flush).
// The destination region must equal the concatenation of the accepted
// events and the counters must match the reference. Run 2 accepts nothing.
// Run 3 places a malformed event (shorter than its header) mid-region and
// run 4 cuts the last event off at the region end; both must stop with
// `error`, after writing back exactly the events accepted before the fault.
`timescale 1ns/1ps
module tb_event_selector;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, error, mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] src_base, src_words, dst_base, acc_mask, acc_value;
  logic [31:0] events_seen, events_accepted, words_written, reloads, flushes;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  int checks = 0, failures = 0;

  event_selector dut (.*);

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- behavioural memory ----------------
  localparam int MEM_WORDS = 1 << 18;
  localparam int DST = 1 << 17;
  logic [31:0] mem [MEM_WORDS];
  logic [31:0] rq_data [$];
  longint      rq_due [$];
  longint      cyc = 0;
  int          gnt_pct = 70;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mem_req && mem_gnt) begin
      if (mem_we) mem[mem_addr] <= mem_wdata;
      else begin
        rq_data.push_back(mem[mem_addr]);
        rq_due.push_back((rq_due.size() != 0 && rq_due[$] > cyc + 1) ? rq_due[$]
                         : cyc + 1 + longint'($urandom_range(0, 5)));
      end
    end
    mem_gnt <= ($urandom_range(0, 99) < gnt_pct);
    if (rq_due.size() != 0 && rq_due[0] <= cyc) begin
      mem_rvalid <= 1'b1;
      mem_rdata  <= rq_data.pop_front();
      void'(rq_due.pop_front());
    end else begin
      mem_rvalid <= 1'b0;
      mem_rdata  <= 'x;
    end
  end

  // ---------------- reference ----------------
  int ev_start [$], ev_len [$];
  bit ev_acc [$];

  // Builds `n` random events from `base`; returns the region length.
  function automatic int build(int n, int bad_at, bit cut_last);
    int p = 0, bytes, w;
    ev_start.delete(); ev_len.delete(); ev_acc.delete();
    for (int k = 0; k < n; k++) begin
      if (k == bad_at) bytes = 20;                         // shorter than the header
      else bytes = 4000 + int'($urandom_range(0, 16000));  // 4..20 kB
      w = (bytes + 3) / 4;
      mem[p] = 32'(bytes);
      mem[p + 1] = 32'h2000_0000 | 32'(k);
      mem[p + 2] = $urandom;                               // id
      for (int i = 3; i < w; i++) mem[p + i] = $urandom;
      ev_start.push_back(p); ev_len.push_back(w);
      ev_acc.push_back((mem[p + 2] & 32'h3) == 32'h1);
      p += w;
    end
    return cut_last ? p - 7 : p;
  endfunction

  task automatic run(string name, int n, int bad_at, bit cut_last, logic [31:0] mask,
                     logic [31:0] value, bit want_err);
    int len, ne, exp_seen = 0, exp_acc = 0, exp_words = 0, q = DST;
    bit ok = 1;
    len = build(n, bad_at, cut_last);
    ne = (bad_at >= 0) ? bad_at : (cut_last ? n - 1 : n);
    for (int i = DST; i < DST + 100000; i++) mem[i] = 32'hDEAD_BEEF;
    src_base = 0; src_words = 32'(len); dst_base = DST; acc_mask = mask; acc_value = value;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int k = 0; k < ne; k++) begin
      exp_seen++;
      if ((mem[ev_start[k] + 2] & mask) == value) begin
        exp_acc++; exp_words += ev_len[k];
        for (int i = 0; i < ev_len[k]; i++)
          if (mem[q + i] !== mem[ev_start[k] + i]) ok = 0;
        q += ev_len[k];
      end
    end
    if (mem[q] !== 32'hDEAD_BEEF) ok = 0;                  // nothing past the end
    checks++;
    if (!ok) begin failures++; $display("FAIL %s: destination contents differ", name); end
    checks++;
    if (events_seen != 32'(exp_seen) || events_accepted != 32'(exp_acc) ||
        words_written != 32'(exp_words) || error != want_err) begin
      failures++;
      $display("FAIL %s: seen %0d/%0d acc %0d/%0d words %0d/%0d err %0b", name, events_seen,
               exp_seen, events_accepted, exp_acc, words_written, exp_words, error);
    end
    $display("%s: %0d events, %0d accepted, %0d words, %0d reloads, %0d flushes, error %0b",
             name, events_seen, events_accepted, words_written, reloads, flushes, error);
  endtask

  initial begin
    start = 0; src_base = 0; src_words = 0; dst_base = 0; acc_mask = 0; acc_value = 0;
    mem_gnt = 0; mem_rvalid = 0; mem_rdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run("mixed", 30, -1, 0, 32'h3, 32'h1, 0);
    checks++;
    if (reloads == 0 || flushes < 2) begin
      failures++; $display("FAIL mixed: expected reloads and several flushes");
    end
    gnt_pct = 100;
    run("reject-all", 12, -1, 0, 32'hFFFF_FFFF, 32'h0000_0007, 0);
    gnt_pct = 40;
    run("malformed", 12, 7, 0, 32'h0, 32'h0, 1);
    run("truncated", 6, -1, 1, 32'h1, 32'h1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
