// tb_cn_router: 20-port packet switch under random and hot-spot traffic.
//
// Every input sends packets of 1 to 4 flits to random outputs; outputs
// accept on random clocks. A scoreboard takes each flit when an input hands
// it over and expects it, unchanged and in order, at the output it names.
// Checks: every flit delivered exactly once, no flit lost or invented,
// packets never interleaved on an output (wormhole), and a contention count
// above zero. A hot-spot phase has all 20 inputs sending to one output, and
// round-robin service must keep every input's wait under 20 packets.
`timescale 1ns/1ps
module tb_cn_router;
  import online_pkg::*;
  localparam int N = ROUTER_PORTS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  flit_t [N-1:0] in_flit, out_flit;
  logic [31:0] contentions;
  int checks = 0, failures = 0;

  cn_router dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scoreboard ----------------
  flit_t sb [N][$];              // flits taken from each input, not yet delivered
  bit    took [N];
  int    cur_src [N];            // source of the packet in progress at each output, -1 if none
  int    sent = 0, got = 0, bad = 0, interleave = 0;
  int    served_since [N];       // hot spot: packets served to others since input i was
  int    max_wait = 0;
  bit    hot = 0;

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      took[i] = in_valid[i] && in_ready[i];
      if (took[i]) begin sb[i].push_back(in_flit[i]); sent++; end
    end
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      int s;
      flit_t f;
      s = int'(out_flit[o].data[31:27]);
      got++;
      if (cur_src[o] >= 0 && cur_src[o] != s) interleave++;
      cur_src[o] = out_flit[o].last ? -1 : s;
      if (sb[s].size() == 0) bad++;
      else begin
        f = sb[s].pop_front();
        if (f !== out_flit[o] || int'(f.dest) != o) bad++;
      end
      if (hot && out_flit[o].last) begin
        for (int i = 0; i < N; i++) begin
          if (i == s) served_since[i] = 0;
          else if (in_valid[i]) served_since[i]++;
          if (served_since[i] > max_wait) max_wait = served_since[i];
        end
      end
    end
  end

  // ---------------- sources and sinks ----------------
  int len [N], idx [N], seq [N];
  logic [4:0] dst [N];
  int pkts_left [N];
  int ready_pct = 70;

  task automatic new_packet(int i);
    len[i] = $urandom_range(1, 4); idx[i] = 0; seq[i]++;
    dst[i] = hot ? 5'd7 : 5'($urandom_range(0, N - 1));
  endtask

  task automatic drive(int i);
    in_valid[i] = (pkts_left[i] > 0);
    in_flit[i].dest = dst[i];
    in_flit[i].last = (idx[i] == len[i] - 1);
    in_flit[i].data = {5'(i), 16'(seq[i]), 3'(idx[i]), 8'($urandom)};
  endtask

  task automatic phase(int pkts);
    for (int i = 0; i < N; i++) begin pkts_left[i] = pkts; new_packet(i); drive(i); end
    forever begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (took[i]) begin
          took[i] = 0;
          if (idx[i] == len[i] - 1) begin pkts_left[i]--; new_packet(i); end
          else idx[i]++;
          drive(i);
        end
      end
      for (int o = 0; o < N; o++) out_ready[o] = ($urandom_range(0, 99) < ready_pct);
      if (in_valid == '0) break;
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    in_valid = '0; in_flit = '0; out_ready = '0;
    for (int i = 0; i < N; i++) begin cur_src[i] = -1; seq[i] = 0; served_since[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    phase(200);
    hot = 1; ready_pct = 100;
    phase(20);
    checks++;
    if (sent != got || bad != 0) begin failures++; $display("FAIL sent %0d got %0d bad %0d", sent, got, bad); end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (sb[i].size() != 0) begin failures++; $display("FAIL input %0d: %0d flits undelivered", i, sb[i].size()); end
    end
    checks++;
    if (interleave != 0) begin failures++; $display("FAIL %0d interleaved flits", interleave); end
    checks++;
    if (contentions == 0) begin failures++; $display("FAIL no contention seen"); end
    checks++;
    if (max_wait >= N) begin failures++; $display("FAIL hot spot wait %0d packets", max_wait); end
    $display("%0d flits switched, %0d contention clocks, hot-spot max wait %0d packets",
             got, contentions, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
