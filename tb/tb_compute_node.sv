// tb_compute_node: end-to-end test of a Compute Node at its default sizes.
//
// All four processor engines and the router run at once, with their
// results sent as packets to backplane ports 0-3 while the backplane
// inputs carry multi-flit traffic to other boards and to the processor
// FPGAs. A behavioural DDR2 memory serves the event selector.
//
//   tracks     10 helix tracks (370 hits, 2 T field); then an event of 300
//              identical hits plus 40 random ones at threshold 1 while port
//              0 is stalled, so counters saturate and the result FIFO drops
//   rings      12 track seeds, 8 with a complete ring shifted by up to 2 pads
//   PID        300 lookups through the angle table and the PID table, with
//              port 2 stalled for a while so the PID input is back-pressured
//   selector   a 30-event run (accept, reject, block reload, output flush)
//              and a run with a malformed event (error)
//   backplane  16 inputs x 40 packets of 1-4 flits to ports 1, 5-15, 16-19
//
// Each result packet is checked against a reference. Each mechanism is
// counted, and any mechanism that never happens is a failure: track found,
// vote saturation, peak drop, ring found, ring absent, particle identified,
// PID stall, event accepted, event rejected, block reload, buffer flush,
// selector error, router contention, multi-flit packet, backplane to
// processor delivery.
`timescale 1ns/1ps
module tb_compute_node;
  import online_pkg::*;
  localparam int NB = BACKPLANE_LINKS;
  localparam int NP = PROC_FPGAS;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------- DUT ports ----------------
  logic  [NB-1:0] bp_in_valid, bp_in_ready, bp_out_valid, bp_out_ready;
  flit_t [NB-1:0] bp_in_flit, bp_out_flit;
  logic  [NP-1:0] pf_rx_valid, pf_rx_ready;
  flit_t [NP-1:0] pf_rx_flit;
  logic  [NP-1:0][DEST_W-1:0] result_dest;
  coord_t trk_x0, trk_y0, hit_x, hit_y;
  logic [7:0] trk_threshold;
  logic hit_valid, hit_ready, hit_last, trk_event_done;
  logic [5:0] ring_threshold;
  logic rlut_we, pad_clear, pad_valid, seed_valid, seed_ready;
  logic [11:0] rlut_addr, seed_idx;
  logic [6:0] rlut_col, rlut_row, pad_col, pad_row;
  logic [7:0] seed_id;
  logic clut_we, ptab_we, pid_valid, pid_ready;
  logic [6:0] clut_r, clut_z, pid_ring_r, pid_z;
  logic [15:0] clut_angle, pid_p;
  logic [5:0] ptab_pbin, ptab_abin;
  species_e ptab_species;
  logic [7:0] pid_id;
  logic sel_start, sel_busy, sel_done;
  logic [31:0] sel_src_base, sel_src_words, sel_dst_base, sel_acc_mask, sel_acc_value;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic [31:0] stat_votes, stat_votes_saturated, stat_peaks_dropped, stat_router_contentions;
  logic [31:0] stat_sel_accepted, stat_sel_seen, stat_sel_reloads, stat_sel_flushes;
  logic stat_sel_error;

  compute_node dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- behavioural DDR2 memory ----------------
  localparam int MEM_WORDS = 1 << 18;
  localparam int DST = 1 << 17;
  logic [31:0] mem [MEM_WORDS];
  logic [31:0] rq_data [$];
  longint      rq_due [$];
  longint      cyc = 0;

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
    mem_gnt <= ($urandom_range(0, 99) < 70);
    if (rq_due.size() != 0 && rq_due[0] <= cyc) begin
      mem_rvalid <= 1'b1;
      mem_rdata  <= rq_data.pop_front();
      void'(rq_due.pop_front());
    end else begin
      mem_rvalid <= 1'b0;
      mem_rdata  <= '0;
    end
  end

  // ---------------- mechanism counters ----------------
  int m_track_found, m_saturation, m_peak_drop, m_ring_found, m_ring_absent;
  int m_pid_ident, m_pid_stall, m_sel_accept, m_sel_reject, m_sel_reload;
  int m_sel_flush, m_sel_error, m_contention, m_multiflit, m_bp_to_proc;

  // ---------------- expected results ----------------
  localparam int NT = 10;
  int  exp_t [NT], exp_r [NT];
  bit  trk_found [NT];
  bit  trk_event1 = 1;
  int  trk_extra = 0;
  logic [31:0] ring_exp [$];      // expected ring flit data, in seed order
  logic [31:0] pid_exp [$];       // expected PID flit data, in request order
  logic [31:0] sel_exp [$];       // expected selector summaries
  int  bad_results = 0;

  // backplane scoreboard
  flit_t bp_sb [NB][$];
  bit    bp_took [NB];
  int    bp_cur [NB + NP];        // source of the packet in progress per output, -1 if none
  int    bp_sent = 0, bp_got = 0, bp_bad = 0, bp_interleave = 0;

  function automatic bit near(int t, int r, int k, int d);
    return t - exp_t[k] <= d && exp_t[k] - t <= d && r - exp_r[k] <= d && exp_r[k] - r <= d;
  endfunction

  // one delivered flit at router output o
  task automatic deliver(int o, flit_t f);
    logic [3:0] tag;
    tag = f.data[31:28];
    if (tag == 4'hF) begin                       // backplane traffic
      int s;
      flit_t e;
      s = int'(f.data[27:24]);
      bp_got++;
      if (bp_cur[o] >= 0 && bp_cur[o] != s) bp_interleave++;
      bp_cur[o] = f.last ? -1 : s;
      if (bp_sb[s].size() == 0) bp_bad++;
      else begin
        e = bp_sb[s].pop_front();
        if (e !== f) bp_bad++;
        if (f.last && e.data[7:5] != 3'd0) m_multiflit++;
      end
      if (o >= NB) m_bp_to_proc++;
    end else if (o == 0 && tag == 4'(TAG_TRACK)) begin
      if (trk_event1) begin
        bit close = 0;
        for (int k = 0; k < NT; k++) begin
          if (near(int'(f.data[25:17]), int'(f.data[16:8]), k, 1)) trk_found[k] = 1;
          if (near(int'(f.data[25:17]), int'(f.data[16:8]), k, 2)) close = 1;
        end
        if (!close) trk_extra++;
      end
    end else if (o == 1 && tag == 4'(TAG_RING)) begin
      // an empty region is only checked for found = 0 and the seed id
      logic [31:0] e;
      e = (ring_exp.size() != 0) ? ring_exp.pop_front() : 'x;
      if (e[27] ? (e !== f.data) : ({e[31:27], e[6:0]} !== {f.data[31:27], f.data[6:0]})) begin
        bad_results++; $display("bad ring result %h, expected %h", f.data, e);
      end
    end else if (o == 2 && tag == 4'(TAG_PID)) begin
      if (pid_exp.size() == 0 || pid_exp.pop_front() !== f.data) begin
        bad_results++; $display("bad PID result %h", f.data);
      end
    end else if (o == 3 && tag == 4'(TAG_EVSEL)) begin
      if (sel_exp.size() == 0 || sel_exp.pop_front() !== f.data) begin
        bad_results++; $display("bad selector summary %h", f.data);
      end
    end else begin
      bad_results++; $display("unexpected flit %h at port %0d", f.data, o);
    end
  endtask

  // monitor: sample handshakes at the clock edge
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NB; i++) begin
      bp_took[i] = bp_in_valid[i] && bp_in_ready[i];
      if (bp_took[i]) begin bp_sb[i].push_back(bp_in_flit[i]); bp_sent++; end
    end
    for (int o = 0; o < NB; o++) if (bp_out_valid[o] && bp_out_ready[o]) deliver(o, bp_out_flit[o]);
    for (int p = 0; p < NP; p++) if (pf_rx_valid[p] && pf_rx_ready[p]) deliver(NB + p, pf_rx_flit[p]);
    if (pid_valid && !pid_ready) m_pid_stall++;
  end

  // sinks: random ready, with stall switches for ports 0 and 2
  bit stall0 = 0, stall2 = 0;
  always @(negedge clk) begin
    for (int o = 0; o < NB; o++) bp_out_ready[o] <= ($urandom_range(0, 99) < 80);
    if (stall0) bp_out_ready[0] <= 1'b0;
    if (stall2) bp_out_ready[2] <= 1'b0;
    for (int p = 0; p < NP; p++) pf_rx_ready[p] <= ($urandom_range(0, 99) < 80);
  end

  // ================= tracks =================
  task automatic send_hit(real x, real y, bit lst);
    hit_x = coord_t'($rtoi(x * 256.0));
    hit_y = coord_t'($rtoi(y * 256.0));
    hit_last = lst;
    hit_valid = 1;
    while (!hit_ready) @(negedge clk);
    @(negedge clk);
    hit_valid = 0;
  endtask

  task automatic run_tracks();
    real rho, s, ang, pt, phi, rad;
    int n_found;
    trk_threshold = 8'd20;
    for (int k = 0; k < NT; k++) begin
      trk_found[k] = 0;
    end
    for (int k = 0; k < NT; k++) begin
      phi = -2.7 + 0.55 * k + real'($urandom_range(0, 100)) / 1000.0;
      pt  = 0.5 + real'($urandom_range(0, 1000)) / 1000.0;
      rad = pt / 0.6 * 100.0;
      exp_t[k] = $rtoi(phi * 256.0 / PI + 256.5);
      exp_r[k] = $rtoi(1.0 / (2.0 * rad) * 65536.0 / 16.0);
      s = (k % 2 == 0) ? 1.0 : -1.0;
      for (int h = 0; h < 37; h++) begin
        rho = (h < 7) ? 3.0 + 11.0 * h / 6.0 : 16.0 + 24.0 * (h - 7) / 29.0;
        ang = phi + s * $acos(rho / (2.0 * rad));
        send_hit(rho * $cos(ang), rho * $sin(ang), k == NT - 1 && h == 36);
      end
    end
    while (!trk_event_done) @(negedge clk);
    repeat (200) @(negedge clk);                 // let the last results drain
    trk_event1 = 0;
    n_found = 0;
    for (int k = 0; k < NT; k++) if (trk_found[k]) n_found++;
    check(n_found >= 8, $sformatf("only %0d of %0d tracks found", n_found, NT));
    check(trk_extra == 0, $sformatf("%0d track peaks away from every track", trk_extra));
    m_track_found = n_found;
    $display("tracks: %0d of %0d found, %0d votes", n_found, NT, stat_votes);
    // second event: saturation and FIFO overflow behind a stalled port
    stall0 = 1; trk_threshold = 8'd1;
    for (int h = 0; h < 340; h++)
      if (h < 300) send_hit(12.5, -7.25, 1'b0);
      else send_hit(10.0 + $urandom_range(0, 3000) / 100.0, -20.0 + $urandom_range(0, 4000) / 100.0,
                    h == 339);
    while (!trk_event_done) @(negedge clk);
    m_saturation = int'(stat_votes_saturated);
    m_peak_drop  = int'(stat_peaks_dropped);
    stall0 = 0;
    $display("tracks: %0d saturated votes, %0d peaks dropped", stat_votes_saturated, stat_peaks_dropped);
  endtask

  // ================= rings =================
  task automatic put_pad(int c, int r);
    if (c < 0 || r < 0 || c > 95 || r > 95) return;
    pad_col = 7'(c); pad_row = 7'(r); pad_valid = 1;
    @(negedge clk);
    pad_valid = 0;
  endtask

  task automatic run_rings();
    int sc, sr, ox, oy;
    bit has;
    ring_threshold = 6'd20;
    pad_clear = 1; @(negedge clk); pad_clear = 0;
    for (int s = 0; s < 12; s++) begin
      sc = 10 + 20 * (s % 4); sr = 15 + 25 * (s / 4);
      rlut_we = 1; rlut_addr = 12'(500 + s); rlut_col = 7'(sc); rlut_row = 7'(sr);
      @(negedge clk);
      rlut_we = 0;
      has = (s % 3 != 2);
      ox = $urandom_range(0, 4) - 2; oy = $urandom_range(0, 4) - 2;
      if (has) begin
        for (int v = -4; v <= 4; v++)
          for (int u = -4; u <= 4; u++)
            if (4 * (u * u + v * v) >= 49 && 4 * (u * u + v * v) < 81) put_pad(sc + ox + u, sr + oy + v);
        ring_exp.push_back({4'(TAG_RING), 1'b1, 6'd32, 7'(sr + oy), 7'(sc + ox), 7'(s)});
        m_ring_found++;
      end else begin
        ring_exp.push_back({4'(TAG_RING), 1'b0, 20'd0, 7'(s)});
        m_ring_absent++;
      end
    end
    for (int s = 0; s < 12; s++) begin
      seed_idx = 12'(500 + s); seed_id = 8'(s); seed_valid = 1;
      while (!seed_ready) @(negedge clk);
      @(negedge clk);
      seed_valid = 0;
    end
  endtask

  // ================= PID =================
  logic [15:0] angle_t [16384];
  species_e    spec_t [64][64];

  task automatic run_pid();
    logic [15:0] a;
    species_e sp;
    for (int i = 0; i < 16384; i++) begin
      angle_t[i] = 16'($urandom);
      clut_we = 1; {clut_r, clut_z} = 14'(i); clut_angle = angle_t[i];
      @(negedge clk);
    end
    clut_we = 0;
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        spec_t[i][j] = species_e'($urandom_range(0, 5));
        ptab_we = 1; ptab_pbin = 6'(i); ptab_abin = 6'(j); ptab_species = spec_t[i][j];
        @(negedge clk);
      end
    ptab_we = 0;
    stall2 = 1;
    fork begin repeat (2000) @(negedge clk); stall2 = 0; end join_none
    for (int k = 0; k < 300; k++) begin
      pid_ring_r = 7'($urandom); pid_z = 7'($urandom); pid_p = 16'($urandom); pid_id = 8'(k);
      pid_valid = 1;
      while (!pid_ready) @(negedge clk);
      a  = angle_t[{pid_ring_r, pid_z}];
      sp = spec_t[pid_p[15:10]][a[15:10]];
      pid_exp.push_back({4'(TAG_PID), 17'd0, 8'(k), sp});
      if (sp != PID_NONE) m_pid_ident++;
      @(negedge clk);
      pid_valid = 0;
    end
  endtask

  // ================= event selector =================
  int ev_start [$], ev_len [$];

  function automatic int build(int base, int n, int bad_at);
    int p = base, bytes, w;
    ev_start.delete(); ev_len.delete();
    for (int k = 0; k < n; k++) begin
      bytes = (k == bad_at) ? 16 : 4000 + int'($urandom_range(0, 16000));
      w = (bytes + 3) / 4;
      mem[p] = 32'(bytes);
      mem[p + 1] = 32'(k);
      mem[p + 2] = $urandom;
      for (int i = 3; i < w; i++) mem[p + i] = $urandom;
      ev_start.push_back(p); ev_len.push_back(w);
      p += w;
    end
    return p - base;
  endfunction

  task automatic run_sel(int n, int bad_at);
    int len, acc = 0, q = DST, ne;
    bit ok = 1;
    len = build(0, n, bad_at);
    ne = (bad_at >= 0) ? bad_at : n;
    for (int k = 0; k < ne; k++)
      if ((mem[ev_start[k] + 2] & 32'h3) == 32'h2) acc++;
    sel_exp.push_back({4'(TAG_EVSEL), 24'(acc), bad_at >= 0, 3'b000});
    sel_src_base = 0; sel_src_words = 32'(len); sel_dst_base = DST;
    sel_acc_mask = 32'h3; sel_acc_value = 32'h2;
    sel_start = 1; @(negedge clk); sel_start = 0;
    while (!sel_done) @(negedge clk);
    for (int k = 0; k < ne; k++)
      if ((mem[ev_start[k] + 2] & 32'h3) == 32'h2) begin
        for (int i = 0; i < ev_len[k]; i++) if (mem[q + i] !== mem[ev_start[k] + i]) ok = 0;
        q += ev_len[k];
      end
    check(ok, "selector destination contents");
    check(stat_sel_seen == 32'(ne) && stat_sel_accepted == 32'(acc) && stat_sel_error == (bad_at >= 0),
          $sformatf("selector counters: seen %0d accepted %0d error %0b", stat_sel_seen,
                    stat_sel_accepted, stat_sel_error));
    m_sel_accept += int'(stat_sel_accepted);
    m_sel_reject += int'(stat_sel_seen - stat_sel_accepted);
    m_sel_reload += int'(stat_sel_reloads);
    m_sel_flush  += int'(stat_sel_flushes);
    m_sel_error  += int'(stat_sel_error);
    $display("selector: %0d events, %0d accepted, %0d reloads, %0d flushes, error %0b", stat_sel_seen,
             stat_sel_accepted, stat_sel_reloads, stat_sel_flushes, stat_sel_error);
  endtask

  // ================= backplane traffic =================
  int bl [NB], bi [NB], bseq [NB], bleft [NB];
  logic [4:0] bdst [NB];

  task automatic bp_new(int i);
    int d;
    bl[i] = $urandom_range(1, 4); bi[i] = 0; bseq[i]++;
    d = $urandom_range(0, 15);
    bdst[i] = (d < 4) ? 5'(16 + d) : (d < 6) ? 5'd1 : 5'(d);
  endtask

  task automatic bp_drive(int i);
    bp_in_valid[i] = (bleft[i] > 0);
    bp_in_flit[i].dest = bdst[i];
    bp_in_flit[i].last = (bi[i] == bl[i] - 1);
    bp_in_flit[i].data = {4'hF, 4'(i), 16'(bseq[i]), 3'(bi[i]), 5'($urandom)};
  endtask

  task automatic run_backplane(int pkts);
    for (int i = 0; i < NB; i++) begin bleft[i] = pkts; bseq[i] = 0; bp_new(i); bp_drive(i); end
    while (bp_in_valid != '0) begin
      @(negedge clk);
      for (int i = 0; i < NB; i++) if (bp_took[i]) begin
        bp_took[i] = 0;
        if (bi[i] == bl[i] - 1) begin bleft[i]--; bp_new(i); end
        else bi[i]++;
        bp_drive(i);
      end
      // pause now and then so the processors' results meet idle outputs too
      if ($urandom_range(0, 999) == 0) repeat ($urandom_range(10, 200)) @(negedge clk);
    end
  endtask

  // ================= main =================
  initial begin
    bp_in_valid = '0; bp_in_flit = '0; bp_out_ready = '0; pf_rx_ready = '0;
    result_dest[0] = 5'd0; result_dest[1] = 5'd1; result_dest[2] = 5'd2; result_dest[3] = 5'd3;
    trk_x0 = '0; trk_y0 = '0; trk_threshold = '0; hit_valid = 0; hit_x = '0; hit_y = '0; hit_last = 0;
    ring_threshold = '0; rlut_we = 0; rlut_addr = '0; rlut_col = '0; rlut_row = '0;
    pad_clear = 0; pad_valid = 0; pad_col = '0; pad_row = '0; seed_valid = 0; seed_idx = '0; seed_id = '0;
    clut_we = 0; clut_r = '0; clut_z = '0; clut_angle = '0; ptab_we = 0; ptab_pbin = '0; ptab_abin = '0;
    ptab_species = PID_NONE; pid_valid = 0; pid_ring_r = '0; pid_z = '0; pid_p = '0; pid_id = '0;
    sel_start = 0; sel_src_base = '0; sel_src_words = '0; sel_dst_base = '0; sel_acc_mask = '0;
    sel_acc_value = '0; mem_gnt = 0; mem_rvalid = 0; mem_rdata = '0;
    for (int o = 0; o < NB + NP; o++) bp_cur[o] = -1;
    m_track_found = 0; m_saturation = 0; m_peak_drop = 0; m_ring_found = 0; m_ring_absent = 0;
    m_pid_ident = 0; m_pid_stall = 0; m_sel_accept = 0; m_sel_reject = 0; m_sel_reload = 0;
    m_sel_flush = 0; m_sel_error = 0; m_contention = 0; m_multiflit = 0; m_bp_to_proc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      run_tracks();
      run_rings();
      run_pid();
      begin run_sel(30, -1); run_sel(10, 6); end
      run_backplane(40);
    join
    repeat (500) @(negedge clk);
    m_contention = int'(stat_router_contentions);

    // ---- results
    check(bad_results == 0, $sformatf("%0d result packets wrong", bad_results));
    check(ring_exp.size() == 0 && pid_exp.size() == 0 && sel_exp.size() == 0,
          $sformatf("results missing: %0d ring, %0d PID, %0d selector", ring_exp.size(),
                    pid_exp.size(), sel_exp.size()));
    check(bp_sent == bp_got && bp_bad == 0 && bp_interleave == 0,
          $sformatf("backplane: sent %0d got %0d bad %0d interleaved %0d", bp_sent, bp_got, bp_bad,
                    bp_interleave));
    for (int i = 0; i < NB; i++) check(bp_sb[i].size() == 0, $sformatf("backplane input %0d: flits lost", i));

    // ---- mechanisms
    $display("mechanisms: track_found=%0d saturation=%0d peak_drop=%0d ring_found=%0d ring_absent=%0d",
             m_track_found, m_saturation, m_peak_drop, m_ring_found, m_ring_absent);
    $display("mechanisms: pid_ident=%0d pid_stall=%0d sel_accept=%0d sel_reject=%0d sel_reload=%0d",
             m_pid_ident, m_pid_stall, m_sel_accept, m_sel_reject, m_sel_reload);
    $display("mechanisms: sel_flush=%0d sel_error=%0d contention=%0d multiflit=%0d bp_to_proc=%0d",
             m_sel_flush, m_sel_error, m_contention, m_multiflit, m_bp_to_proc);
    check(m_track_found > 0, "mechanism never seen: track found");
    check(m_saturation > 0,  "mechanism never seen: vote saturation");
    check(m_peak_drop > 0,   "mechanism never seen: peak drop");
    check(m_ring_found > 0,  "mechanism never seen: ring found");
    check(m_ring_absent > 0, "mechanism never seen: ring absent");
    check(m_pid_ident > 0,   "mechanism never seen: particle identified");
    check(m_pid_stall > 0,   "mechanism never seen: PID stall");
    check(m_sel_accept > 0,  "mechanism never seen: event accepted");
    check(m_sel_reject > 0,  "mechanism never seen: event rejected");
    check(m_sel_reload > 0,  "mechanism never seen: block reload");
    check(m_sel_flush > 0,   "mechanism never seen: output flush");
    check(m_sel_error > 0,   "mechanism never seen: selector error");
    check(m_contention > 0,  "mechanism never seen: router contention");
    check(m_multiflit > 0,   "mechanism never seen: multi-flit packet");
    check(m_bp_to_proc > 0,  "mechanism never seen: backplane to processor");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
