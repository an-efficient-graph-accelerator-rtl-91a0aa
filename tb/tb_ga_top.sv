// tb_ga_top: end-to-end test of the graph accelerator at the default pipeline
// widths (16 edge lanes, 8 vertex units, 16 banks) with a small vertex memory.
// It builds a random skewed graph (many low-degree vertices, a few vertices
// with dozens of in-edges, vertices without in-edges, self loops), orders
// every vertex's in-edges round robin over (source mod 16) as the edge
// rearranging preprocessing prescribes, stores it in CSC form in two
// behavioural memory channels and runs:
//   * three BFS iterations (ping-pong arrays),
//   * two WCC iterations, the first split into two vertex-range parts,
//   * one PageRank accumulation in fixed point and one in single-precision
//     float (compared within a relative 1e-5),
//   * WCC run in place (one array) repeatedly until it converges,
//   * a streaming graph (4 edges per vertex, conflict-free sources) whose
//     cycle count must stay within one edge line per cycle plus a fixed
//     pipeline fill.
// Each result array is read back through the host port and compared with a
// reference computed here. Every mechanism of the pipeline must occur at least
// once (degree-aware multi-vertex beats, multi-beat lines, vertices spanning
// lines, bank conflicts, out-of-order returns, P3 back-pressure, crossbar
// serialisation, destination merges); a mechanism that never occurs counts as
// a failure.
module tb_ga_top;
  import ga_pkg::*;

  localparam int N = 16, M = 8, NBANK = 16;
  localparam int BANK_DEPTH = 4096;
  localparam int AW = $clog2(BANK_DEPTH);
  localparam int BW = $clog2(NBANK);
  localparam int NV = 400;              // vertices of the random graph
  localparam int NV2 = 256;             // vertices of the streaming graph
  localparam int LINES = 2048;
  localparam int ARR_A = 0, ARR_B = 64; // word offsets of the two arrays
  localparam int OFF2_BASE = 64;        // line address of graph 2 offsets
  localparam int EDGE_BASE = 0, EDGE2_BASE = 1024;
  localparam val_t EPS = 32'd150;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  alg_e  alg;
  vid_t  v_begin, v_end;
  eoff_t off_base, edge_begin, edge_end, edge_base;
  logic [AW-1:0] src_base, dst_base;
  logic  start, busy, done;
  logic  off_req_valid, off_req_ready, off_resp_valid;
  eoff_t off_req_addr, off_resp_data[N];
  logic  edge_req_valid, edge_req_ready, edge_resp_valid;
  eoff_t edge_req_addr;
  vid_t  edge_resp_data[N];
  logic  host_en, host_we;
  logic [BW+AW-1:0] host_addr;
  val_t  host_wdata, host_rdata;
  ga_events_t events;

  ga_top #(.BANK_DEPTH(BANK_DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .alg(alg), .v_begin(v_begin), .v_end(v_end),
    .off_base(off_base), .edge_begin(edge_begin), .edge_end(edge_end), .edge_base(edge_base),
    .src_base(src_base), .dst_base(dst_base), .start(start), .busy(busy), .done(done),
    .off_req_valid(off_req_valid), .off_req_ready(off_req_ready), .off_req_addr(off_req_addr),
    .off_resp_valid(off_resp_valid), .off_resp_data(off_resp_data),
    .edge_req_valid(edge_req_valid), .edge_req_ready(edge_req_ready), .edge_req_addr(edge_req_addr),
    .edge_resp_valid(edge_resp_valid), .edge_resp_data(edge_resp_data),
    .host_en(host_en), .host_we(host_we), .host_addr(host_addr), .host_wdata(host_wdata),
    .host_rdata(host_rdata), .events(events));

  ga_dram_model #(.N(N), .LINES(LINES), .LAT(8)) u_offm (
    .clk(clk), .rst_n(rst_n), .req_valid(off_req_valid), .req_ready(off_req_ready),
    .req_addr(off_req_addr), .resp_valid(off_resp_valid), .resp_data(off_resp_data));
  ga_dram_model #(.N(N), .LINES(LINES), .LAT(12)) u_edgm (
    .clk(clk), .rst_n(rst_n), .req_valid(edge_req_valid), .req_ready(edge_req_ready),
    .req_addr(edge_req_addr), .resp_valid(edge_resp_valid), .resp_data(edge_resp_data));

  // ---------------- event counters ----------------
  int unsigned ev_cnt [8];
  always_ff @(posedge clk) if (rst_n) begin
    if (events.multi_vertex)  ev_cnt[0] <= ev_cnt[0] + 1;
    if (events.line_split)    ev_cnt[1] <= ev_cnt[1] + 1;
    if (events.vertex_span)   ev_cnt[2] <= ev_cnt[2] + 1;
    if (events.bank_conflict) ev_cnt[3] <= ev_cnt[3] + 1;
    if (events.out_of_order)  ev_cnt[4] <= ev_cnt[4] + 1;
    if (events.p3_stall)      ev_cnt[5] <= ev_cnt[5] + 1;
    if (events.xbar_conflict) ev_cnt[6] <= ev_cnt[6] + 1;
    if (events.dst_merge)     ev_cnt[7] <= ev_cnt[7] + 1;
  end
  string ev_name [8] = '{"multi_vertex", "line_split", "vertex_span", "bank_conflict",
                         "out_of_order", "p3_stall", "xbar_conflict", "dst_merge"};

  // ---------------- graph ----------------
  int unsigned off[NV+1];
  int unsigned edges[$];
  int unsigned off2[NV2+1];
  int unsigned edges2[$];
  val_t arr_a[NV], arr_b[NV], gold[NV];

  task automatic build_graph();
    int unsigned bucket[NBANK][$];
    int d, u, r;
    off[0] = 0;
    for (int v = 0; v < NV; v++) begin
      r = $urandom % 100;
      if (r < 18) d = 0;
      else if (r < 75) d = 1 + $urandom % 4;
      else if (r < 95) d = 5 + $urandom % 16;
      else d = 30 + $urandom % 60;
      if (v >= 100 && v < 140) d = 1;          // dense run of degree-1 vertices
      if (v >= 200 && v < 208) d = 40;         // hot vertices, all sources in bank 0
      for (int b = 0; b < NBANK; b++) bucket[b].delete();
      for (int k = 0; k < d; k++) begin
        u = (($urandom % 20) == 0) ? v : $urandom % NV;
        if (v >= 200 && v < 208) u = NBANK * ($urandom % (NV / NBANK));
        bucket[u % NBANK].push_back(u);
      end
      // edge rearranging: take one edge from each (source mod P) queue in turn
      for (int k = 0, b = 0; k < d; b = (b + 1) % NBANK)
        if (bucket[b].size() > 0) begin edges.push_back(bucket[b].pop_front()); k++; end
      off[v+1] = edges.size();
    end
    for (int i = 0; i <= NV; i++) u_offm.mem[i / N][i % N] = off[i];
    for (int i = 0; i < edges.size(); i++) u_edgm.mem[EDGE_BASE + i / N][i % N] = edges[i];
    // streaming graph: vertex v has sources 4v..4v+3 (mod NV2), 4 vertices per line
    off2[0] = 0;
    for (int v = 0; v < NV2; v++) begin
      for (int k = 0; k < 4; k++) edges2.push_back((4 * v + k) % NV2);
      off2[v+1] = edges2.size();
    end
    for (int i = 0; i <= NV2; i++) u_offm.mem[OFF2_BASE + i / N][i % N] = off2[i];
    for (int i = 0; i < edges2.size(); i++) u_edgm.mem[EDGE2_BASE + i / N][i % N] = edges2[i];
  endtask

  // ---------------- host port ----------------
  task automatic host_write(int base, int v, val_t d);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b1; host_addr = (BW+AW)'(base * NBANK + v); host_wdata = d;
    @(negedge clk);
    host_en = 1'b0; host_we = 1'b0;
  endtask
  task automatic host_read(int base, int v, output val_t d);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b0; host_addr = (BW+AW)'(base * NBANK + v);
    @(negedge clk);
    d = host_rdata;
    host_en = 1'b0;
  endtask

  // ---------------- one run ----------------
  task automatic run(alg_e a, int vb, int ve, int ob, int eb, int eoff_b, int eoff_e,
                     int sb, int db, output int cycles);
    @(negedge clk);
    alg = a; v_begin = vb; v_end = ve; off_base = ob; edge_base = eb;
    edge_begin = eoff_b; edge_end = eoff_e; src_base = AW'(sb); dst_base = AW'(db);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  // single-precision bits -> real (normal numbers and zero)
  function automatic real f2r(val_t a);
    real m;
    if (a[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(a[22:0]) / 8388608.0;
    for (int k = 127; k < int'(a[30:23]); k++) m = m * 2.0;
    for (int k = int'(a[30:23]); k < 127; k++) m = m / 2.0;
    return a[31] ? -m : m;
  endfunction

  // reference: dst = reduce(dst, reduce over in-edges update(src[u]))
  function automatic void reference(alg_e a, int vb, int ve, input val_t src[NV], inout val_t dst[NV]);
    for (int v = vb; v < ve; v++)
      for (int e = off[v]; e < off[v+1]; e++)
        dst[v] = reduce(a, dst[v], edge_update(a, src[edges[e]]));
  endfunction

  task automatic load_array(int base, input val_t x[NV]);
    for (int v = 0; v < NV; v++) host_write(base, v, x[v]);
  endtask

  task automatic check_array(int base, input val_t exp_v[NV], string what);
    val_t d;
    int bad = 0;
    for (int v = 0; v < NV; v++) begin
      host_read(base, v, d);
      checks++;
      if (d !== exp_v[v]) begin
        failures++; bad++;
        if (bad < 6) $display("FAIL %s v=%0d got=%0d exp=%0d", what, v, d, exp_v[v]);
      end
    end
  endtask

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("TB watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    alg = ALG_BFS; v_begin = '0; v_end = '0; off_base = '0; edge_begin = '0; edge_end = '0;
    edge_base = '0; src_base = '0; dst_base = '0; start = 1'b0;
    host_en = 1'b0; host_we = 1'b0; host_addr = '0; host_wdata = '0;
    for (int i = 0; i < 8; i++) ev_cnt[i] = 0;
    for (int l = 0; l < LINES; l++)
      for (int i = 0; i < N; i++) begin u_offm.mem[l][i] = '0; u_edgm.mem[l][i] = '0; end
    build_graph();
    $display("graph: %0d vertices, %0d edges", NV, edges.size());
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- BFS, three iterations, root 0 ----
    for (int v = 0; v < NV; v++) arr_a[v] = (v == 0) ? '0 : '1;
    for (int it = 0; it < 3; it++) begin
      int sb, db;
      sb = (it % 2 == 0) ? ARR_A : ARR_B;
      db = (it % 2 == 0) ? ARR_B : ARR_A;
      gold = arr_a;
      reference(ALG_BFS, 0, NV, arr_a, gold);
      load_array(sb, arr_a);
      load_array(db, arr_a);                 // target starts as a copy
      run(ALG_BFS, 0, NV, 0, EDGE_BASE, 0, off[NV], sb, db, cyc);
      $display("BFS iteration %0d: %0d cycles", it, cyc);
      check_array(db, gold, "BFS");
      arr_a = gold;
    end

    // ---- WCC, two iterations, the first in two vertex-range parts ----
    for (int v = 0; v < NV; v++) arr_a[v] = v;
    for (int it = 0; it < 2; it++) begin
      gold = arr_a;
      reference(ALG_WCC, 0, NV, arr_a, gold);
      load_array(ARR_A, arr_a);
      load_array(ARR_B, arr_a);
      if (it == 0) begin
        run(ALG_WCC, 0, NV / 2, 0, EDGE_BASE, 0, off[NV/2], ARR_A, ARR_B, cyc);
        run(ALG_WCC, NV / 2, NV, 0, EDGE_BASE, off[NV/2], off[NV], ARR_A, ARR_B, cyc);
      end else begin
        run(ALG_WCC, 0, NV, 0, EDGE_BASE, 0, off[NV], ARR_A, ARR_B, cyc);
      end
      check_array(ARR_B, gold, "WCC");
      arr_a = gold;
    end

    // ---- PageRank accumulation: dst = EPS + sum of contributions ----
    for (int v = 0; v < NV; v++) begin arr_a[v] = $urandom % 5000; arr_b[v] = EPS; end
    gold = arr_b;
    reference(ALG_PR, 0, NV, arr_a, gold);
    load_array(ARR_A, arr_a);
    load_array(ARR_B, arr_b);
    run(ALG_PR, 0, NV, 0, EDGE_BASE, 0, off[NV], ARR_A, ARR_B, cyc);
    $display("PR: %0d cycles for %0d edges", cyc, edges.size());
    check_array(ARR_B, gold, "PR");

    // ---- PageRank in single-precision float: dst = eps + sum, within 1e-5 ----
    begin
      real  rs[NV];
      val_t d;
      int   bad;
      bad = 0;
      for (int v = 0; v < NV; v++) begin
        arr_a[v] = {1'b0, 8'(116 + $urandom % 8), 23'($urandom)};    // rank/outdeg
        arr_b[v] = 32'h3e19999a;                                      // eps = 0.15
        rs[v] = f2r(arr_b[v]);
      end
      for (int v = 0; v < NV; v++)
        for (int e = off[v]; e < off[v+1]; e++) rs[v] += f2r(arr_a[edges[e]]);
      load_array(ARR_A, arr_a);
      load_array(ARR_B, arr_b);
      run(ALG_PRF, 0, NV, 0, EDGE_BASE, 0, off[NV], ARR_A, ARR_B, cyc);
      $display("PR float: %0d cycles", cyc);
      for (int v = 0; v < NV; v++) begin
        host_read(ARR_B, v, d);
        checks++;
        if (f2r(d) - rs[v] > 1e-5 * rs[v] || rs[v] - f2r(d) > 1e-5 * rs[v]) begin
          failures++; bad++;
          if (bad < 6) $display("FAIL PR float v=%0d got=%h exp=%f", v, d, rs[v]);
        end
      end
    end

    // ---- WCC in place (source array = destination array) until nothing changes;
    //      must reach the same fixed point as synchronous label propagation ----
    begin
      val_t prev[NV];
      int runs;
      for (int v = 0; v < NV; v++) arr_a[v] = v;
      gold = arr_a;
      do begin
        prev = gold;
        reference(ALG_WCC, 0, NV, prev, gold);
      end while (gold != prev);
      load_array(ARR_A, arr_a);
      runs = 0;
      do begin
        for (int v = 0; v < NV; v++) host_read(ARR_A, v, prev[v]);
        run(ALG_WCC, 0, NV, 0, EDGE_BASE, 0, off[NV], ARR_A, ARR_A, cyc);
        for (int v = 0; v < NV; v++) host_read(ARR_A, v, arr_b[v]);
        runs++;
      end while (arr_b != prev && runs < 40);
      $display("WCC in place: converged after %0d runs", runs);
      check_array(ARR_A, gold, "WCC in place");
    end

    // ---- streaming rate: 64 lines of 4 vertices x 4 conflict-free edges ----
    begin
      val_t s2[NV], d2[NV];
      for (int v = 0; v < NV; v++) begin s2[v] = '0; d2[v] = '0; end
      for (int v = 0; v < NV2; v++) s2[v] = v;
      for (int v = 0; v < NV2; v++) d2[v] = EPS;
      load_array(ARR_A, s2);
      load_array(ARR_B, d2);
      run(ALG_PR, 0, NV2, OFF2_BASE, EDGE2_BASE, 0, off2[NV2], ARR_A, ARR_B, cyc);
      for (int v = 0; v < NV2; v++)
        for (int e = off2[v]; e < off2[v+1]; e++) d2[v] += s2[edges2[e]];
      check_array(ARR_B, d2, "stream");
      checks++;
      $display("stream: %0d cycles for %0d lines", cyc, edges2.size() / N);
      if (cyc > edges2.size() / N + 48) begin
        failures++;
        $display("FAIL stream rate: %0d cycles > %0d", cyc, edges2.size() / N + 48);
      end
    end

    for (int i = 0; i < 8; i++) begin
      checks++;
      $display("event %-14s %0d", ev_name[i], ev_cnt[i]);
      if (ev_cnt[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", ev_name[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
