// tb_ga_read_edges: P2 with vertices fed round robin by the testbench and a
// behavioural edge memory. A random skewed degree list (zero-degree vertices
// skipped, runs of degree-1 vertices, a few vertices with 40+ edges) over an
// unaligned edge range. Checks:
//  * edge lines leave in order with the memory contents and the lane-valid
//    mask of the edge range;
//  * the schedule beats cover every edge of every vertex exactly once with the
//    right vertex (lanes tagged with the slot, last_lane = last edge lane);
//  * every vertex takes one slot per line it touches and a line with k
//    vertices takes ceil(k/M) beats (the degree-aware schedule), allowing a
//    few extra beats while the vertex units fill up at the start.
module tb_ga_read_edges;
  import ga_pkg::*;
  localparam int N = 16, M = 8, NV = 300;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start, vi_ready, req_valid, req_ready, resp_valid, el_valid, el_ready;
  logic sb_valid, sb_ready, sb_line_end, done, beat_push, st_multi, st_split, st_span;
  eoff_t edge_begin, edge_end, edge_base, req_addr;
  logic [M-1:0] vi_valid, sb_slot_vld;
  vid_t vi_vid[M], resp_data[N], el_src[N], sb_vid[M];
  eoff_t vi_left[M], vi_right[M];
  logic [N-1:0] el_lane_vld, sb_lane_vld;
  logic [3:0] sb_last_lane[M];
  logic [2:0] sb_lane_tag[N];
  int checks = 0, failures = 0;

  ga_read_edges #(.N(N), .M(M)) dut (.clk(clk), .rst_n(rst_n), .start(start),
    .edge_begin(edge_begin), .edge_end(edge_end), .edge_base(edge_base),
    .vi_valid(vi_valid), .vi_vid(vi_vid), .vi_left(vi_left), .vi_right(vi_right), .vi_ready(vi_ready),
    .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr), .resp_valid(resp_valid),
    .resp_data(resp_data), .el_valid(el_valid), .el_ready(el_ready), .el_src(el_src),
    .el_lane_vld(el_lane_vld), .sb_valid(sb_valid), .sb_ready(sb_ready), .sb_slot_vld(sb_slot_vld),
    .sb_vid(sb_vid), .sb_last_lane(sb_last_lane), .sb_lane_vld(sb_lane_vld), .sb_lane_tag(sb_lane_tag),
    .sb_line_end(sb_line_end), .done(done), .beat_push(beat_push),
    .stat_multi(st_multi), .stat_split(st_split), .stat_span(st_span));
  ga_dram_model #(.N(N), .LINES(512), .LAT(10)) u_mem (.clk(clk), .rst_n(rst_n),
    .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr), .resp_valid(resp_valid),
    .resp_data(resp_data));

  int unsigned off[NV+1];
  int vlist[$];                  // vertices with edges
  int owner[int];                // edge index -> vertex
  int seen[int];                 // edge index -> times covered
  int line_vcnt[int];            // line -> vertices touching it
  int first_line, last_line, el_line, sb_line, n_beats = 0, exp_beats = 0;
  int n_multi = 0, n_split = 0, n_span = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // vertex feeder: up to M vertices per cycle, round robin over the units
  int fi = 0, frr = 0;
  always @(posedge clk) if (rst_n && vi_ready) begin
    for (int k = 0; k < M; k++) if (vi_valid[k]) fi++;
    frr = (frr + $countones(vi_valid)) % M;
  end
  always @(negedge clk) begin
    int n;
    vi_valid = '0;
    n = (fi < vlist.size() && started) ? 1 + $urandom % M : 0;
    for (int k = 0; k < n && fi + k < vlist.size(); k++) begin
      int j;
      j = (frr + k) % M;
      vi_valid[j] = 1; vi_vid[j] = vlist[fi + k];
      vi_left[j] = off[vlist[fi + k]]; vi_right[j] = off[vlist[fi + k] + 1];
    end
    el_ready = ($urandom % 3) != 0;
    sb_ready = ($urandom % 5) != 0;
  end
  bit started = 0;

  // checkers
  always @(posedge clk) if (rst_n) begin
    if (st_multi) n_multi++;
    if (st_split) n_split++;
    if (st_span) n_span++;
    if (el_valid && el_ready) begin
      for (int i = 0; i < N; i++) begin
        int e;
        e = el_line * N + i;
        checks++;
        if (el_lane_vld[i] !== (e >= int'(edge_begin) && e < int'(edge_end)) ||
            el_src[i] !== u_mem.mem[el_line][i]) failures++;
      end
      el_line++;
    end
    if (sb_valid && sb_ready) begin
      n_beats++;
      for (int i = 0; i < N; i++) if (sb_lane_vld[i]) begin
        int e, k;
        e = sb_line * N + i; k = sb_lane_tag[i];
        checks++;
        if (!sb_slot_vld[k] || !owner.exists(e) || owner[e] != int'(sb_vid[k])) begin
          failures++;
          if (failures < 5) $display("FAIL edge %0d lane %0d given to %0d", e, i, sb_vid[k]);
        end
        seen[e] = seen.exists(e) ? seen[e] + 1 : 1;
      end
      for (int k = 0; k < M; k++) if (sb_slot_vld[k]) begin
        int lst;
        lst = -1;
        for (int i = 0; i < N; i++) if (sb_lane_vld[i] && sb_lane_tag[i] == k) lst = i;
        checks++;
        if (lst != int'(sb_last_lane[k])) begin failures++; $display("FAIL last lane slot %0d", k); end
      end
      if (sb_line_end) sb_line++;
    end
  end

  initial begin
    int d;
    start = 0; edge_base = 0; vi_valid = '0;
    off[0] = 7;                        // edge range starts mid-line
    for (int v = 0; v < NV; v++) begin
      d = ($urandom % 4 == 0) ? 0 : 1 + $urandom % 4;
      if (v >= 50 && v < 90) d = 1;
      if (v % 37 == 5) d = 40 + $urandom % 30;
      off[v+1] = off[v] + d;
      if (d > 0) vlist.push_back(v);
      for (int e = off[v]; e < off[v+1]; e++) owner[e] = v;
    end
    edge_begin = off[0]; edge_end = off[NV];
    for (int l = 0; l < 512; l++) for (int i = 0; i < N; i++) u_mem.mem[l][i] = $urandom;
    first_line = off[0] / N; last_line = (off[NV] - 1) / N;
    el_line = first_line; sb_line = first_line;
    foreach (vlist[x]) for (int l = off[vlist[x]] / N; l <= (off[vlist[x]+1] - 1) / N; l++)
      line_vcnt[l] = line_vcnt.exists(l) ? line_vcnt[l] + 1 : 1;
    foreach (line_vcnt[l]) exp_beats += (line_vcnt[l] + M - 1) / M;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0; started = 1;
    wait (done);
    wait (!sb_valid && el_line > last_line);
    repeat (2) @(negedge clk);
    for (int e = off[0]; e < off[NV]; e++) begin
      checks++;
      if (!seen.exists(e) || seen[e] != 1) begin failures++; if (failures < 8) $display("FAIL edge %0d covered %0d times", e, seen.exists(e) ? seen[e] : 0); end
    end
    checks++;
    if (n_beats < exp_beats || n_beats > exp_beats + 4) begin
      failures++; $display("FAIL %0d beats, expected %0d", n_beats, exp_beats);
    end
    checks++;
    if (n_multi == 0 || n_split == 0 || n_span == 0) failures++;
    $display("%0d edges, %0d beats (ideal %0d), multi %0d split %0d span %0d",
             off[NV] - off[0], n_beats, exp_beats, n_multi, n_split, n_span);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
