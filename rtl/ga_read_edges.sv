// ga_read_edges: pipeline stage P2, "Read Edges", with the degree-aware
// scheduling of the paper.
// * Address generator: requests every edge cacheline of the run in order
//   (line address edge_base + i / N for edge index i in [edge_begin,
//   edge_end)), credit-limited to EL_FIFO_DEPTH lines in flight or queued.
//   Responses (N 32-bit source IDs, one per edge pipeline) are queued and
//   passed on to P3 with a lane-valid mask for partial first/last lines.
// * Vertex units: M FIFOs holding the vertices dealt by P1 with their edge
//   offsets. Each cycle the matching logic walks the unit heads in vertex
//   order starting at unit hp and schedules the longest run of heads whose
//   first edge lies before the end of the current line (ls..le). A scheduled
//   vertex whose last edge is inside the line is popped; if the last scheduled
//   vertex runs past the line end the line is finished and the next line is
//   matched. So 1..M vertices are scheduled per cycle depending on their
//   degrees: many low-degree vertices share a line, a high-degree vertex
//   spans lines alone. A line holding more than M vertices takes several
//   beats (the paper's sparse-graph case).
// * Mask generator: for each scheduled vertex the lanes [first,last] of its
//   edges in the line; they become per-lane tags (slot number) and the lane
//   of its last edge, which the N:M multiplexer uses.
// One schedule beat per cycle goes to a queue read by P4; line_end marks the
// last beat of a line. The scheduling scheme follows the paper's text; the
// queue sizes, the beat format and the exact head-walk are own choices.
module ga_read_edges
  import ga_pkg::*;
#(
  parameter int N              = 16,
  parameter int M              = 8,
  parameter int VFIFO_DEPTH    = 8,
  parameter int EL_FIFO_DEPTH  = 16,
  parameter int SCH_FIFO_DEPTH = 8,
  localparam int LANE_W = $clog2(N),
  localparam int TAG_W  = (M > 1) ? $clog2(M) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  eoff_t             edge_begin,
  input  eoff_t             edge_end,
  input  eoff_t             edge_base,
  // vertices from P1
  input  logic [M-1:0]      vi_valid,
  input  vid_t              vi_vid   [M],
  input  eoff_t             vi_left  [M],
  input  eoff_t             vi_right [M],
  output logic              vi_ready,
  // off-chip memory edge channel
  output logic              req_valid,
  input  logic              req_ready,
  output eoff_t             req_addr,
  input  logic              resp_valid,
  input  vid_t              resp_data [N],
  // edge line to P3
  output logic              el_valid,
  input  logic              el_ready,
  output vid_t              el_src   [N],
  output logic [N-1:0]      el_lane_vld,
  // schedule beat to P4
  output logic              sb_valid,
  input  logic              sb_ready,
  output logic [M-1:0]      sb_slot_vld,
  output vid_t              sb_vid      [M],
  output logic [LANE_W-1:0] sb_last_lane[M],
  output logic [N-1:0]      sb_lane_vld,
  output logic [TAG_W-1:0]  sb_lane_tag [N],
  output logic              sb_line_end,
  output logic              done,
  output logic              beat_push,    // a schedule beat was produced
  // statistics
  output logic              stat_multi,   // beat with more than one vertex
  output logic              stat_split,   // line needing more than one beat
  output logic              stat_span     // vertex continuing into next line
);
  localparam int MW = (M > 1) ? $clog2(M) : 1;
  localparam int CW = $clog2(EL_FIFO_DEPTH + 1) + 1;
  localparam int VW = VID_W + 2 * EOFF_W;
  localparam int SW = M * (1 + VID_W + LANE_W) + N * (1 + TAG_W) + 1;

  logic  run, rq_done;
  eoff_t rq_line, last_line, out_line, mline;
  logic [MW-1:0] hp;              // vertex unit holding the oldest vertex
  logic [CW-1:0] credit;

  // ---------------- address generator and edge pipelines ---------------
  logic [N*VID_W-1:0] eq_din, eq_dout;
  logic eq_empty, eq_full, eq_pop;
  logic [$clog2(EL_FIFO_DEPTH+1)-1:0] eq_cnt;

  for (genvar i = 0; i < N; i++) begin : g_edge
    assign eq_din[i*VID_W +: VID_W] = resp_data[i];
    assign el_src[i] = eq_dout[i*VID_W +: VID_W];
    assign el_lane_vld[i] = (out_line * N + eoff_t'(i) >= edge_begin) &&
                            (out_line * N + eoff_t'(i) <  edge_end);
  end

  ga_fifo #(.W(N*VID_W), .DEPTH(EL_FIFO_DEPTH)) u_eq (
    .clk(clk), .rst_n(rst_n), .push(resp_valid), .din(eq_din), .pop(eq_pop),
    .dout(eq_dout), .empty(eq_empty), .full(eq_full), .count(eq_cnt));

  assign req_valid = !rq_done && (credit < CW'(EL_FIFO_DEPTH));
  assign req_addr  = edge_base + rq_line;
  assign el_valid  = !eq_empty;
  assign eq_pop    = el_valid && el_ready;

  // ---------------- vertex units -----------------------------------------
  logic [M-1:0] vf_empty, vf_full, vf_pop;
  vid_t         h_vid  [M];
  eoff_t        h_left [M], h_right[M];

  for (genvar j = 0; j < M; j++) begin : g_vu
    logic [VW-1:0] din, dout;
    logic [$clog2(VFIFO_DEPTH+1)-1:0] cnt;
    assign din = {vi_vid[j], vi_left[j], vi_right[j]};
    assign {h_vid[j], h_left[j], h_right[j]} = dout;
    ga_fifo #(.W(VW), .DEPTH(VFIFO_DEPTH)) u_vf (
      .clk(clk), .rst_n(rst_n), .push(vi_valid[j] && vi_ready), .din(din),
      .pop(vf_pop[j]), .dout(dout), .empty(vf_empty[j]), .full(vf_full[j]), .count(cnt));
  end
  assign vi_ready = (vf_full == '0);

  // ---------------- matching and mask generation ---------------------------
  logic [SW-1:0] sq_din, sq_dout;
  logic sq_empty, sq_full;
  logic [$clog2(SCH_FIFO_DEPTH+1)-1:0] sq_cnt;

  eoff_t ls, le;
  logic  [M-1:0] m_vld;
  vid_t  m_vid [M];
  logic  [LANE_W-1:0] m_first[M], m_last[M];
  logic  [N-1:0] m_lane_vld;
  logic  [TAG_W-1:0] m_lane_tag[N];
  logic  line_done, emit, any;
  logic  [MW:0] n_pop;
  logic  [MW-1:0] jj [M];

  always_comb begin
    logic chain;
    eoff_t lo, hi;
    ls = mline * N;
    le = (ls + N > edge_end) ? edge_end : ls + N;
    chain = run && (mline <= last_line);
    m_vld = '0; vf_pop = '0; line_done = 1'b0; n_pop = '0;
    m_lane_vld = '0;
    for (int i = 0; i < N; i++) m_lane_tag[i] = '0;
    for (int k = 0; k < M; k++) begin
      jj[k] = MW'((int'(hp) + k) % M);
      m_vid[k] = h_vid[jj[k]];
      lo = (h_left[jj[k]]  > ls) ? h_left[jj[k]]  : ls;
      hi = (h_right[jj[k]] < le) ? h_right[jj[k]] : le;
      m_first[k] = LANE_W'(lo - ls);
      m_last[k]  = LANE_W'(hi - ls - 1);
      chain = chain && !vf_empty[jj[k]] && (h_left[jj[k]] < le);
      m_vld[k] = chain;
    end
    any  = m_vld[0];
    emit = any && !sq_full;
    for (int k = 0; k < M; k++) begin
      if (m_vld[k]) begin
        if (h_right[jj[k]] >= le) line_done = 1'b1;
        if (h_right[jj[k]] <= le && emit) begin
          vf_pop[jj[k]] = 1'b1;
          n_pop = n_pop + 1'b1;
        end
        for (int i = 0; i < N; i++)
          if (i >= m_first[k] && i <= m_last[k]) begin
            m_lane_vld[i] = 1'b1;
            m_lane_tag[i] = TAG_W'(k);
          end
      end
    end
    stat_multi = emit && m_vld[1 % M] && (M > 1);
    stat_split = emit && !line_done;
    stat_span  = 1'b0;
    for (int k = 0; k < M; k++)
      if (emit && m_vld[k] && h_right[jj[k]] > le) stat_span = 1'b1;
  end

  // pack / unpack the schedule beat
  always_comb begin
    sq_din = '0;
    for (int k = 0; k < M; k++)
      sq_din[k*(1+VID_W+LANE_W) +: (1+VID_W+LANE_W)] = {m_vld[k], m_vid[k], m_last[k]};
    for (int i = 0; i < N; i++)
      sq_din[M*(1+VID_W+LANE_W) + i*(1+TAG_W) +: (1+TAG_W)] = {m_lane_vld[i], m_lane_tag[i]};
    sq_din[SW-1] = line_done;
  end
  always_comb begin
    for (int k = 0; k < M; k++)
      {sb_slot_vld[k], sb_vid[k], sb_last_lane[k]} = sq_dout[k*(1+VID_W+LANE_W) +: (1+VID_W+LANE_W)];
    for (int i = 0; i < N; i++)
      {sb_lane_vld[i], sb_lane_tag[i]} = sq_dout[M*(1+VID_W+LANE_W) + i*(1+TAG_W) +: (1+TAG_W)];
    sb_line_end = sq_dout[SW-1];
  end

  ga_fifo #(.W(SW), .DEPTH(SCH_FIFO_DEPTH)) u_sq (
    .clk(clk), .rst_n(rst_n), .push(emit), .din(sq_din), .pop(sb_valid && sb_ready),
    .dout(sq_dout), .empty(sq_empty), .full(sq_full), .count(sq_cnt));
  assign sb_valid  = !sq_empty;
  assign beat_push = emit;

  // ---------------- control ------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; rq_done <= 1'b1; credit <= '0;
      rq_line <= '0; last_line <= '0; out_line <= '0; mline <= '0; hp <= '0;
    end else if (start) begin
      last_line  <= (edge_end - eoff_t'(1)) / N;
      rq_line    <= edge_begin / N;
      out_line   <= edge_begin / N;
      mline      <= edge_begin / N;
      hp <= '0; credit <= '0;
      run     <= (edge_end > edge_begin);
      done    <= !(edge_end > edge_begin);
      rq_done <= !(edge_end > edge_begin);
    end else begin
      // address generator and edge queue run until every line is fetched,
      // independently of the matching below
      if (req_valid && req_ready) begin
        rq_line <= rq_line + eoff_t'(1);
        if (rq_line == last_line) rq_done <= 1'b1;
      end
      credit <= credit + CW'(req_valid && req_ready) - CW'(eq_pop);
      if (eq_pop) out_line <= out_line + eoff_t'(1);
      if (run && emit) begin
        hp <= MW'((int'(hp) + int'(n_pop)) % M);
        if (line_done) begin
          mline <= mline + eoff_t'(1);
          if (mline == last_line) begin run <= 1'b0; done <= 1'b1; end
        end
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) resp_valid |-> !eq_full);
endmodule
