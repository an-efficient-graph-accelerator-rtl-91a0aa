// ga_top: the graph accelerator. One run processes the in-edges of the
// destination vertices [v_begin, v_end) stored in CSC form in off-chip
// memory: an offset table (off[v], line address off_base + v / N) and an
// edge list of 32-bit source IDs (line address edge_base + i / N, edges
// edge_begin..edge_end-1). For every destination v it computes
//   dst[v] = reduce(dst[v], reduce over in-edges (u,v) of update(src[u]))
// in the on-chip vertex memory, where src and dst are arrays at word offsets
// src_base and dst_base of the banks (the same offset gives in-place updates,
// suited to BFS and WCC; PageRank uses two arrays). reduce is min for BFS and
// WCC and add for PageRank.
// The six pipeline stages:
//   P1 ga_get_vertex   - destination vertices and their edge ranges
//   P2 ga_read_edges   - sequential edge-line reads, degree-aware scheduling
//   P3 ga_read_vertex  - banked, out-of-order source reads with reordering
//   P4 ga_schedule     - joins source values with the schedule
//   P5 ga_process      - per-edge update function
//   P6 ga_par_acc      - parallel accumulator and write-back
// plus ga_vertex_mem, the banked on-chip vertex memory. Off-chip memory is
// reached through two line-read channels (offsets and edges) that a memory
// controller outside this module serves in order; the host loads and reads
// vertex data through the host port while no run is active.
// Control: a one-cycle 'start' latches nothing (configuration inputs must stay
// stable during the run); 'done' pulses for one cycle once every beat has
// left the accumulator, the destination accumulators were flushed and their
// write-backs finished. 'events' carries per-cycle statistics flags.
module ga_top
  import ga_pkg::*;
#(
  parameter int N              = 16,
  parameter int M              = 8,
  parameter int NBANK          = 16,
  parameter int BANK_DEPTH     = 106250,
  parameter int ROB_LINES      = 8,
  parameter int REQ_DEPTH      = 32,
  parameter int VFIFO_DEPTH    = 8,
  parameter int OFF_FIFO_DEPTH = 8,
  parameter int EL_FIFO_DEPTH  = 16,
  parameter int SCH_FIFO_DEPTH = 8,
  localparam int AW = $clog2(BANK_DEPTH),
  localparam int BW = $clog2(NBANK)
) (
  input  logic          clk,
  input  logic          rst_n,
  // run configuration and control
  input  alg_e          alg,
  input  vid_t          v_begin,
  input  vid_t          v_end,
  input  eoff_t         off_base,
  input  eoff_t         edge_begin,
  input  eoff_t         edge_end,
  input  eoff_t         edge_base,
  input  logic [AW-1:0] src_base,
  input  logic [AW-1:0] dst_base,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // off-chip memory: offset table channel
  output logic          off_req_valid,
  input  logic          off_req_ready,
  output eoff_t         off_req_addr,
  input  logic          off_resp_valid,
  input  eoff_t         off_resp_data [N],
  // off-chip memory: edge list channel
  output logic          edge_req_valid,
  input  logic          edge_req_ready,
  output eoff_t         edge_req_addr,
  input  logic          edge_resp_valid,
  input  vid_t          edge_resp_data [N],
  // host access to the vertex memory (flat address word * NBANK + bank)
  input  logic             host_en,
  input  logic             host_we,
  input  logic [BW+AW-1:0] host_addr,
  input  val_t             host_wdata,
  output val_t             host_rdata,
  output ga_events_t       events
);
  localparam int LANE_W = $clog2(N);
  localparam int TAG_W  = (M > 1) ? $clog2(M) : 1;
  localparam int META_W = N * (1 + TAG_W) + M * (1 + VID_W + LANE_W);

  // ---------------- P1 ----------------------------------------------------------
  logic [M-1:0] v_valid;
  vid_t         v_vid[M];
  eoff_t        v_left[M], v_right[M];
  logic         v_ready, p1_done;

  ga_get_vertex #(.N(N), .M(M), .OFF_FIFO_DEPTH(OFF_FIFO_DEPTH)) u_p1 (
    .clk(clk), .rst_n(rst_n), .start(start), .v_begin(v_begin), .v_end(v_end),
    .off_base(off_base),
    .req_valid(off_req_valid), .req_ready(off_req_ready), .req_addr(off_req_addr),
    .resp_valid(off_resp_valid), .resp_data(off_resp_data),
    .vo_valid(v_valid), .vo_vid(v_vid), .vo_left(v_left), .vo_right(v_right),
    .vo_ready(v_ready), .done(p1_done));

  // ---------------- P2 ----------------------------------------------------------
  logic              el_valid, el_ready;
  vid_t              el_src[N];
  logic [N-1:0]      el_lane_vld;
  logic              sb_valid, sb_ready, sb_line_end, p2_done;
  logic [M-1:0]      sb_slot_vld;
  vid_t              sb_vid[M];
  logic [LANE_W-1:0] sb_last_lane[M];
  logic [N-1:0]      sb_lane_vld;
  logic [TAG_W-1:0]  sb_lane_tag[N];
  logic              beat_push;

  ga_read_edges #(.N(N), .M(M), .VFIFO_DEPTH(VFIFO_DEPTH), .EL_FIFO_DEPTH(EL_FIFO_DEPTH),
                  .SCH_FIFO_DEPTH(SCH_FIFO_DEPTH)) u_p2 (
    .clk(clk), .rst_n(rst_n), .start(start), .edge_begin(edge_begin), .edge_end(edge_end),
    .edge_base(edge_base),
    .vi_valid(v_valid), .vi_vid(v_vid), .vi_left(v_left), .vi_right(v_right), .vi_ready(v_ready),
    .req_valid(edge_req_valid), .req_ready(edge_req_ready), .req_addr(edge_req_addr),
    .resp_valid(edge_resp_valid), .resp_data(edge_resp_data),
    .el_valid(el_valid), .el_ready(el_ready), .el_src(el_src), .el_lane_vld(el_lane_vld),
    .sb_valid(sb_valid), .sb_ready(sb_ready), .sb_slot_vld(sb_slot_vld), .sb_vid(sb_vid),
    .sb_last_lane(sb_last_lane), .sb_lane_vld(sb_lane_vld), .sb_lane_tag(sb_lane_tag),
    .sb_line_end(sb_line_end), .done(p2_done), .beat_push(beat_push),
    .stat_multi(events.multi_vertex), .stat_split(events.line_split),
    .stat_span(events.vertex_span));

  // ---------------- P3 and vertex memory -----------------------------------------
  logic [NBANK-1:0] a_en, b_en, w_en;
  logic [AW-1:0]    a_addr[NBANK], b_addr[NBANK], w_addr[NBANK];
  val_t             a_data[NBANK], b_data[NBANK], w_data[NBANK];
  logic             lv_valid, lv_ready;
  val_t             lv_val[N];
  logic [N-1:0]     lv_lane_vld;

  ga_read_vertex #(.N(N), .NBANK(NBANK), .ROB_LINES(ROB_LINES), .REQ_DEPTH(REQ_DEPTH),
                   .BANK_DEPTH(BANK_DEPTH)) u_p3 (
    .clk(clk), .rst_n(rst_n), .src_base(src_base),
    .in_valid(el_valid), .in_ready(el_ready), .in_src(el_src), .in_lane_vld(el_lane_vld),
    .a_en(a_en), .a_addr(a_addr), .a_data(a_data),
    .out_valid(lv_valid), .out_ready(lv_ready), .out_val(lv_val), .out_lane_vld(lv_lane_vld),
    .stat_bank_conflict(events.bank_conflict), .stat_ooo(events.out_of_order),
    .stat_stall(events.p3_stall));

  ga_vertex_mem #(.NBANK(NBANK), .BANK_DEPTH(BANK_DEPTH)) u_vmem (
    .clk(clk), .a_en(a_en), .a_addr(a_addr), .a_data(a_data),
    .b_en(b_en), .b_addr(b_addr), .b_data(b_data),
    .w_en(w_en), .w_addr(w_addr), .w_data(w_data),
    .host_en(host_en), .host_we(host_we), .host_addr(host_addr),
    .host_wdata(host_wdata), .host_rdata(host_rdata));

  // ---------------- P4 ----------------------------------------------------------
  logic              j_valid, j_ready;
  val_t              j_val[N];
  logic [N-1:0]      j_lane_vld;
  logic [TAG_W-1:0]  j_lane_tag[N];
  logic [M-1:0]      j_slot_vld;
  vid_t              j_vid[M];
  logic [LANE_W-1:0] j_last_lane[M];

  ga_schedule #(.N(N), .M(M)) u_p4 (
    .clk(clk), .rst_n(rst_n),
    .lv_valid(lv_valid), .lv_ready(lv_ready), .lv_val(lv_val), .lv_lane_vld(lv_lane_vld),
    .sb_valid(sb_valid), .sb_ready(sb_ready), .sb_slot_vld(sb_slot_vld), .sb_vid(sb_vid),
    .sb_last_lane(sb_last_lane), .sb_lane_vld(sb_lane_vld), .sb_lane_tag(sb_lane_tag),
    .sb_line_end(sb_line_end),
    .o_valid(j_valid), .o_ready(j_ready), .o_val(j_val), .o_lane_vld(j_lane_vld),
    .o_lane_tag(j_lane_tag), .o_slot_vld(j_slot_vld), .o_vid(j_vid), .o_last_lane(j_last_lane));

  // ---------------- P5 ----------------------------------------------------------
  logic [META_W-1:0] j_meta, p_meta;
  logic              p_valid, p_ready;
  val_t              p_upd[N];
  logic [TAG_W-1:0]  p_lane_tag[N];
  logic [M-1:0]      p_slot_vld;
  vid_t              p_vid[M];
  logic [LANE_W-1:0] p_last_lane[M];
  logic [N-1:0]      p_lane_vld_unused;

  always_comb begin
    for (int i = 0; i < N; i++)
      j_meta[i*(1+TAG_W) +: 1+TAG_W] = {j_lane_vld[i], j_lane_tag[i]};
    for (int k = 0; k < M; k++)
      j_meta[N*(1+TAG_W) + k*(1+VID_W+LANE_W) +: 1+VID_W+LANE_W] =
        {j_slot_vld[k], j_vid[k], j_last_lane[k]};
    for (int i = 0; i < N; i++)
      {p_lane_vld_unused[i], p_lane_tag[i]} = p_meta[i*(1+TAG_W) +: 1+TAG_W];
    for (int k = 0; k < M; k++)
      {p_slot_vld[k], p_vid[k], p_last_lane[k]} =
        p_meta[N*(1+TAG_W) + k*(1+VID_W+LANE_W) +: 1+VID_W+LANE_W];
  end

  ga_process #(.N(N), .META_W(META_W)) u_p5 (
    .clk(clk), .rst_n(rst_n), .alg(alg),
    .i_valid(j_valid), .i_ready(j_ready), .i_val(j_val), .i_lane_vld(j_lane_vld),
    .i_meta(j_meta), .o_valid(p_valid), .o_ready(p_ready), .o_upd(p_upd), .o_meta(p_meta));

  // ---------------- P6 ----------------------------------------------------------
  logic         flush, acc_idle, acc_empty;
  logic [M-1:0] merge;

  ga_par_acc #(.N(N), .M(M), .NBANK(NBANK), .BANK_DEPTH(BANK_DEPTH)) u_p6 (
    .clk(clk), .rst_n(rst_n), .alg(alg), .dst_base(dst_base),
    .in_valid(p_valid), .in_ready(p_ready), .in_val(p_upd), .in_tag(p_lane_tag),
    .in_slot_vld(p_slot_vld), .in_slot_vid(p_vid), .in_last_lane(p_last_lane),
    .flush(flush), .idle(acc_idle), .pipe_empty(acc_empty),
    .b_en(b_en), .b_addr(b_addr), .b_data(b_data),
    .w_en(w_en), .w_addr(w_addr), .w_data(w_data),
    .stat_conflict(events.xbar_conflict), .stat_merge(merge));
  assign events.dst_merge = |merge;

  // ---------------- run control ----------------------------------------------------
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH, S_WAIT} state_e;
  state_e st;
  logic [31:0] beats_out;   // schedule beats produced by P2 and not yet taken by P6

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; beats_out <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      beats_out <= beats_out + 32'(beat_push) - 32'(p_valid && p_ready);
      case (st)
        S_IDLE:  if (start) st <= S_RUN;
        S_RUN:   if (p1_done && p2_done && beats_out == '0 && acc_empty) st <= S_FLUSH;
        S_FLUSH: st <= S_WAIT;
        S_WAIT:  if (acc_idle) begin st <= S_IDLE; done <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign flush = (st == S_FLUSH);
  assign busy  = (st != S_IDLE);
endmodule
