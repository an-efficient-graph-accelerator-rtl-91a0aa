// ga_par_acc: the parallel accumulator, pipeline stage P6.
// A beat carries N update values (one per edge lane of a cacheline), a tag per
// lane naming which of the beat's scheduled vertices the lane belongs to, and
// for each of up to M scheduled vertices its ID and the lane of its last edge
// in this line. Structure, as in the paper's accumulator figure:
//   1. ga_src_acc   - tag-segmented Ladner-Fischer prefix over the N lanes,
//   2. ga_nm_mux    - picks, per vertex, the prefix at its last lane,
//   3. ga_crossbar  - sends vertex v to destination accumulator v mod M,
//   4. ga_dst_acc xM- merges partial results of the same vertex across beats,
//   5. ga_writeback xM - read-modify-write of finished vertices into the
//                        vertex memory banks (accumulator j owns banks j, j+M..).
// Timing: steps 1-2 sit between the input and a pipeline register (one beat
// per cycle, ready/valid), 3 is combinational into the accumulator
// registers, write-back adds two cycles. A beat whose vertices collide in the
// crossbar holds the register for extra cycles (back-pressure on in_ready).
// 'flush' empties the destination accumulators at the end of a run; 'idle'
// says nothing is left inside.
module ga_par_acc
  import ga_pkg::*;
#(
  parameter int N          = 16,
  parameter int M          = 8,
  parameter int NBANK      = 16,
  parameter int BANK_DEPTH = 106250,
  localparam int LANE_W = $clog2(N),
  localparam int TAG_W  = (M > 1) ? $clog2(M) : 1,
  localparam int BW     = $clog2(NBANK),
  localparam int AW     = $clog2(BANK_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  alg_e              alg,
  input  logic [AW-1:0]     dst_base,
  // beat input
  input  logic              in_valid,
  output logic              in_ready,
  input  val_t              in_val  [N],
  input  logic [TAG_W-1:0]  in_tag  [N],
  input  logic [M-1:0]      in_slot_vld,
  input  vid_t              in_slot_vid [M],
  input  logic [LANE_W-1:0] in_last_lane[M],
  input  logic              flush,
  output logic              idle,
  output logic              pipe_empty,   // no beat held before the crossbar
  // vertex memory write-back ports (B read, W write)
  output logic [NBANK-1:0]  b_en,
  output logic [AW-1:0]     b_addr [NBANK],
  input  val_t              b_data [NBANK],
  output logic [NBANK-1:0]  w_en,
  output logic [AW-1:0]     w_addr [NBANK],
  output val_t              w_data [NBANK],
  // statistics
  output logic              stat_conflict,   // crossbar stall cycle
  output logic [M-1:0]      stat_merge       // destination merge per unit
);
  // ---- 1+2: source accumulator and N:M multiplexer -----------------------
  val_t         pre [N];
  val_t         sel_val[M];
  logic [M-1:0] sel_vld;

  ga_src_acc #(.N(N), .TAG_W(TAG_W)) u_src (
    .alg(alg), .in_val(in_val), .in_tag(in_tag), .out_val(pre));
  ga_nm_mux #(.N(N), .M(M)) u_mux (
    .pre(pre), .slot_vld(in_slot_vld), .last_lane(in_last_lane),
    .sel_val(sel_val), .sel_vld(sel_vld));

  // ---- pipeline register ---------------------------------------------------
  logic         s_valid, x_ready;
  logic [M-1:0] s_vld;
  vid_t         s_vid[M];
  val_t         s_val[M];

  assign in_ready = !s_valid || x_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0; s_vld <= '0;
      for (int k = 0; k < M; k++) begin s_vid[k] <= '0; s_val[k] <= '0; end
    end else if (in_ready) begin
      s_valid <= in_valid;
      s_vld   <= in_valid ? sel_vld : '0;
      for (int k = 0; k < M; k++) begin
        s_vid[k] <= in_slot_vid[k];
        s_val[k] <= sel_val[k];
      end
    end
  end

  // ---- 3: crossbar ----------------------------------------------------------
  logic [M-1:0] x_vld;
  vid_t         x_vid[M];
  val_t         x_val[M];

  ga_crossbar #(.M(M)) u_xbar (
    .clk(clk), .rst_n(rst_n), .in_valid(s_valid), .in_ready(x_ready),
    .in_vld(s_vld), .in_vid(s_vid), .in_val(s_val),
    .out_vld(x_vld), .out_vid(x_vid), .out_val(x_val), .conflict(stat_conflict));

  // ---- 4+5: destination accumulators and write-back ------------------------
  logic [M-1:0]  d_busy, wb_vld, rd_en, wr_en;
  vid_t          wb_vid[M];
  val_t          wb_val[M], rd_data[M], wr_data[M];
  logic [BW-1:0] rd_bank[M], wr_bank[M];
  logic [AW-1:0] rd_addr[M], wr_addr[M];

  for (genvar j = 0; j < M; j++) begin : g_dst
    ga_dst_acc u_dst (
      .clk(clk), .rst_n(rst_n), .alg(alg),
      .in_vld(x_vld[j]), .in_vid(x_vid[j]), .in_val(x_val[j]), .flush(flush),
      .wb_vld(wb_vld[j]), .wb_vid(wb_vid[j]), .wb_val(wb_val[j]),
      .busy(d_busy[j]), .merged(stat_merge[j]));
    ga_writeback #(.NBANK(NBANK), .BANK_DEPTH(BANK_DEPTH)) u_wb (
      .clk(clk), .rst_n(rst_n), .alg(alg), .dst_base(dst_base),
      .wb_vld(wb_vld[j]), .wb_vid(wb_vid[j]), .wb_val(wb_val[j]),
      .rd_en(rd_en[j]), .rd_bank(rd_bank[j]), .rd_addr(rd_addr[j]), .rd_data(rd_data[j]),
      .wr_en(wr_en[j]), .wr_bank(wr_bank[j]), .wr_addr(wr_addr[j]), .wr_data(wr_data[j]));
    assign rd_data[j] = b_data[wr_bank[j]];
  end

  // bank b is served by accumulator b mod M only
  always_comb begin
    for (int b = 0; b < NBANK; b++) begin
      b_en[b]   = rd_en[b % M] && (rd_bank[b % M] == BW'(b));
      b_addr[b] = rd_addr[b % M];
      w_en[b]   = wr_en[b % M] && (wr_bank[b % M] == BW'(b));
      w_addr[b] = wr_addr[b % M];
      w_data[b] = wr_data[b % M];
    end
  end

  assign pipe_empty = !s_valid;
  assign idle = !s_valid && (d_busy == '0) && (wb_vld == '0) && (wr_en == '0);

  initial begin
    if (NBANK % M != 0) $error("ga_par_acc: NBANK must be a multiple of M");
  end
endmodule
