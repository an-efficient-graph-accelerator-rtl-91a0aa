// ga_schedule: pipeline stage P4, "Schedule". It pairs the reordered source
// values of an edge line (from P3) with the schedule beats P2 produced for
// that line. P2's beats and P3's lines come in the same line order, so the
// pairing is a simple join: every output beat consumes one schedule beat and
// copies the line's values; the line itself is released with the beat marked
// line_end. A lane is valid in the output only if the line holds an edge there
// and the beat schedules its vertex. The paper names this stage only; the
// join is this design's reading of it. Output is registered, valid/ready.
module ga_schedule
  import ga_pkg::*;
#(
  parameter int N = 16,
  parameter int M = 8,
  localparam int LANE_W = $clog2(N),
  localparam int TAG_W  = (M > 1) ? $clog2(M) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // reordered line from P3
  input  logic              lv_valid,
  output logic              lv_ready,
  input  val_t              lv_val [N],
  input  logic [N-1:0]      lv_lane_vld,
  // schedule beat from P2
  input  logic              sb_valid,
  output logic              sb_ready,
  input  logic [M-1:0]      sb_slot_vld,
  input  vid_t              sb_vid      [M],
  input  logic [LANE_W-1:0] sb_last_lane[M],
  input  logic [N-1:0]      sb_lane_vld,
  input  logic [TAG_W-1:0]  sb_lane_tag [N],
  input  logic              sb_line_end,
  // joined beat to P5
  output logic              o_valid,
  input  logic              o_ready,
  output val_t              o_val [N],
  output logic [N-1:0]      o_lane_vld,
  output logic [TAG_W-1:0]  o_lane_tag [N],
  output logic [M-1:0]      o_slot_vld,
  output vid_t              o_vid      [M],
  output logic [LANE_W-1:0] o_last_lane[M]
);
  logic fire;
  assign fire     = lv_valid && sb_valid && (!o_valid || o_ready);
  assign sb_ready = fire;
  assign lv_ready = fire && sb_line_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0; o_lane_vld <= '0; o_slot_vld <= '0;
      for (int i = 0; i < N; i++) begin o_val[i] <= '0; o_lane_tag[i] <= '0; end
      for (int k = 0; k < M; k++) begin o_vid[k] <= '0; o_last_lane[k] <= '0; end
    end else if (fire) begin
      o_valid    <= 1'b1;
      o_lane_vld <= lv_lane_vld & sb_lane_vld;
      o_slot_vld <= sb_slot_vld;
      for (int i = 0; i < N; i++) begin o_val[i] <= lv_val[i]; o_lane_tag[i] <= sb_lane_tag[i]; end
      for (int k = 0; k < M; k++) begin o_vid[k] <= sb_vid[k]; o_last_lane[k] <= sb_last_lane[k]; end
    end else if (o_ready) begin
      o_valid <= 1'b0;
    end
  end

  a_lane_in_line: assert property (@(posedge clk) disable iff (!rst_n)
                                   fire |-> ((sb_lane_vld & ~lv_lane_vld) == '0));
endmodule
