// ga_process: pipeline stage P5, "Process Vertex". For every edge lane it
// turns the source vertex value into the update sent to the destination,
// using the algorithm's edge function (ga_pkg::edge_update): BFS adds one to
// the depth (saturating at all ones, the "unvisited" value), WCC and PageRank
// pass the label / contribution on. PageRank's division by the source's
// out-degree is assumed already applied to the stored value (the host stores
// rank/outdeg), since the paper gives no divider. Lanes that carry no
// scheduled edge get the identity of the reduce operator so they cannot
// disturb the accumulation. META_W bits of side information (tags and
// scheduled vertices) travel alongside unchanged. One register stage,
// valid/ready.
module ga_process
  import ga_pkg::*;
#(
  parameter int N      = 16,
  parameter int META_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  alg_e              alg,
  input  logic              i_valid,
  output logic              i_ready,
  input  val_t              i_val [N],
  input  logic [N-1:0]      i_lane_vld,
  input  logic [META_W-1:0] i_meta,
  output logic              o_valid,
  input  logic              o_ready,
  output val_t              o_upd [N],
  output logic [META_W-1:0] o_meta
);
  assign i_ready = !o_valid || o_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0; o_meta <= '0;
      for (int i = 0; i < N; i++) o_upd[i] <= '0;
    end else if (i_ready) begin
      o_valid <= i_valid;
      o_meta  <= i_meta;
      for (int i = 0; i < N; i++)
        o_upd[i] <= i_lane_vld[i] ? edge_update(alg, i_val[i]) : red_identity(alg);
    end
  end
endmodule
