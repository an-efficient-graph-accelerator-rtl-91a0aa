// ga_nm_mux: N:M multiplexer of the parallel accumulator (stage P6). For each
// of the M vertices scheduled in a beat it picks the source-accumulator output
// at the lane holding that vertex's last edge in the line, as the paper does
// ("selects the data based on edge offsets"): the lane index comes from the
// vertex's right edge offset, computed in P2. Slots that are not valid give
// valid=0. Combinational.
module ga_nm_mux
  import ga_pkg::*;
#(
  parameter int N = 16,
  parameter int M = 8,
  localparam int LANE_W = $clog2(N)
) (
  input  val_t              pre     [N],
  input  logic [M-1:0]      slot_vld,
  input  logic [LANE_W-1:0] last_lane[M],
  output val_t              sel_val [M],
  output logic [M-1:0]      sel_vld
);
  always_comb begin
    for (int k = 0; k < M; k++) begin
      sel_val[k] = pre[last_lane[k]];
      sel_vld[k] = slot_vld[k];
    end
  end
endmodule
