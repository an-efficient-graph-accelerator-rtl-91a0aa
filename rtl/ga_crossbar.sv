// ga_crossbar: crossbar switch between the N:M multiplexer and the M
// destination vertex accumulators. A result for vertex v goes to accumulator
// (v mod M), the paper's "last log(m) bits ... for m replications", so every
// partial result of one vertex meets the same accumulator. The paper does not
// say what happens when two slots of one beat map to the same accumulator
// (possible when vertex IDs in a beat are not consecutive); here the lowest
// pending slot wins each cycle and the others stay pending in a mask
// register, so the beat takes several cycles and in_ready is held low (a
// stall). Slot order is vertex order, so one accumulator always sees its
// vertices in edge order. A beat is accepted (in_ready=1) in the cycle its last
// pending slot is granted. Output is combinational from the inputs and the
// pending mask.
module ga_crossbar
  import ga_pkg::*;
#(
  parameter int M = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [M-1:0] in_vld,
  input  vid_t         in_vid [M],
  input  val_t         in_val [M],
  output logic [M-1:0] out_vld,
  output vid_t         out_vid[M],
  output val_t         out_val[M],
  output logic         conflict   // a beat needed more than one cycle
);
  localparam int MW = (M > 1) ? $clog2(M) : 1;
  logic [M-1:0] done_q;     // slots of the current beat already delivered
  logic [M-1:0] grant, pend;

  logic [M-1:0]  taken;
  logic [MW-1:0] dsel [M];

  always_comb begin
    taken = '0;
    grant = '0;
    pend  = in_valid ? (in_vld & ~done_q) : '0;
    for (int d = 0; d < M; d++) begin
      out_vld[d] = 1'b0; out_vid[d] = '0; out_val[d] = '0;
    end
    for (int k = 0; k < M; k++) begin
      dsel[k] = MW'(in_vid[k] % M);
      if (pend[k] && !taken[dsel[k]]) begin
        taken[dsel[k]]   = 1'b1;
        grant[k]         = 1'b1;
        out_vld[dsel[k]] = 1'b1;
        out_vid[dsel[k]] = in_vid[k];
        out_val[dsel[k]] = in_val[k];
      end
    end
    in_ready = ((pend & ~grant) == '0);
    conflict = in_valid && !in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_q <= '0;
    else if (in_valid) done_q <= in_ready ? '0 : (done_q | grant);
  end
endmodule
