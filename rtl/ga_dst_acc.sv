// ga_dst_acc: one destination vertex accumulator (stage P6). As drawn in the
// paper it is an ID register, a data register, a comparator and an adder (here
// the reduce operator of the algorithm). Every input whose ID equals the held
// ID is merged into the data register; an input with a different ID makes the
// held vertex leave on the write-back output and takes its place. So the
// partial results of a high-degree vertex, which arrive one after the other,
// are merged on chip and written to memory once. 'flush' (end of a run)
// writes the held vertex back and empties the unit; an input arriving with
// flush is accepted after the held vertex leaves. Write-back output is
// registered: one cycle after the deciding input.
module ga_dst_acc
  import ga_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  alg_e alg,
  input  logic in_vld,
  input  vid_t in_vid,
  input  val_t in_val,
  input  logic flush,
  output logic wb_vld,
  output vid_t wb_vid,
  output val_t wb_val,
  output logic busy,      // holds a vertex
  output logic merged     // an input was merged this cycle (for statistics)
);
  logic held_vld;
  vid_t id_q;
  val_t data_q;
  logic same;

  assign same   = held_vld && in_vld && (in_vid == id_q);
  assign merged = same && !flush;
  assign busy   = held_vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_vld <= 1'b0; id_q <= '0; data_q <= '0;
      wb_vld <= 1'b0; wb_vid <= '0; wb_val <= '0;
    end else begin
      wb_vld <= 1'b0;
      if (flush) begin
        if (held_vld) begin
          wb_vld <= 1'b1; wb_vid <= id_q;
          wb_val <= same ? reduce(alg, data_q, in_val) : data_q;
        end
        held_vld <= in_vld && !same;
        if (in_vld && !same) begin id_q <= in_vid; data_q <= in_val; end
      end else if (in_vld) begin
        if (same) begin
          data_q <= reduce(alg, data_q, in_val);
        end else begin
          if (held_vld) begin
            wb_vld <= 1'b1; wb_vid <= id_q; wb_val <= data_q;
          end
          held_vld <= 1'b1; id_q <= in_vid; data_q <= in_val;
        end
      end
    end
  end
endmodule
