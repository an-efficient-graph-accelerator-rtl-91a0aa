// ga_fifo: synchronous single-push, single-pop FIFO with a registered memory
// array and first-word fall-through output. Used for the vertex-unit queues,
// the edge-line queue and the schedule queue. push is ignored when full, pop
// when empty. 'count' gives the occupancy so producers can keep credits.
module ga_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + AW'(1);
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + AW'(1);
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end
endmodule
