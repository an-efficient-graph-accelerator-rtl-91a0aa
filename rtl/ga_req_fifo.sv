// ga_req_fifo: request FIFO of one on-chip memory bank (stage P3). The
// shuffle can send up to NP requests of one edge line to the same bank in a
// single cycle, so this FIFO accepts push_cnt (0..NP) entries per cycle,
// given packed in push_data[0..push_cnt-1], and releases one entry per cycle,
// the bank's single read port. The producer must check 'free' first; excess
// pushes are dropped (and flagged by an assertion). Output is the head entry,
// first-word fall-through.
module ga_req_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 32,
  parameter int NP    = 16,
  localparam int AW = $clog2(DEPTH),
  localparam int CW = $clog2(DEPTH + 1),
  localparam int PW = $clog2(NP + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [PW-1:0] push_cnt,
  input  logic [W-1:0]  push_data [NP],
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic          empty,
  output logic [CW-1:0] free
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [CW-1:0] cnt;
  logic          do_pop;

  assign empty  = (cnt == '0);
  assign free   = CW'(DEPTH) - cnt;
  assign dout   = mem[rp];
  assign do_pop = pop && !empty;

  always_ff @(posedge clk) begin
    for (int i = 0; i < NP; i++)
      if (i < int'(push_cnt)) mem[AW'((int'(wp) + i) % DEPTH)] <= push_data[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      wp  <= AW'((int'(wp) + int'(push_cnt)) % DEPTH);
      if (do_pop) rp <= AW'((int'(rp) + 1) % DEPTH);
      cnt <= cnt + CW'(push_cnt) - CW'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  int'(push_cnt) <= int'(free));
endmodule
