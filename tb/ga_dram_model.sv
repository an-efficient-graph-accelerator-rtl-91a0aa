// ga_dram_model: behavioural model of one off-chip memory read channel, for
// simulation only (the accelerator's DDR4 controller and DRAM are outside the
// design). It holds LINES cachelines of N 32-bit words in 'mem', which the
// testbench fills directly. Requests are taken when req_ready is high; with
// STALL=1 req_ready drops pseudo-randomly about one cycle in four. Each
// accepted line address returns its line exactly LAT cycles later, in order.
// Addresses beyond LINES return zeros.
module ga_dram_model #(
  parameter int N     = 16,
  parameter int LINES = 1024,
  parameter int LAT   = 8,
  parameter bit STALL = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  output logic        resp_valid,
  output logic [31:0] resp_data [N]
);
  logic [31:0] mem [LINES][N];
  logic        pv [LAT];
  logic [31:0] pa [LAT];
  logic        rdy_q;
  int unsigned requests;

  assign req_ready = rdy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) begin pv[s] <= 1'b0; pa[s] <= '0; end
      rdy_q <= 1'b1;
      requests <= 0;
    end else begin
      rdy_q <= STALL ? (($urandom % 4) != 0) : 1'b1;
      pv[0] <= req_valid && req_ready;
      pa[0] <= req_addr;
      if (req_valid && req_ready) requests <= requests + 1;
      for (int s = 1; s < LAT; s++) begin pv[s] <= pv[s-1]; pa[s] <= pa[s-1]; end
    end
  end

  assign resp_valid = pv[LAT-1];
  always_comb
    for (int i = 0; i < N; i++)
      resp_data[i] = (pa[LAT-1] < LINES) ? mem[pa[LAT-1]][i] : '0;
endmodule
