// ga_writeback: vertex data write-back for one destination accumulator
// (stage P6 -> on-chip vertex memory). A finished vertex v is merged into the
// vertex memory with the reduce operator: cycle 0 reads word
// (dst_base + v / NBANK) of bank (v mod NBANK) on the bank's write-back read
// port, cycle 1 writes reduce(old, value) to the same place. The paper only
// names the write-back; doing a read-modify-write is this design's choice. It
// lets a vertex that is written more than once (graph partitions, or a run
// split over several calls) add up correctly, and lets the host prepare the
// target array: copy of the current values for BFS/WCC (min), or the
// constant epsilon for PageRank (add). Accumulator j only ever sees vertices
// with v mod M = j, so it owns banks j, j+M, ...; no arbitration is needed.
// One write-back per cycle is accepted, fully pipelined.
module ga_writeback
  import ga_pkg::*;
#(
  parameter int NBANK      = 16,
  parameter int BANK_DEPTH = 106250,
  localparam int BW = $clog2(NBANK),
  localparam int AW = $clog2(BANK_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  alg_e          alg,
  input  logic [AW-1:0] dst_base,
  input  logic          wb_vld,
  input  vid_t          wb_vid,
  input  val_t          wb_val,
  // read of the old value (data returns one cycle later on rd_data)
  output logic          rd_en,
  output logic [BW-1:0] rd_bank,
  output logic [AW-1:0] rd_addr,
  input  val_t          rd_data,
  // write of the merged value
  output logic          wr_en,
  output logic [BW-1:0] wr_bank,
  output logic [AW-1:0] wr_addr,
  output val_t          wr_data
);
  logic          s1_vld;
  logic [BW-1:0] s1_bank;
  logic [AW-1:0] s1_addr;
  val_t          s1_val;

  assign rd_en   = wb_vld;
  assign rd_bank = BW'(wb_vid % NBANK);
  assign rd_addr = dst_base + AW'(wb_vid / NBANK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_vld <= 1'b0; s1_bank <= '0; s1_addr <= '0; s1_val <= '0;
    end else begin
      s1_vld  <= wb_vld;
      s1_bank <= rd_bank;
      s1_addr <= rd_addr;
      s1_val  <= wb_val;
    end
  end

  assign wr_en   = s1_vld;
  assign wr_bank = s1_bank;
  assign wr_addr = s1_addr;
  assign wr_data = reduce(alg, rd_data, s1_val);

  // A vertex is written back at most once per run, so a read never meets a
  // pending write to the same word.
  property p_no_raw;
    @(posedge clk) disable iff (!rst_n)
      (wb_vld && s1_vld) |-> !(rd_bank == s1_bank && rd_addr == s1_addr);
  endproperty
  a_no_raw: assert property (p_no_raw);
endmodule
