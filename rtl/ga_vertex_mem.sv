// ga_vertex_mem: on-chip vertex memory, split into NBANK independent banks
// (the paper's memory partitioning). Vertex v of an array placed at word
// offset 'base' lives in bank (v mod NBANK), word (base + v / NBANK).
// Each bank has:
//   port A - one read per cycle for source-vertex reads (stage P3),
//   port B - one read per cycle for the write-back read-modify-write,
//   port W - one write per cycle from the write-back unit.
// On an FPGA a bank maps to block RAM with two replicas so both reads run in
// the same cycle; the paper only says vertex data is kept in BRAM. All reads
// have one cycle of latency and return the old word on a same-cycle write.
// A host port (flat address = word * NBANK + bank) reads and writes any word
// for loading and unloading; while host_en is high it takes over ports B/W.
// Default size: 16 banks x 106250 words = 1.7 M 32-bit words, the number of
// 4-byte vertices the paper holds on chip for PageRank and WCC.
module ga_vertex_mem
  import ga_pkg::*;
#(
  parameter int NBANK      = 16,
  parameter int BANK_DEPTH = 106250,
  localparam int BW = $clog2(NBANK),
  localparam int AW = $clog2(BANK_DEPTH)
) (
  input  logic          clk,
  // port A: source reads
  input  logic [NBANK-1:0] a_en,
  input  logic [AW-1:0]    a_addr [NBANK],
  output val_t             a_data [NBANK],
  // port B: write-back reads
  input  logic [NBANK-1:0] b_en,
  input  logic [AW-1:0]    b_addr [NBANK],
  output val_t             b_data [NBANK],
  // port W: write-back writes
  input  logic [NBANK-1:0] w_en,
  input  logic [AW-1:0]    w_addr [NBANK],
  input  val_t             w_data [NBANK],
  // host access
  input  logic             host_en,
  input  logic             host_we,
  input  logic [BW+AW-1:0] host_addr,
  input  val_t             host_wdata,
  output val_t             host_rdata
);
  logic [BW-1:0] host_bank, host_bank_q;
  logic [AW-1:0] host_word;
  assign host_bank = host_addr[BW-1:0];
  assign host_word = host_addr[BW+AW-1:BW];

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    val_t mem [BANK_DEPTH];
    logic          rb_en, wr;
    logic [AW-1:0] rb_addr, wa;
    val_t          wd;
    always_comb begin
      if (host_en) begin
        rb_en   = (host_bank == BW'(b));
        rb_addr = host_word;
        wr      = host_we && (host_bank == BW'(b));
        wa      = host_word;
        wd      = host_wdata;
      end else begin
        rb_en   = b_en[b];
        rb_addr = b_addr[b];
        wr      = w_en[b];
        wa      = w_addr[b];
        wd      = w_data[b];
      end
    end
    always_ff @(posedge clk) begin
      if (a_en[b]) a_data[b] <= mem[a_addr[b]];
      if (rb_en)   b_data[b] <= mem[rb_addr];
      if (wr)      mem[wa] <= wd;
    end
  end

  always_ff @(posedge clk) host_bank_q <= host_bank;
  assign host_rdata = b_data[host_bank_q];
endmodule
