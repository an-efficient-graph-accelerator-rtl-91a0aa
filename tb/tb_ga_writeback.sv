// tb_ga_writeback: connects one write-back unit to a small banked memory model
// (registered read, write port) and sends it a stream of distinct vertices.
// Checks the bank/word mapping (bank = v mod NBANK, word = dst_base + v /
// NBANK), the read-modify-write result reduce(old, value) for min and add,
// and the two-cycle write timing.
module tb_ga_writeback;
  import ga_pkg::*;
  localparam int NBANK = 16, BANK_DEPTH = 256;
  localparam int AW = $clog2(BANK_DEPTH), BW = $clog2(NBANK);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  alg_e alg;
  logic [AW-1:0] dst_base;
  logic wb_vld, rd_en, wr_en;
  vid_t wb_vid;
  val_t wb_val, rd_data, wr_data;
  logic [BW-1:0] rd_bank, wr_bank;
  logic [AW-1:0] rd_addr, wr_addr;
  val_t mem [NBANK][BANK_DEPTH];
  val_t ref_mem [NBANK][BANK_DEPTH];
  int checks = 0, failures = 0;

  ga_writeback #(.NBANK(NBANK), .BANK_DEPTH(BANK_DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .alg(alg), .dst_base(dst_base),
    .wb_vld(wb_vld), .wb_vid(wb_vid), .wb_val(wb_val),
    .rd_en(rd_en), .rd_bank(rd_bank), .rd_addr(rd_addr), .rd_data(rd_data),
    .wr_en(wr_en), .wr_bank(wr_bank), .wr_addr(wr_addr), .wr_data(wr_data));

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_bank][rd_addr];
    if (wr_en && rst_n) mem[wr_bank][wr_addr] <= wr_data;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vid_t v;
    int b, w, wr_seen;
    wb_vld = 0; wb_vid = 0; wb_val = 0; alg = ALG_BFS; dst_base = 16;
    for (int i = 0; i < NBANK; i++) for (int j = 0; j < BANK_DEPTH; j++) begin
      mem[i][j] = $urandom % 5000; ref_mem[i][j] = mem[i][j];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    v = 0;
    for (int it = 0; it < 900; it++) begin
      if (it % 300 == 0) begin   // the algorithm only changes while idle
        wb_vld = 0;
        repeat (3) @(negedge clk);
        alg = alg_e'(it / 300);
      end
      v = v + 1 + $urandom % 3;
      if (v >= 3000) v = v % 7;
      wb_vld = ($urandom % 4) != 0;
      wb_vid = v; wb_val = $urandom % 5000;
      if (wb_vld) begin
        b = v % NBANK; w = dst_base + v / NBANK;
        checks++;
        #1;
        if (!rd_en || rd_bank != BW'(b) || rd_addr != AW'(w)) begin failures++; $display("FAIL read map v=%0d", v); end
        ref_mem[b][w] = reduce(alg, ref_mem[b][w], wb_val);
      end
      @(negedge clk);
    end
    wb_vld = 0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < NBANK; i++) for (int j = 0; j < BANK_DEPTH; j++) begin
      checks++;
      if (mem[i][j] !== ref_mem[i][j]) begin
        failures++;
        if (failures < 5) $display("FAIL bank %0d word %0d got %0d exp %0d", i, j, mem[i][j], ref_mem[i][j]);
      end
    end
    // timing: a single write-back is written two cycles after it is presented
    @(negedge clk);
    wb_vld = 1; wb_vid = 33; wb_val = 1; alg = ALG_PR;
    @(negedge clk);
    wb_vld = 0;
    checks++;
    if (!wr_en || wr_bank != BW'(1) || wr_addr != AW'(dst_base + 2)) begin failures++; $display("FAIL timing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
