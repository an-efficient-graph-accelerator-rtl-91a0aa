// tb_ga_vertex_mem: fills a reduced-size banked vertex memory through the host
// port, then checks port A and port B reads (one-cycle latency, any bank in
// parallel), port W writes, read-before-write on the same word and host
// read-back, against a model array.
module tb_ga_vertex_mem;
  import ga_pkg::*;
  localparam int NBANK = 16, BANK_DEPTH = 64;
  localparam int AW = $clog2(BANK_DEPTH), BW = $clog2(NBANK);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [NBANK-1:0] a_en, b_en, w_en;
  logic [AW-1:0] a_addr[NBANK], b_addr[NBANK], w_addr[NBANK];
  val_t a_data[NBANK], b_data[NBANK], w_data[NBANK];
  logic host_en, host_we;
  logic [BW+AW-1:0] host_addr;
  val_t host_wdata, host_rdata;
  val_t model [NBANK][BANK_DEPTH];
  int checks = 0, failures = 0;

  ga_vertex_mem #(.NBANK(NBANK), .BANK_DEPTH(BANK_DEPTH)) dut (.clk(clk),
    .a_en(a_en), .a_addr(a_addr), .a_data(a_data), .b_en(b_en), .b_addr(b_addr), .b_data(b_data),
    .w_en(w_en), .w_addr(w_addr), .w_data(w_data), .host_en(host_en), .host_we(host_we),
    .host_addr(host_addr), .host_wdata(host_wdata), .host_rdata(host_rdata));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0] ea[NBANK], eb[NBANK];
    a_en = '0; b_en = '0; w_en = '0; host_en = 0; host_we = 0; host_addr = '0; host_wdata = '0;
    for (int b = 0; b < NBANK; b++) begin a_addr[b] = '0; b_addr[b] = '0; w_addr[b] = '0; w_data[b] = '0; end
    @(negedge clk);
    for (int i = 0; i < NBANK * BANK_DEPTH; i++) begin
      host_en = 1; host_we = 1; host_addr = (BW+AW)'(i); host_wdata = $urandom;
      model[i % NBANK][i / NBANK] = host_wdata;
      @(negedge clk);
    end
    host_en = 0; host_we = 0;
    for (int it = 0; it < 500; it++) begin
      a_en = NBANK'($urandom); b_en = NBANK'($urandom); w_en = NBANK'($urandom);
      for (int b = 0; b < NBANK; b++) begin
        a_addr[b] = AW'($urandom); b_addr[b] = AW'($urandom);
        w_addr[b] = (it % 5 == 0) ? a_addr[b] : AW'($urandom);
        w_data[b] = $urandom;
        ea[b] = a_addr[b]; eb[b] = b_addr[b];
      end
      @(negedge clk);
      for (int b = 0; b < NBANK; b++) begin
        if (a_en[b]) begin checks++; if (a_data[b] !== model[b][ea[b]]) begin failures++; $display("FAIL A b=%0d", b); end end
        if (b_en[b]) begin checks++; if (b_data[b] !== model[b][eb[b]]) begin failures++; $display("FAIL B b=%0d", b); end end
        if (w_en[b]) model[b][w_addr[b]] = w_data[b];
      end
      a_en = '0; b_en = '0; w_en = '0;
    end
    for (int i = 0; i < NBANK * BANK_DEPTH; i += 7) begin
      host_en = 1; host_we = 0; host_addr = (BW+AW)'(i);
      @(negedge clk);
      checks++;
      if (host_rdata !== model[i % NBANK][i / NBANK]) begin failures++; $display("FAIL host %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
