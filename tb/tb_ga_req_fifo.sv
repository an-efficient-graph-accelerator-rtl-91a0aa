// tb_ga_req_fifo: pushes random bursts of 0..NP entries per cycle (never more
// than 'free') while popping randomly, and checks the popped order, the
// free count and empty flag against a queue model.
module tb_ga_req_fifo;
  localparam int W = 20, DEPTH = 32, NP = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [4:0] push_cnt;
  logic [W-1:0] push_data[NP], dout;
  logic pop, empty;
  logic [5:0] free;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  ga_req_fifo #(.W(W), .DEPTH(DEPTH), .NP(NP)) dut (.clk(clk), .rst_n(rst_n), .push_cnt(push_cnt),
    .push_data(push_data), .pop(pop), .dout(dout), .empty(empty), .free(free));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    push_cnt = 0; pop = 0;
    for (int i = 0; i < NP; i++) push_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      checks++;
      if (empty !== (q.size() == 0) || int'(free) != DEPTH - q.size()) begin
        failures++; $display("FAIL flags it=%0d", it);
      end
      pop = ($urandom % 3) != 0;
      if (pop && q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("FAIL data it=%0d", it); end
      end
      n = $urandom % (NP + 1);
      if (($urandom % 2) == 0) n = n / 4;
      if (n > int'(free)) n = free;
      push_cnt = 5'(n);
      for (int i = 0; i < NP; i++) push_data[i] = W'($urandom);
      @(negedge clk);
      if (pop && q.size() > 0) void'(q.pop_front());
      for (int i = 0; i < n; i++) q.push_back(push_data[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
