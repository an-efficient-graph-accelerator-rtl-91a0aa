// tb_ga_crossbar: random beats of up to M results with increasing vertex IDs
// (gaps make several slots hit the same accumulator). Checks that every
// result reaches accumulator (vid mod M) exactly once, that per accumulator
// the order follows slot order, that a conflict-free beat takes one cycle and
// that a beat takes exactly (largest number of slots per accumulator) cycles.
module tb_ga_crossbar;
  import ga_pkg::*;
  localparam int M = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, conflict;
  logic [M-1:0] in_vld, out_vld;
  vid_t in_vid[M], out_vid[M];
  val_t in_val[M], out_val[M];
  int checks = 0, failures = 0, n_conf = 0;

  ga_crossbar #(.M(M)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .in_vld(in_vld), .in_vid(in_vid), .in_val(in_val), .out_vld(out_vld), .out_vid(out_vid),
    .out_val(out_val), .conflict(conflict));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vid_t v;
    int exp_q[M][$];
    int cnt[M];
    int maxc, cyc;
    in_valid = 0; in_vld = '0;
    for (int k = 0; k < M; k++) begin in_vid[k] = 0; in_val[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    v = 0;
    for (int it = 0; it < 500; it++) begin
      for (int d = 0; d < M; d++) cnt[d] = 0;
      in_vld = M'($urandom);
      for (int k = 0; k < M; k++) begin
        v = v + 1 + ((it % 2) ? $urandom % 12 : 0);
        in_vid[k] = v; in_val[k] = $urandom;
        if (in_vld[k]) begin
          exp_q[v % M].push_back(int'(in_val[k]));
          cnt[v % M]++;
        end
      end
      maxc = 0;
      for (int d = 0; d < M; d++) if (cnt[d] > maxc) maxc = cnt[d];
      if (maxc == 0) maxc = 1;
      in_valid = 1;
      cyc = 0;
      do begin
        #1;
        cyc++;
        for (int d = 0; d < M; d++)
          if (out_vld[d]) begin
            checks++;
            if (out_vid[d] % M != d || exp_q[d].size() == 0 || out_val[d] !== val_t'(exp_q[d].pop_front())) begin
              failures++;
              $display("FAIL it=%0d dest=%0d", it, d);
            end
          end
        if (conflict) n_conf++;
        @(negedge clk);
      end while (!(in_ready_q));
      in_valid = 0;
      checks++;
      if (cyc != maxc) begin failures++; $display("FAIL it=%0d took %0d cycles, exp %0d", it, cyc, maxc); end
    end
    for (int d = 0; d < M; d++) begin checks++; if (exp_q[d].size() != 0) failures++; end
    checks++;
    if (n_conf == 0) failures++;
    $display("conflict cycles %0d", n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_ready_q;
  always @(posedge clk) in_ready_q <= in_valid && in_ready;
endmodule
