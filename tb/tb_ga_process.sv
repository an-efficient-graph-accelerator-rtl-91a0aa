// tb_ga_process: checks the per-edge update function of every algorithm,
// the identity value on masked lanes, the side-information pass-through, the
// one-cycle latency and that a stalled output holds its beat.
module tb_ga_process;
  import ga_pkg::*;
  localparam int N = 16, MW = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  alg_e alg;
  logic i_valid, i_ready, o_valid, o_ready;
  val_t i_val[N], o_upd[N], exp_upd[N];
  logic [N-1:0] i_lane_vld;
  logic [MW-1:0] i_meta, o_meta, exp_meta;
  int checks = 0, failures = 0;

  ga_process #(.N(N), .META_W(MW)) dut (.clk(clk), .rst_n(rst_n), .alg(alg),
    .i_valid(i_valid), .i_ready(i_ready), .i_val(i_val), .i_lane_vld(i_lane_vld), .i_meta(i_meta),
    .o_valid(o_valid), .o_ready(o_ready), .o_upd(o_upd), .o_meta(o_meta));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    i_valid = 0; o_ready = 1; alg = ALG_BFS; i_lane_vld = '0; i_meta = '0;
    for (int i = 0; i < N; i++) i_val[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      alg = alg_e'(it % 3);
      i_valid = 1; i_lane_vld = N'($urandom); i_meta = MW'($urandom);
      for (int i = 0; i < N; i++) begin
        i_val[i] = (($urandom % 8) == 0) ? '1 : val_t'($urandom);
        case (alg)
          ALG_BFS: exp_upd[i] = (i_val[i] == '1) ? '1 : i_val[i] + 1;
          default: exp_upd[i] = i_val[i];
        endcase
        if (!i_lane_vld[i]) exp_upd[i] = (alg == ALG_PR) ? '0 : '1;
      end
      exp_meta = i_meta;
      @(negedge clk);
      i_valid = 0;
      checks++;
      if (!o_valid || o_meta !== exp_meta) begin failures++; $display("FAIL valid/meta it=%0d", it); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (o_upd[i] !== exp_upd[i]) begin
          failures++;
          if (failures < 5) $display("FAIL it=%0d lane=%0d got=%0d exp=%0d", it, i, o_upd[i], exp_upd[i]);
        end
      end
      if (it % 10 == 0) begin   // stalled output keeps its beat
        o_ready = 0; i_valid = 1;
        @(negedge clk);
        checks++;
        if (i_ready || o_meta !== exp_meta) begin failures++; $display("FAIL hold"); end
        i_valid = 0; o_ready = 1;
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
