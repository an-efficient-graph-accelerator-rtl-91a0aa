// tb_ga_nm_mux: checks that each scheduled vertex gets the prefix value of the
// lane of its last edge and that slot valid bits pass through.
module tb_ga_nm_mux;
  import ga_pkg::*;
  localparam int N = 16, M = 8;
  val_t pre[N], sel_val[M];
  logic [M-1:0] slot_vld, sel_vld;
  logic [3:0] last_lane[M];
  int checks = 0, failures = 0;

  ga_nm_mux #(.N(N), .M(M)) dut (.pre(pre), .slot_vld(slot_vld), .last_lane(last_lane),
                                 .sel_val(sel_val), .sel_vld(sel_vld));
  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < N; i++) pre[i] = $urandom;
      slot_vld = M'($urandom);
      for (int k = 0; k < M; k++) last_lane[k] = 4'($urandom);
      #1;
      for (int k = 0; k < M; k++) begin
        checks++;
        if (sel_val[k] !== pre[last_lane[k]] || sel_vld[k] !== slot_vld[k]) begin
          failures++;
          $display("FAIL slot %0d", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
