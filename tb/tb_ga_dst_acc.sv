// tb_ga_dst_acc: drives a random sequence of (vertex, value) inputs with runs
// of the same vertex, idle cycles and occasional flushes, and compares every
// write-back (vertex and merged value, one cycle after the deciding input)
// with a reference model of the ID/data register pair.
module tb_ga_dst_acc;
  import ga_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  alg_e alg;
  logic in_vld, flush, wb_vld, busy, merged;
  vid_t in_vid, wb_vid;
  val_t in_val, wb_val;
  int checks = 0, failures = 0, n_wb = 0, n_merge = 0;

  ga_dst_acc dut (.clk(clk), .rst_n(rst_n), .alg(alg), .in_vld(in_vld), .in_vid(in_vid),
    .in_val(in_val), .flush(flush), .wb_vld(wb_vld), .wb_vid(wb_vid), .wb_val(wb_val),
    .busy(busy), .merged(merged));

  // reference
  logic m_held; vid_t m_id; val_t m_data;
  logic e_vld; vid_t e_vid; val_t e_val;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vid_t cur;
    in_vld = 0; in_vid = 0; in_val = 0; flush = 0; alg = ALG_PR;
    m_held = 0; m_id = 0; m_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cur = 5;
    for (int it = 0; it < 3000; it++) begin
      if (it % 1000 == 0) alg = alg_e'(it / 1000);
      in_vld = ($urandom % 5) != 0;
      if (($urandom % 3) == 0) cur = cur + 1 + $urandom % 3;
      in_vid = cur;
      in_val = $urandom % 1000;
      flush  = ($urandom % 50) == 0;
      // reference
      e_vld = 0; e_vid = 0; e_val = 0;
      if (flush) begin
        if (m_held) begin
          e_vld = 1; e_vid = m_id;
          e_val = (in_vld && in_vid == m_id) ? reduce(alg, m_data, in_val) : m_data;
        end
        if (in_vld && !(m_held && in_vid == m_id)) begin m_held = 1; m_id = in_vid; m_data = in_val; end
        else m_held = 0;
      end else if (in_vld) begin
        if (m_held && in_vid == m_id) begin m_data = reduce(alg, m_data, in_val); n_merge++; end
        else begin
          if (m_held) begin e_vld = 1; e_vid = m_id; e_val = m_data; end
          m_held = 1; m_id = in_vid; m_data = in_val;
        end
      end
      @(negedge clk);
      checks++;
      if (wb_vld !== e_vld || (e_vld && (wb_vid !== e_vid || wb_val !== e_val)) || busy !== m_held) begin
        failures++;
        if (failures < 5) $display("FAIL it=%0d wb=%0d/%0d/%0d exp=%0d/%0d/%0d", it, wb_vld, wb_vid, wb_val, e_vld, e_vid, e_val);
      end
      if (e_vld) n_wb++;
    end
    checks++;
    if (n_wb < 100 || n_merge < 100) failures++;
    $display("write-backs %0d merges %0d", n_wb, n_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
