// tb_ga_schedule: feeds P4 with random edge lines and, for each line, one to
// three schedule beats (the last one marked line_end), each side with random
// gaps, and a randomly stalling consumer. Every output beat must carry the
// values of its line, the lane mask (line lanes AND beat lanes), the tags and
// the scheduled vertices of its beat, in order, one register stage later.
module tb_ga_schedule;
  import ga_pkg::*;
  localparam int N = 16, M = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic lv_valid, lv_ready, sb_valid, sb_ready, sb_line_end, o_valid, o_ready;
  val_t lv_val[N], o_val[N];
  logic [N-1:0] lv_lane_vld, sb_lane_vld, o_lane_vld;
  logic [M-1:0] sb_slot_vld, o_slot_vld;
  vid_t sb_vid[M], o_vid[M];
  logic [3:0] sb_last_lane[M], o_last_lane[M];
  logic [2:0] sb_lane_tag[N], o_lane_tag[N];
  int checks = 0, failures = 0;

  ga_schedule #(.N(N), .M(M)) dut (.clk(clk), .rst_n(rst_n),
    .lv_valid(lv_valid), .lv_ready(lv_ready), .lv_val(lv_val), .lv_lane_vld(lv_lane_vld),
    .sb_valid(sb_valid), .sb_ready(sb_ready), .sb_slot_vld(sb_slot_vld), .sb_vid(sb_vid),
    .sb_last_lane(sb_last_lane), .sb_lane_vld(sb_lane_vld), .sb_lane_tag(sb_lane_tag),
    .sb_line_end(sb_line_end), .o_valid(o_valid), .o_ready(o_ready), .o_val(o_val),
    .o_lane_vld(o_lane_vld), .o_lane_tag(o_lane_tag), .o_slot_vld(o_slot_vld), .o_vid(o_vid),
    .o_last_lane(o_last_lane));

  typedef struct { val_t v[N]; logic [N-1:0] lv; } line_t;
  typedef struct { logic [N-1:0] lv; logic [M-1:0] sv; vid_t vid[M]; logic [3:0] ll[M];
                   logic [2:0] tag[N]; logic le; int line; } beat_t;
  line_t lines[$];
  beat_t beats[$];
  int li = 0, bi = 0, oi = 0;
  localparam int NL = 300;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < NL; l++) begin
      line_t L; int nb;
      L.lv = N'($urandom) | 16'h0001;
      for (int i = 0; i < N; i++) L.v[i] = $urandom;
      lines.push_back(L);
      nb = 1 + $urandom % 3;
      for (int b = 0; b < nb; b++) begin
        beat_t B;
        B.lv = N'($urandom) & L.lv; B.sv = M'($urandom); B.le = (b == nb - 1); B.line = l;
        for (int k = 0; k < M; k++) begin B.vid[k] = $urandom; B.ll[k] = 4'($urandom); end
        for (int i = 0; i < N; i++) B.tag[i] = 3'($urandom);
        beats.push_back(B);
      end
    end
  end

  // producers and consumer, all change at the negative edge
  // handshakes are sampled at the rising edge, inputs change at the falling edge
  always @(posedge clk) begin
    if (rst_n) begin
      if (lv_valid && lv_ready) li++;
      if (sb_valid && sb_ready) bi++;
      if (o_valid && o_ready) begin
        beat_t B; line_t L;
        B = beats[oi]; L = lines[B.line];
        checks++;
        if (o_lane_vld !== (B.lv & L.lv) || o_slot_vld !== B.sv) failures++;
        for (int i = 0; i < N; i++) if (o_val[i] !== L.v[i] || o_lane_tag[i] !== B.tag[i]) failures++;
        for (int k = 0; k < M; k++) if (o_vid[k] !== B.vid[k] || o_last_lane[k] !== B.ll[k]) failures++;
        oi++;
      end
    end
  end
  always @(negedge clk) begin
    lv_valid = (li < NL) && ($urandom % 4 != 0);
    if (li < NL) begin lv_val = lines[li].v; lv_lane_vld = lines[li].lv; end
    sb_valid = (bi < beats.size()) && ($urandom % 4 != 0);
    if (bi < beats.size()) begin
      sb_lane_vld = beats[bi].lv; sb_slot_vld = beats[bi].sv; sb_line_end = beats[bi].le;
      sb_vid = beats[bi].vid; sb_last_lane = beats[bi].ll; sb_lane_tag = beats[bi].tag;
    end
    o_ready = ($urandom % 3 != 0);
  end

  initial begin
    lv_valid = 0; sb_valid = 0; o_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (oi == beats.size());
    checks++;
    if (li != NL) failures++;
    $display("%0d beats over %0d lines", oi, li);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
