// tb_ga_read_vertex: P3 with a banked memory model (one-cycle reads). Part 1
// sends random edge lines, many with several sources in the same bank and
// partial lane masks, with a randomly stalling consumer; every output line
// must hold, in lane order, the memory word of each source (out-of-order bank
// service must not change the order). Part 2 sends 64 conflict-free lines
// back to back and checks they stream at one line per cycle (at most 64 + 6
// cycles). Both bank conflicts and out-of-order returns must have occurred.
module tb_ga_read_vertex;
  import ga_pkg::*;
  localparam int N = 16, NBANK = 16, BANK_DEPTH = 64, NV = NBANK * BANK_DEPTH;
  localparam int AW = $clog2(BANK_DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, st_conf, st_ooo, st_stall;
  vid_t in_src[N];
  logic [N-1:0] in_lane_vld, out_lane_vld;
  logic [NBANK-1:0] a_en;
  logic [AW-1:0] a_addr[NBANK];
  val_t a_data[NBANK], out_val[N];
  val_t mem[NBANK][BANK_DEPTH];
  int checks = 0, failures = 0, n_conf = 0, n_ooo = 0;

  ga_read_vertex #(.N(N), .NBANK(NBANK), .BANK_DEPTH(BANK_DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .src_base('0), .in_valid(in_valid), .in_ready(in_ready),
    .in_src(in_src), .in_lane_vld(in_lane_vld), .a_en(a_en), .a_addr(a_addr), .a_data(a_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_val(out_val), .out_lane_vld(out_lane_vld),
    .stat_bank_conflict(st_conf), .stat_ooo(st_ooo), .stat_stall(st_stall));

  always_ff @(posedge clk)
    for (int b = 0; b < NBANK; b++) if (a_en[b]) a_data[b] <= mem[b][a_addr[b]];

  typedef struct { vid_t s[N]; logic [N-1:0] lv; } line_t;
  line_t lines[$];
  int li = 0, oi = 0, nl;
  bit stream_mode = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // handshakes are sampled at the rising edge, inputs change at the falling edge
  always @(posedge clk) begin
    if (rst_n) begin
      if (st_conf) n_conf++;
      if (st_ooo) n_ooo++;
      if (in_valid && in_ready) li++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_lane_vld !== lines[oi].lv) failures++;
        for (int i = 0; i < N; i++)
          if (lines[oi].lv[i]) begin
            checks++;
            if (out_val[i] !== mem[lines[oi].s[i] % NBANK][lines[oi].s[i] / NBANK]) begin
              failures++;
              if (failures < 5) $display("FAIL line %0d lane %0d", oi, i);
            end
          end
        oi++;
      end
    end
  end
  always @(negedge clk) begin
    in_valid = (li < nl) && (stream_mode || ($urandom % 3 != 0));
    if (li < nl) begin in_src = lines[li].s; in_lane_vld = lines[li].lv; end
    out_ready = stream_mode || ($urandom % 4 != 0);
  end

  initial begin
    int t0;
    in_valid = 0; out_ready = 0; nl = 0;
    for (int b = 0; b < NBANK; b++) for (int w = 0; w < BANK_DEPTH; w++) mem[b][w] = $urandom;
    for (int l = 0; l < 400; l++) begin
      line_t L;
      L.lv = (l % 5 == 0) ? N'($urandom) : '1;
      for (int i = 0; i < N; i++)
        L.s[i] = (l % 3 == 0) ? NBANK * ($urandom % BANK_DEPTH) + ($urandom % 3) : $urandom % NV;
      lines.push_back(L);
    end
    nl = 400;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (oi == 400);
    // part 2: streaming, sources of a line in 16 different banks
    @(negedge clk);
    for (int l = 0; l < 64; l++) begin
      line_t L;
      L.lv = '1;
      for (int i = 0; i < N; i++) L.s[i] = NBANK * ($urandom % BANK_DEPTH) + ((i + l) % NBANK);
      lines.push_back(L);
    end
    stream_mode = 1;
    nl = 464;
    t0 = $time;
    wait (oi == 464);
    checks++;
    if (($time - t0) / 10 > 64 + 6) begin failures++; $display("FAIL stream took %0d cycles", ($time - t0) / 10); end
    $display("stream: %0d cycles for 64 lines; conflicts %0d, out-of-order %0d", ($time - t0) / 10, n_conf, n_ooo);
    checks++;
    if (n_conf == 0 || n_ooo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
