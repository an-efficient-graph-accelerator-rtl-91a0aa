// tb_ga_get_vertex: P1 against a behavioural memory holding a random CSC
// offset table (about a third of the vertices without in-edges). Two runs
// over unaligned vertex ranges, with a randomly stalling consumer. The
// vertices taken from the M outputs, read round robin starting at output 0,
// must be exactly the vertices of the range that have in-edges, in ID order,
// each with its [off[v], off[v+1]) range, and 'done' must follow.
module tb_ga_get_vertex;
  import ga_pkg::*;
  localparam int N = 16, M = 8, NV = 500;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start, req_valid, req_ready, resp_valid, vo_ready, done;
  vid_t v_begin, v_end;
  eoff_t off_base, req_addr, resp_data[N];
  logic [M-1:0] vo_valid;
  vid_t vo_vid[M];
  eoff_t vo_left[M], vo_right[M];
  int checks = 0, failures = 0;
  int unsigned off[NV+1];

  ga_get_vertex #(.N(N), .M(M)) dut (.clk(clk), .rst_n(rst_n), .start(start), .v_begin(v_begin),
    .v_end(v_end), .off_base(off_base), .req_valid(req_valid), .req_ready(req_ready),
    .req_addr(req_addr), .resp_valid(resp_valid), .resp_data(resp_data), .vo_valid(vo_valid),
    .vo_vid(vo_vid), .vo_left(vo_left), .vo_right(vo_right), .vo_ready(vo_ready), .done(done));
  ga_dram_model #(.N(N), .LINES(64), .LAT(6), .STALL(1'b1)) u_mem (.clk(clk), .rst_n(rst_n),
    .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr), .resp_valid(resp_valid),
    .resp_data(resp_data));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_v[$];
  int rr = 0;
  always @(posedge clk) if (rst_n && vo_ready) begin
    // vertices are dealt round robin: walk the outputs from rr
    for (int k = 0; k < M; k++) begin
      int j;
      j = (rr + k) % M;
      if (vo_valid[j]) begin
        int v;
        checks++;
        v = (exp_v.size() > 0) ? exp_v.pop_front() : -1;
        if (v < 0 || vo_vid[j] != vid_t'(v) || vo_left[j] != off[v] || vo_right[j] != off[v+1]) begin
          failures++;
          if (failures < 5) $display("FAIL out %0d: vid %0d exp %0d", j, vo_vid[j], v);
        end
      end
    end
    rr = (rr + $countones(vo_valid)) % M;
  end
  always @(negedge clk) vo_ready = ($urandom % 4) != 0;

  task automatic run(int vb, int ve);
    int n;
    for (int v = vb; v < ve; v++) if (off[v+1] != off[v]) exp_v.push_back(v);
    n = exp_v.size();
    rr = 0;
    @(negedge clk);
    v_begin = vb; v_end = ve; start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (exp_v.size() != 0) begin failures++; $display("FAIL %0d vertices missing", exp_v.size()); end
    $display("run [%0d,%0d): %0d vertices", vb, ve, n);
  endtask

  initial begin
    start = 0; v_begin = 0; v_end = 0; off_base = 4;
    off[0] = 0;
    for (int v = 0; v < NV; v++) off[v+1] = off[v] + ((($urandom % 3) == 0) ? 0 : 1 + $urandom % 20);
    for (int l = 0; l < 64; l++) for (int i = 0; i < N; i++) u_mem.mem[l][i] = '0;
    for (int i = 0; i <= NV; i++) u_mem.mem[4 + i / N][i % N] = off[i];
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, NV);
    run(37, 301);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
