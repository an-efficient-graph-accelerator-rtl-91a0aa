// tb_ga_par_acc: the parallel accumulator (P6) with a banked vertex memory.
// For each algorithm (BFS and WCC: minimum, PageRank: integer and float sum)
// the memory is
// loaded through the host port, then random beats are sent: each beat holds
// up to M distinct vertices on consecutive lane ranges (tag = slot number,
// masked lanes carry the identity value), vertices drawn from a small pool so
// that the same vertex recurs across beats (destination merge) and vertices
// with equal ID mod M meet in one beat (crossbar conflict). After a flush the
// memory must equal the software reduction of all updates into the initial
// contents (float sums within a relative 1e-5 of an exact double-precision
// sum, since the hardware adds in its own order). A last phase sends conflict-free beats back to back and checks
// that one beat is taken per cycle.
module tb_ga_par_acc;
  import ga_pkg::*;
  localparam int N = 16, M = 8, NBANK = 16, BANK_DEPTH = 256, NV = 600;
  localparam int AW = $clog2(BANK_DEPTH), BW = $clog2(NBANK);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  alg_e alg;
  logic [AW-1:0] dst_base;
  logic in_valid, in_ready, flush, idle, pipe_empty, conflict;
  val_t in_val[N];
  logic [2:0] in_tag[N];
  logic [M-1:0] in_slot_vld, merge;
  vid_t in_slot_vid[M];
  logic [3:0] in_last_lane[M];
  logic [NBANK-1:0] b_en, w_en, a_en;
  logic [AW-1:0] b_addr[NBANK], w_addr[NBANK], a_addr[NBANK];
  val_t b_data[NBANK], w_data[NBANK], a_data[NBANK];
  logic host_en, host_we;
  logic [BW+AW-1:0] host_addr;
  val_t host_wdata, host_rdata;
  int checks = 0, failures = 0, n_conf = 0, n_merge = 0;

  ga_par_acc #(.N(N), .M(M), .NBANK(NBANK), .BANK_DEPTH(BANK_DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .alg(alg), .dst_base(dst_base),
    .in_valid(in_valid), .in_ready(in_ready), .in_val(in_val), .in_tag(in_tag),
    .in_slot_vld(in_slot_vld), .in_slot_vid(in_slot_vid), .in_last_lane(in_last_lane),
    .flush(flush), .idle(idle), .pipe_empty(pipe_empty),
    .b_en(b_en), .b_addr(b_addr), .b_data(b_data), .w_en(w_en), .w_addr(w_addr), .w_data(w_data),
    .stat_conflict(conflict), .stat_merge(merge));
  ga_vertex_mem #(.NBANK(NBANK), .BANK_DEPTH(BANK_DEPTH)) u_vm (
    .clk(clk), .a_en(a_en), .a_addr(a_addr), .a_data(a_data),
    .b_en(b_en), .b_addr(b_addr), .b_data(b_data),
    .w_en(w_en), .w_addr(w_addr), .w_data(w_data),
    .host_en(host_en), .host_we(host_we), .host_addr(host_addr),
    .host_wdata(host_wdata), .host_rdata(host_rdata));

  val_t ref_mem[NV];
  real  ref_r[NV];

  function automatic real f2r(val_t a);
    real m;
    if (a[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(a[22:0]) / 8388608.0;
    for (int k = 127; k < int'(a[30:23]); k++) m = m * 2.0;
    for (int k = int'(a[30:23]); k < 127; k++) m = m / 2.0;
    return a[31] ? -m : m;
  endfunction

  function automatic bit mem_ok(alg_e a, int v, val_t d);
    real x, tol;
    if (a != ALG_PRF) return d === ref_mem[v];
    x = f2r(d);
    tol = 1e-5 * ref_r[v];
    return (x - ref_r[v] <= tol) && (ref_r[v] - x <= tol);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (conflict) n_conf++;
    n_merge += $countones(merge);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_write(int v, val_t d);
    @(negedge clk);
    host_en = 1; host_we = 1;
    host_addr = (BW+AW)'((int'(dst_base) + v / NBANK) * NBANK + v % NBANK);
    host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(int v, output val_t d);
    @(negedge clk);
    host_en = 1; host_we = 0;
    host_addr = (BW+AW)'((int'(dst_base) + v / NBANK) * NBANK + v % NBANK);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  // build one random beat; conflict_free keeps IDs distinct modulo M
  task automatic make_beat(bit conflict_free, int pool);
    int ns, lane, len, v;
    logic [M-1:0] used_mod;
    int vids[$];
    ns = 1 + $urandom % M;
    lane = $urandom % 3;
    used_mod = '0;
    in_slot_vld = '0;
    for (int i = 0; i < N; i++) begin in_tag[i] = '0; in_val[i] = red_identity(alg); end
    for (int k = 0; k < M; k++) begin in_slot_vid[k] = '0; in_last_lane[k] = '0; end
    for (int k = 0; k < ns && lane < N; k++) begin
      do begin
        v = $urandom % pool;
      end while (v inside {vids} || (conflict_free && used_mod[v % M]));
      vids.push_back(v);
      used_mod[v % M] = 1;
      len = (k == ns - 1) ? N - lane - int'($urandom % 2) : 1 + $urandom % 3;
      if (len < 1) len = 1;
      if (lane + len > N) len = N - lane;
      in_slot_vld[k] = 1; in_slot_vid[k] = v;
      for (int i = lane; i < lane + len; i++) begin
        in_tag[i] = 3'(k);
        in_val[i] = (alg == ALG_PR) ? val_t'($urandom % 1000) :
                    (alg == ALG_PRF) ? {1'b0, 8'(118 + $urandom % 10), 23'($urandom)} :
                    val_t'($urandom % 5000);
        ref_mem[v] = reduce(alg, ref_mem[v], in_val[i]);
        ref_r[v] = ref_r[v] + f2r(in_val[i]);
      end
      in_last_lane[k] = 4'(lane + len - 1);
      lane += len;
    end
  endtask

  task automatic run_alg(alg_e a, int nbeats, int pool);
    val_t d;
    alg = a;
    dst_base = AW'($urandom % 8);
    for (int v = 0; v < NV; v++) begin
      ref_mem[v] = (a == ALG_PR) ? val_t'($urandom % 100) :
                   (a == ALG_PRF) ? {1'b0, 8'(120 + $urandom % 4), 23'($urandom)} :
                   val_t'(1000 + $urandom % 9000);
      ref_r[v] = f2r(ref_mem[v]);
      host_write(v, ref_mem[v]);
    end
    for (int b = 0; b < nbeats; b++) begin
      @(negedge clk);
      make_beat(0, pool);
      in_valid = ($urandom % 4) != 0;
      while (!in_valid) begin
        @(negedge clk);
        in_valid = ($urandom % 4) != 0;
      end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    wait (pipe_empty);
    @(negedge clk); flush = 1;
    @(negedge clk); flush = 0;
    wait (idle);
    for (int v = 0; v < NV; v++) begin
      host_read(v, d);
      checks++;
      if (!mem_ok(a, v, d)) begin
        failures++;
        if (failures < 6) $display("FAIL alg %0d v %0d got %0d exp %0d", a, v, d, ref_mem[v]);
      end
    end
  endtask

  initial begin
    int t0, taken, rate_cyc;
    in_valid = 0; flush = 0; host_en = 0; host_we = 0; host_addr = '0; host_wdata = '0;
    a_en = '0; alg = ALG_BFS; dst_base = '0;
    for (int b = 0; b < NBANK; b++) a_addr[b] = '0;
    for (int k = 0; k < M; k++) begin in_slot_vid[k] = '0; in_last_lane[k] = '0; end
    for (int i = 0; i < N; i++) begin in_val[i] = '0; in_tag[i] = '0; end
    in_slot_vld = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_alg(ALG_BFS, 400, 40);
    run_alg(ALG_WCC, 400, NV);
    run_alg(ALG_PRF, 600, 24);
    run_alg(ALG_PR, 600, 24);
    // rate: 200 conflict-free beats back to back
    taken = 0;
    @(negedge clk);
    t0 = $time / 10;
    make_beat(1, NV); in_valid = 1;
    while (taken < 200) begin
      @(posedge clk);
      if (in_ready) taken++;
      @(negedge clk);
      if (taken < 200) make_beat(1, NV); else in_valid = 0;
    end
    rate_cyc = $time / 10 - t0;
    checks++;
    if (rate_cyc > 202) begin failures++; $display("FAIL rate: %0d cycles", rate_cyc); end
    wait (pipe_empty);
    @(negedge clk); flush = 1;
    @(negedge clk); flush = 0;
    wait (idle);
    for (int v = 0; v < NV; v++) begin
      val_t d;
      host_read(v, d);
      checks++;
      if (d !== ref_mem[v]) failures++;
    end
    checks++;
    if (n_conf == 0 || n_merge == 0) failures++;
    $display("rate: 200 beats in %0d cycles; conflict cycles %0d, merges %0d", rate_cyc, n_conf, n_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
