// ga_get_vertex: pipeline stage P1, "Get Vertex". Produces the destination
// vertices of a run, each with its edge range [left, right) taken from the
// CSC offset table in off-chip memory (off[v] = index of v's first in-edge,
// off[v+1] one past its last), and deals them round robin to the M vertex
// units of P2, so vertex unit order equals vertex ID order.
// The table is read in whole cachelines of N offsets (line address
// off_base + v / N); up to OFF_FIFO_DEPTH lines are requested ahead, counted
// with credits so responses never overflow the line queue. Each cycle up to M
// table entries of the head line are consumed; entry t closes vertex t-1.
// Vertices without in-edges are skipped: they receive no update. The paper
// names P1 and says vertex units are replicated in P1 and P2; the line-wide
// table read and the skipping are this design's choices.
// Interface: vo_valid[k] with vo_* go to vertex unit k; all are accepted
// together when vo_ready is high. 'done' rises once the last entry
// (off[v_end]) has been consumed.
module ga_get_vertex
  import ga_pkg::*;
#(
  parameter int N              = 16,
  parameter int M              = 8,
  parameter int OFF_FIFO_DEPTH = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  vid_t          v_begin,    // first destination vertex of the run
  input  vid_t          v_end,      // one past the last one
  input  eoff_t         off_base,   // line address of off[0]
  // off-chip memory read channel (in-order responses)
  output logic          req_valid,
  input  logic          req_ready,
  output eoff_t         req_addr,
  input  logic          resp_valid,
  input  eoff_t         resp_data [N],
  // to the vertex units of P2
  output logic [M-1:0]  vo_valid,
  output vid_t          vo_vid   [M],
  output eoff_t         vo_left  [M],
  output eoff_t         vo_right [M],
  input  logic          vo_ready,
  output logic          done
);
  localparam int MW = (M > 1) ? $clog2(M) : 1;
  localparam int CW = $clog2(OFF_FIFO_DEPTH + 1) + 1;

  logic  run;
  vid_t  rq_line, last_line;      // next line to request, last line
  logic  rq_done;
  logic [CW-1:0] credit;          // lines requested but not yet consumed
  vid_t  e;                       // next table entry to consume
  eoff_t prev;                    // off[e-1]
  logic [MW-1:0] rr;              // vertex unit receiving the next vertex

  // line queue
  logic [N*EOFF_W-1:0] lq_din, lq_dout;
  logic lq_empty, lq_full, lq_pop;
  logic [$clog2(OFF_FIFO_DEPTH+1)-1:0] lq_cnt;
  eoff_t line_off [N];

  for (genvar i = 0; i < N; i++) begin : g_pack
    assign lq_din[i*EOFF_W +: EOFF_W] = resp_data[i];
    assign line_off[i] = lq_dout[i*EOFF_W +: EOFF_W];
  end

  ga_fifo #(.W(N*EOFF_W), .DEPTH(OFF_FIFO_DEPTH)) u_lq (
    .clk(clk), .rst_n(rst_n), .push(resp_valid), .din(lq_din), .pop(lq_pop),
    .dout(lq_dout), .empty(lq_empty), .full(lq_full), .count(lq_cnt));

  assign req_valid = run && !rq_done && (credit < CW'(OFF_FIFO_DEPTH));
  assign req_addr  = off_base + eoff_t'(rq_line);

  // consumption of up to M entries of the head line
  logic          take;
  vid_t          e_nxt;
  eoff_t         prev_nxt;
  logic [MW-1:0] rr_nxt;
  logic          last_taken;

  always_comb begin
    vid_t t;
    eoff_t o;
    t = e; o = '0;
    e_nxt = e; prev_nxt = prev; rr_nxt = rr; last_taken = 1'b0;
    lq_pop = 1'b0;
    for (int k = 0; k < M; k++) begin
      vo_valid[k] = 1'b0; vo_vid[k] = '0; vo_left[k] = '0; vo_right[k] = '0;
    end
    take = run && !done && !lq_empty && vo_ready;
    if (take) begin
      t = e;
      for (int k = 0; k < M; k++) begin
        if (!last_taken && (t / N) == (e / N)) begin
          o = line_off[t % N];
          if (t != v_begin && o != prev_nxt) begin
            vo_valid[rr_nxt] = 1'b1;
            vo_vid[rr_nxt]   = t - vid_t'(1);
            vo_left[rr_nxt]  = prev_nxt;
            vo_right[rr_nxt] = o;
            rr_nxt = (rr_nxt == MW'(M-1)) ? '0 : rr_nxt + MW'(1);
          end
          prev_nxt = o;
          if (t == v_end) last_taken = 1'b1;
          t = t + vid_t'(1);
        end
      end
      e_nxt  = t;
      lq_pop = last_taken || ((t / N) != (e / N));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; rq_line <= '0; last_line <= '0; rq_done <= 1'b0;
      credit <= '0; e <= '0; prev <= '0; rr <= '0;
    end else if (start) begin
      run <= 1'b1; done <= 1'b0; rq_done <= 1'b0; credit <= '0;
      rq_line <= v_begin / N; last_line <= v_end / N;
      e <= v_begin; prev <= '0; rr <= '0;
    end else if (run) begin
      if (req_valid && req_ready) begin
        rq_line <= rq_line + vid_t'(1);
        if (rq_line == last_line) rq_done <= 1'b1;
      end
      credit <= credit + CW'(req_valid && req_ready) - CW'(lq_pop);
      if (take) begin
        e <= e_nxt; prev <= prev_nxt; rr <= rr_nxt;
        if (last_taken) begin done <= 1'b1; run <= 1'b0; end
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) resp_valid |-> !lq_full);
endmodule
