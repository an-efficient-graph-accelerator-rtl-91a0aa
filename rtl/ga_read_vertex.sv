// ga_read_vertex: pipeline stage P3, "Read Vertex" (read source property).
// Each accepted edge line holds up to N source vertex IDs. The shuffle sends
// lane i's request to the request FIFO of bank (src mod NBANK), word
// (src_base + src / NBANK); lanes of one bank keep their lane order. Every
// bank FIFO issues its head to the bank's read port each cycle, independent
// of the other banks, so a later line's requests can use banks that an
// earlier line's backlog leaves idle (the paper's unblocked, out-of-order
// access). Every request carries a token = (reorder slot, lane), i.e. the low
// log2(ROB_LINES*N) bits of the edge's address, as the paper describes; the
// token rides along the one-cycle memory read in a per-bank register (the
// "token FIFO") and the returned word is stored at that place in the reorder
// buffer. A line leaves, in its original order, once all its valid lanes are
// present. A line is accepted only when a reorder slot is free and every bank
// FIFO has room for the requests the line sends it.
// Interface: in_* valid/ready line input, a_* bank read ports (data one cycle
// after a_en), out_* valid/ready reordered line output.
module ga_read_vertex
  import ga_pkg::*;
#(
  parameter int N          = 16,
  parameter int NBANK      = 16,
  parameter int ROB_LINES  = 8,
  parameter int REQ_DEPTH  = 32,
  parameter int BANK_DEPTH = 106250,
  localparam int AW = $clog2(BANK_DEPTH),
  localparam int BW = $clog2(NBANK)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [AW-1:0]    src_base,
  input  logic             in_valid,
  output logic             in_ready,
  input  vid_t             in_src     [N],
  input  logic [N-1:0]     in_lane_vld,
  output logic [NBANK-1:0] a_en,
  output logic [AW-1:0]    a_addr [NBANK],
  input  val_t             a_data [NBANK],
  output logic             out_valid,
  input  logic             out_ready,
  output val_t             out_val [N],
  output logic [N-1:0]     out_lane_vld,
  // statistics
  output logic             stat_bank_conflict, // a line sends >1 request to a bank
  output logic             stat_ooo,           // data returned for a line behind an incomplete head
  output logic             stat_stall          // a line waits for FIFO or reorder room
);
  localparam int RW  = (ROB_LINES > 1) ? $clog2(ROB_LINES) : 1;
  localparam int LW  = $clog2(N);
  localparam int TW  = RW + LW;          // token width
  localparam int EW  = AW + TW;          // request entry: address + token
  localparam int PW  = $clog2(N + 1);
  localparam int FCW = $clog2(REQ_DEPTH + 1);

  // reorder buffer
  val_t           rob_data [ROB_LINES][N];
  logic [N-1:0]   rob_got  [ROB_LINES];
  logic [N-1:0]   rob_lvld [ROB_LINES];
  logic [RW-1:0]  head, tail;
  logic [RW:0]    rob_cnt;

  // ---------------- shuffle -------------------------------------------------
  logic [BW-1:0]  lane_bank [N];
  logic [PW-1:0]  bcnt      [NBANK];
  logic [EW-1:0]  bdata     [NBANK][N];
  logic [FCW-1:0] bfree     [NBANK];
  logic           room, accept;

  always_comb begin
    room = 1'b1;
    stat_bank_conflict = 1'b0;
    for (int i = 0; i < N; i++) lane_bank[i] = BW'(in_src[i] % NBANK);
    for (int b = 0; b < NBANK; b++) begin
      bcnt[b] = '0;
      for (int i = 0; i < N; i++) bdata[b][i] = '0;
      for (int i = 0; i < N; i++) begin
        if (in_lane_vld[i] && lane_bank[i] == BW'(b)) begin
          bdata[b][LW'(bcnt[b])] = {src_base + AW'(in_src[i] / NBANK), tail, LW'(i)};
          bcnt[b] = bcnt[b] + PW'(1);
        end
      end
      if (int'(bcnt[b]) > int'(bfree[b])) room = 1'b0;
      if (in_valid && bcnt[b] > PW'(1)) stat_bank_conflict = 1'b1;
    end
    in_ready   = room && (rob_cnt < (RW+1)'(ROB_LINES));
    accept     = in_valid && in_ready;
    stat_stall = in_valid && !in_ready;
  end

  // ---------------- request FIFOs and bank reads ----------------------------
  logic [NBANK-1:0] f_empty;
  logic [EW-1:0]    f_head [NBANK];
  logic [NBANK-1:0] tok_v;
  logic [TW-1:0]    tok_q  [NBANK];

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    ga_req_fifo #(.W(EW), .DEPTH(REQ_DEPTH), .NP(N)) u_rf (
      .clk(clk), .rst_n(rst_n), .push_cnt(accept ? bcnt[b] : '0),
      .push_data(bdata[b]), .pop(!f_empty[b]), .dout(f_head[b]),
      .empty(f_empty[b]), .free(bfree[b]));
    assign a_en[b]   = !f_empty[b];
    assign a_addr[b] = f_head[b][EW-1:TW];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin tok_v[b] <= 1'b0; tok_q[b] <= '0; end
      else begin tok_v[b] <= !f_empty[b]; tok_q[b] <= f_head[b][TW-1:0]; end
    end
  end

  // ---------------- reorder -------------------------------------------------
  logic pop_line;
  assign out_valid    = (rob_cnt != '0) && (&rob_got[head]);
  assign pop_line     = out_valid && out_ready;
  assign out_lane_vld = rob_lvld[head];
  always_comb for (int i = 0; i < N; i++) out_val[i] = rob_data[head][i];

  always_comb begin
    stat_ooo = 1'b0;
    for (int b = 0; b < NBANK; b++)
      if (tok_v[b] && tok_q[b][TW-1:LW] != head && !(&rob_got[head])) stat_ooo = 1'b1;
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < NBANK; b++)
      if (tok_v[b]) rob_data[tok_q[b][TW-1:LW]][tok_q[b][LW-1:0]] <= a_data[b];
    if (accept) rob_lvld[tail] <= in_lane_vld;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; tail <= '0; rob_cnt <= '0;
      for (int r = 0; r < ROB_LINES; r++) rob_got[r] <= '0;
    end else begin
      for (int b = 0; b < NBANK; b++)
        if (tok_v[b]) rob_got[tok_q[b][TW-1:LW]][tok_q[b][LW-1:0]] <= 1'b1;
      if (accept) begin
        rob_got[tail] <= ~in_lane_vld;
        tail <= RW'((int'(tail) + 1) % ROB_LINES);
      end
      if (pop_line) head <= RW'((int'(head) + 1) % ROB_LINES);
      rob_cnt <= rob_cnt + (RW+1)'(accept) - (RW+1)'(pop_line);
    end
  end
endmodule
