// ga_pkg: types, widths and the per-algorithm operators shared by the graph
// accelerator. The accelerator runs one of three vertex programs, chosen at
// run time by an alg_e input:
//   BFS  - update = depth(src)+1 (saturating), reduce = min ("CAS if less")
//   WCC  - update = label(src),                reduce = min ("CAS if less")
//   PR   - update = contribution(src),         reduce = add ("atomic add")
//          ALG_PR adds 32-bit unsigned fixed point, ALG_PRF adds IEEE-754
//          single-precision floats (fp_add below)
// The min/add split follows the paper's table of atomic operation types, and
// the paper's PageRank uses single-precision floats (ALG_PRF). The paper
// builds a separate FPGA image per algorithm and uses 1-byte BFS depths; here
// every algorithm uses 32-bit words and one image serves all of them (a
// design choice, not the paper's). The fixed-point ALG_PR mode is an extra of
// this design.
// fp_add: round to nearest even; subnormal inputs and results are flushed to
// zero; an infinite or NaN input is returned unchanged (no NaN generation);
// overflow gives infinity. It is combinational (align, add, normalise,
// round); in hardware it is the deepest operator of the prefix network.
package ga_pkg;

  localparam int VID_W  = 32;  // vertex ID width (edges are 32-bit source IDs)
  localparam int DATA_W = 32;  // vertex value width (4-byte vertex data)
  localparam int EOFF_W = 32;  // edge offset / edge index width

  typedef logic [VID_W-1:0]  vid_t;
  typedef logic [DATA_W-1:0] val_t;
  typedef logic [EOFF_W-1:0] eoff_t;

  typedef enum logic [1:0] {
    ALG_BFS = 2'd0,
    ALG_WCC = 2'd1,
    ALG_PR  = 2'd2,
    ALG_PRF = 2'd3
  } alg_e;

  // One-cycle event flags brought out of the top for performance counting.
  typedef struct packed {
    logic multi_vertex;   // P2 scheduled more than one vertex in a beat
    logic line_split;     // P2 needed more than one beat for a line
    logic vertex_span;    // P2 scheduled a vertex that continues in the next line
    logic bank_conflict;  // P3 line sent several requests to one bank
    logic out_of_order;   // P3 returned data behind an incomplete oldest line
    logic p3_stall;       // P3 could not accept a line (FIFO / reorder room)
    logic xbar_conflict;  // P6 crossbar serialised a beat
    logic dst_merge;      // P6 destination accumulator merged partial results
  } ga_events_t;

  // Identity element of the reduce operator (value of a masked lane).
  function automatic val_t red_identity(alg_e alg);
    return (alg == ALG_PR || alg == ALG_PRF) ? '0 : '1;
  endfunction

  // Single-precision floating-point addition (see the header for the rules).
  function automatic val_t fp_add(val_t a_in, val_t b_in);
    val_t        a, b, t;
    logic [26:0] xa, xb, r;
    logic [27:0] sum;
    logic [23:0] m24;
    logic        sticky;
    int          d, e;
    a = (a_in[30:23] == 8'd0) ? {a_in[31], 31'd0} : a_in;
    b = (b_in[30:23] == 8'd0) ? {b_in[31], 31'd0} : b_in;
    if (a[30:23] == 8'hff) return a;
    if (b[30:23] == 8'hff) return b;
    if (b[30:0] > a[30:0]) begin t = a; a = b; b = t; end   // |a| >= |b|
    if (b[30:0] == 31'd0) return (a[30:0] == 31'd0) ? {a[31] & b[31], 31'd0} : a;
    d  = int'(a[30:23]) - int'(b[30:23]);
    e  = int'(a[30:23]);
    xa = {1'b1, a[22:0], 3'b000};
    if (d >= 27) begin
      xb = 27'd1;                                             // sticky only
    end else begin
      sticky = 1'b0;
      for (int i = 0; i < 27; i++)
        if (i < d && i >= 3) sticky = sticky | b[i - 3];
      xb = ({1'b1, b[22:0], 3'b000} >> d) | {26'd0, sticky};
    end
    if (a[31] == b[31]) begin
      sum = {1'b0, xa} + {1'b0, xb};
      if (sum[27]) begin r = sum[27:1] | {26'd0, sum[0]}; e = e + 1; end
      else r = sum[26:0];
    end else begin
      r = xa - xb;
      if (r == 27'd0) return '0;
      for (int i = 0; i < 26; i++)
        if (!r[26]) begin r = r << 1; e = e - 1; end
    end
    if (e <= 0) return {a[31], 31'd0};                        // underflow: flush
    m24 = {1'b1, r[25:3]};
    if (r[2] && (r[1] || r[0] || r[3])) begin
      m24 = m24 + 24'd1;
      if (m24 == 24'd0) begin m24 = 24'h800000; e = e + 1; end
    end
    if (e >= 255) return {a[31], 8'hff, 23'd0};               // overflow: infinity
    return {a[31], 8'(e), m24[22:0]};
  endfunction

  // The commutative merge of two updates (associative up to float rounding).
  function automatic val_t reduce(alg_e alg, val_t a, val_t b);
    if (alg == ALG_PR)  return a + b;
    if (alg == ALG_PRF) return fp_add(a, b);
    return (a < b) ? a : b;
  endfunction

  // Update value carried along one edge, computed from the source value.
  function automatic val_t edge_update(alg_e alg, val_t src);
    if (alg == ALG_BFS) return (src == '1) ? src : src + val_t'(1);
    return src;
  endfunction

endpackage
