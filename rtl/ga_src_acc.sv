// ga_src_acc: source vertex accumulator (pipeline stage P6, first part).
// A segmented parallel prefix over N update values built on the
// Ladner-Fischer (Sklansky) network: at level l every lane i whose bit l is
// set combines with lane j = (i with bits l..0 cleared) - 1, the last lane of
// the neighbouring block, giving log2(N) levels. Following the paper, each
// node first compares the destination tags of its two inputs: equal tags mean
// both belong to the same destination vertex and the node applies the reduce
// operator; different tags are a breakpoint and the node passes its own
// input unchanged. Because the tags of one vertex occupy a contiguous run of
// lanes, out[i] is the reduction of all lanes from the start of i's run up to
// i. The paper compresses the destination ID to its low log2(width) bits as
// tag; here the tag is the vertex's slot number in the beat (0..M-1), which
// is unique within a beat even when skipped zero-degree vertices would make
// low ID bits collide (own choice). Purely combinational; the caller
// registers the result.
module ga_src_acc
  import ga_pkg::*;
#(
  parameter int N     = 16,
  parameter int TAG_W = 3
) (
  input  alg_e             alg,
  input  val_t             in_val [N],
  input  logic [TAG_W-1:0] in_tag [N],
  output val_t             out_val[N]
);
  localparam int LV = $clog2(N);
  val_t lvl [LV+1][N];

  always_comb begin
    for (int i = 0; i < N; i++) lvl[0][i] = in_val[i];
    for (int l = 0; l < LV; l++) begin
      for (int i = 0; i < N; i++) begin
        // j: last lane of the left neighbour block at this level
        if (((i >> l) & 1) == 1 &&
            in_tag[((i >> (l + 1)) << (l + 1)) + (1 << l) - 1] == in_tag[i])
          lvl[l+1][i] = reduce(alg, lvl[l][((i >> (l + 1)) << (l + 1)) + (1 << l) - 1],
                               lvl[l][i]);
        else
          lvl[l+1][i] = lvl[l][i];
      end
    end
    for (int i = 0; i < N; i++) out_val[i] = lvl[LV][i];
  end
endmodule
