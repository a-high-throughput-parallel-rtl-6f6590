// xor_tree: XOR reduction tree over N words of W bits.
//
// A processing engine uses two of these (paper, Fig. 3). The search XOR tree
// takes the encoded buckets read from all K partial XOR stores and recovers
// the stored key-value pairs, because each store holds one XOR share of the
// data. The non-search XOR tree takes the K-1 stores other than Store (M); its
// output is the mask that a new pair is XORed with before it is written to
// Store (M), so that the XOR of all K stores then equals the new pair.
//
// The tree is a balanced binary tree of two-input XORs, ceil(log2(N))
// levels deep; it is purely combinational. The PE registers its output.
// N = 1 gives the word itself. N must be at least 1 (a design with K = 1 has
// no non-search tree at all; the PE then leaves it out).
module xor_tree #(
  parameter int unsigned N = 2,
  parameter int unsigned W = 516
) (
  input  logic [N-1:0][W-1:0] in_data,
  output logic [W-1:0]        out_data
);

  initial begin
    assert (N >= 1) else $fatal(1, "xor_tree needs N >= 1");
  end

  // level 0 holds the inputs padded with zeros to a power of two; each
  // further level XORs neighbouring pairs of the level below.
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned LEAVES = 2 ** LEVELS;

  logic [LEAVES-1:0][W-1:0] lvl [LEVELS+1];

  for (genvar i = 0; i < LEAVES; i++) begin : g_leaf
    if (i < N) begin : g_in
      assign lvl[0][i] = in_data[i];
    end else begin : g_pad
      assign lvl[0][i] = '0;
    end
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    for (genvar i = 0; i < LEAVES; i++) begin : g_node
      if (i < (LEAVES >> (l + 1))) begin : g_xor
        assign lvl[l+1][i] = lvl[l][2*i] ^ lvl[l][2*i+1];
      end else begin : g_unused
        assign lvl[l+1][i] = '0;
      end
    end
  end

  assign out_data = lvl[LEVELS][0];

endmodule
