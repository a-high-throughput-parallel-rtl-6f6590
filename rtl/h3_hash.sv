// h3_hash: the hashing unit of a processing engine.
//
// Computes the bucket index of a key with a Class H3 hash, as the paper
// defines it: h(x) = (x(1).q(1)) ^ (x(2).q(2)) ^ ... ^ (x(i).q(i)), where
// q(m) is row m of a constant KEY_W x IDX_W Boolean matrix Q and x(m) is bit m
// of the key. Each set key bit therefore selects one row and the rows are
// XORed together; the hardware is an AND-XOR network of constants.
//
// The matrix itself is not given by the paper: here it is generated from
// H3_SEED by ht_pkg::h3_row (a choice of this design). All PEs must use the
// same seed.
//
// Timing: one register stage. in_valid/in_key sampled on a rising edge give
// out_valid/out_idx right after that edge. Synchronous active-high reset
// clears out_valid only.
module h3_hash
  import ht_pkg::*;
#(
  parameter int unsigned KEY_W   = 64,
  parameter int unsigned IDX_W   = 15,
  parameter logic [63:0] H3_SEED = 64'h9E3779B97F4A7C15
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  logic [KEY_W-1:0] in_key,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx
);

  initial begin
    assert (IDX_W >= 1 && IDX_W <= 32) else $fatal(1, "IDX_W must be 1..32");
  end

  logic [IDX_W-1:0] idx_c;

  always_comb begin
    idx_c = '0;
    for (int unsigned m = 0; m < KEY_W; m++) begin
      if (in_key[m]) idx_c ^= IDX_W'(h3_row(H3_SEED, m));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
    out_idx <= idx_c;
  end

endmodule
