// tb_hash_table_full: end-to-end test of the hash table at its default size.
//
// hash_table_top with every parameter at its default: P = 16 PEs, K = 2 full
// PEs, 32K buckets of 4 slots, 64-bit keys and values, default H3 seed.
// 2000 cycles of queries on all 16 PEs. The test itself is in
// ht_top_check.svh.
`timescale 1ns/1ps
module tb_hash_table_full;
  localparam int unsigned P = 16, K = 2, SLOTS = 4, KEY_W = 64, VAL_W = 64, IDX_W = 15;
  localparam logic [63:0] SEED = 64'h9E3779B97F4A7C15;
  localparam int NCYC = 2000;

  `include "ht_top_check.svh"

  hash_table_top dut (.*);
  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
