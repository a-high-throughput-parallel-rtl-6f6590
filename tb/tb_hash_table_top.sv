// tb_hash_table_top: end-to-end test of the hash table at reduced size.
//
// P = 4 PEs with K = 2 full PEs (NSQ ratio 1/2, the configuration of the
// paper's Fig. 2(b)), 64 buckets of 2 slots, 32-bit keys and values, 3000
// cycles of queries on all PEs. The test itself is in ht_top_check.svh.
`timescale 1ns/1ps
module tb_hash_table_top;
  localparam int unsigned P = 4, K = 2, SLOTS = 2, KEY_W = 32, VAL_W = 32, IDX_W = 6;
  localparam logic [63:0] SEED = 64'h0F1E2D3C4B5A6978;
  localparam int NCYC = 3000;

  `include "ht_top_check.svh"

  hash_table_top #(.P(P), .K(K), .SLOTS(SLOTS), .KEY_W(KEY_W), .VAL_W(VAL_W),
                   .IDX_W(IDX_W), .H3_SEED(SEED)) dut (.*);
  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
