// ht_top_run: one end-to-end run of hash_table_top at any size, for
// testbenches that run several configurations side by side.
//
// Instantiates hash_table_top with the given parameters and drives it with
// the test of ht_top_check.svh (full-rate random queries checked against a
// table model, every mechanism counted). done_o rises when the run is over;
// checks_o and failures_o are then final.
`timescale 1ns/1ps
module ht_top_run #(
  parameter int unsigned P     = 4,
  parameter int unsigned K     = 2,
  parameter int unsigned SLOTS = 2,
  parameter int unsigned KEY_W = 32,
  parameter int unsigned VAL_W = 32,
  parameter int unsigned IDX_W = 6,
  parameter logic [63:0] SEED  = 64'h0F1E2D3C4B5A6978,
  parameter int          NCYC  = 1000
) (
  output bit done_o,
  output int checks_o,
  output int failures_o
);

  `include "ht_top_check.svh"

  hash_table_top #(.P(P), .K(K), .SLOTS(SLOTS), .KEY_W(KEY_W), .VAL_W(VAL_W),
                   .IDX_W(IDX_W), .H3_SEED(SEED)) dut (.*);

  assign done_o     = done;
  assign checks_o   = checks;
  assign failures_o = failures;
endmodule
