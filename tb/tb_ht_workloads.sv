// tb_ht_workloads: the evaluated hash table configurations (Xilinx, Intel and
// memory-study rows), each run end to end at its own size.
//
// Each row below is one hash_table_top configuration, driven by ht_top_run
// with random operations and keys on every PE in every cycle for NCYC
// cycles, checked against a table model. Rows (entries = buckets):
//   Xilinx table: 128K entries, 4 PEs, 2 full;  64K, 8 PEs, 2 full;
//                 16K, 8 PEs, 8 full (the table prints 7 PEs for 8/8);
//   Intel table:  128K, 2 PEs, 2 full; 32K, 6 PEs, 2 full; 16K, 8 PEs, 4 full;
//                 all with 4 slots and 64-bit keys and values;
//   memory study: 2 slots, 32-bit keys and values, 50K entries rounded up
//                 to 64K buckets, 4 PEs with 1 full (NSQ ratio 1/4).
// The 32K-entry, 16-PE, 2-full row is the default size, run by
// tb_hash_table_full.
`timescale 1ns/1ps
module tb_ht_workloads;
  localparam int NRUN = 7;
  localparam int NCYC = 1500;
  bit done [NRUN];
  int chk [NRUN], fail [NRUN];

  ht_top_run #(.P(4), .K(2), .SLOTS(4), .KEY_W(64), .VAL_W(64), .IDX_W(17), .NCYC(NCYC))
    u_x128k (.done_o(done[0]), .checks_o(chk[0]), .failures_o(fail[0]));
  ht_top_run #(.P(8), .K(2), .SLOTS(4), .KEY_W(64), .VAL_W(64), .IDX_W(16), .NCYC(NCYC))
    u_x64k (.done_o(done[1]), .checks_o(chk[1]), .failures_o(fail[1]));
  ht_top_run #(.P(8), .K(8), .SLOTS(4), .KEY_W(64), .VAL_W(64), .IDX_W(14), .NCYC(NCYC))
    u_x16k (.done_o(done[2]), .checks_o(chk[2]), .failures_o(fail[2]));
  ht_top_run #(.P(2), .K(2), .SLOTS(4), .KEY_W(64), .VAL_W(64), .IDX_W(17), .NCYC(NCYC))
    u_i128k (.done_o(done[3]), .checks_o(chk[3]), .failures_o(fail[3]));
  ht_top_run #(.P(6), .K(2), .SLOTS(4), .KEY_W(64), .VAL_W(64), .IDX_W(15), .NCYC(NCYC))
    u_i32k (.done_o(done[4]), .checks_o(chk[4]), .failures_o(fail[4]));
  ht_top_run #(.P(8), .K(4), .SLOTS(4), .KEY_W(64), .VAL_W(64), .IDX_W(14), .NCYC(NCYC))
    u_i16k (.done_o(done[5]), .checks_o(chk[5]), .failures_o(fail[5]));
  ht_top_run #(.P(4), .K(1), .SLOTS(2), .KEY_W(32), .VAL_W(32), .IDX_W(16), .NCYC(NCYC))
    u_m50k (.done_o(done[6]), .checks_o(chk[6]), .failures_o(fail[6]));

  initial begin
    int checks, failures;
    bit all_done;
    do begin
      #10;
      all_done = 1'b1;
      for (int r = 0; r < NRUN; r++) all_done &= done[r];
    end while (!all_done);
    checks = 0; failures = 0;
    for (int r = 0; r < NRUN; r++) begin
      checks += chk[r];
      failures += fail[r];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
