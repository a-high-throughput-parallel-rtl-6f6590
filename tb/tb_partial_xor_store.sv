// tb_partial_xor_store: self-checking test of one partial XOR store.
//
// A small store (64 buckets of 4 slots of 20 bits) is read and written at
// random, with reads and writes in the same cycle, also to the same bucket.
// A model array in the testbench predicts each read: all slots zero at
// start, one-cycle read latency, old data when reading the bucket being
// written (read-first), only the addressed slot changed by a write, and the
// read register holding its value while rd_en is low.
`timescale 1ns/1ps
module tb_partial_xor_store;
  localparam int unsigned DEPTH = 64, SLOTS = 4, SLOT_W = 20;
  localparam int unsigned AW = 6, SW = 2;

  logic clk = 1'b0;
  logic rd_en, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [SLOTS-1:0][SLOT_W-1:0] rd_data;
  logic [SW-1:0] wr_slot;
  logic [SLOT_W-1:0] wr_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  partial_xor_store #(.DEPTH(DEPTH), .SLOTS(SLOTS), .SLOT_W(SLOT_W)) dut (.*);

  logic [SLOTS-1:0][SLOT_W-1:0] model [DEPTH];
  logic [SLOTS-1:0][SLOT_W-1:0] expect_q;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) model[a] = '0;
    expect_q = '0;  // the last read of the sweep below returns an empty bucket
    rd_en = 1'b0; wr_en = 1'b0; rd_addr = '0; wr_addr = '0; wr_slot = '0; wr_data = '0;
    @(negedge clk);
    // every bucket reads as zero at start
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1'b1; rd_addr = AW'(a);
      @(negedge clk);
      check(rd_data == '0, $sformatf("bucket %0d not empty at start", a));
    end
    for (int n = 0; n < 3000; n++) begin
      rd_en   = ($urandom % 4) != 0;
      rd_addr = AW'($urandom % 8);          // few buckets: frequent collisions
      wr_en   = ($urandom % 2) != 0;
      wr_addr = ($urandom % 3 == 0) ? rd_addr : AW'($urandom % 8);
      wr_slot = SW'($urandom);
      wr_data = SLOT_W'($urandom);
      if (rd_en) expect_q = model[rd_addr];  // read-first
      @(negedge clk);
      if (wr_en) model[wr_addr][wr_slot] = wr_data;
      check(rd_data == expect_q,
            $sformatf("n=%0d read %h expected %h", n, rd_data, expect_q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
