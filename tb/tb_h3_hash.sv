// tb_h3_hash: self-checking test of the H3 hashing unit.
//
// Drives one random key per cycle (and a few hand-picked ones) and compares
// out_idx, one cycle later, with an H3 hash computed here from a separate
// copy of the matrix-row generator (SplitMix64 of seed and row number).
// Also checks the one-cycle latency of out_valid and that the reset clears it.
`timescale 1ns/1ps
module tb_h3_hash;
  localparam int unsigned KEY_W = 64;
  localparam int unsigned IDX_W = 15;
  localparam logic [63:0] SEED  = 64'h9E3779B97F4A7C15;

  logic clk = 1'b0;
  logic rst;
  logic in_valid;
  logic [KEY_W-1:0] in_key;
  logic out_valid;
  logic [IDX_W-1:0] out_idx;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  h3_hash #(.KEY_W(KEY_W), .IDX_W(IDX_W), .H3_SEED(SEED)) dut (.*);

  function automatic logic [63:0] row(int unsigned m);
    logic [63:0] z;
    z = SEED + 64'h9E3779B97F4A7C15 * (64'(m) + 1);
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  function automatic logic [IDX_W-1:0] ref_hash(logic [KEY_W-1:0] k);
    logic [IDX_W-1:0] h = '0;
    for (int unsigned m = 0; m < KEY_W; m++)
      if (k[m]) h = h ^ row(m)[IDX_W-1:0];
    return h;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [KEY_W-1:0] k;
    rst = 1'b1; in_valid = 1'b0; in_key = '0;
    repeat (2) @(posedge clk);
    #1 check(out_valid == 1'b0, "out_valid low in reset");
    rst = 1'b0;
    for (int n = 0; n < 300; n++) begin
      case (n)
        0: k = '0;
        1: k = 64'h1;
        2: k = 64'h8000_0000_0000_0000;
        3: k = '1;
        default: k = {$urandom, $urandom};
      endcase
      in_valid = (n % 7 != 3);
      in_key   = k;
      @(posedge clk);
      #1;
      check(out_valid == in_valid, $sformatf("out_valid one cycle after in_valid (n=%0d)", n));
      check(out_idx == ref_hash(k), $sformatf("h(%h)=%h, expected %h", k, out_idx, ref_hash(k)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
