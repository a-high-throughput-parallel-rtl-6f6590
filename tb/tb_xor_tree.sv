// tb_xor_tree: self-checking test of the XOR reduction tree.
//
// Instantiates trees of 1, 2, 3, 4 and 7 inputs (the search tree has K
// inputs, the non-search tree K-1) and compares each output with an XOR
// computed here input by input, for random words and for single-bit
// patterns that show which input reaches the output.
`timescale 1ns/1ps
module tb_xor_tree;
  localparam int unsigned W = 40;
  int checks = 0, failures = 0;

  logic [0:0][W-1:0] in1;  logic [W-1:0] out1;
  logic [1:0][W-1:0] in2;  logic [W-1:0] out2;
  logic [2:0][W-1:0] in3;  logic [W-1:0] out3;
  logic [3:0][W-1:0] in4;  logic [W-1:0] out4;
  logic [6:0][W-1:0] in7;  logic [W-1:0] out7;

  xor_tree #(.N(1), .W(W)) t1 (.in_data(in1), .out_data(out1));
  xor_tree #(.N(2), .W(W)) t2 (.in_data(in2), .out_data(out2));
  xor_tree #(.N(3), .W(W)) t3 (.in_data(in3), .out_data(out3));
  xor_tree #(.N(4), .W(W)) t4 (.in_data(in4), .out_data(out4));
  xor_tree #(.N(7), .W(W)) t7 (.in_data(in7), .out_data(out7));

  function automatic logic [W-1:0] rnd();
    return W'({$urandom, $urandom});
  endfunction

  task automatic check(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL: %s got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] e;
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 1; i++) in1[i] = rnd();
      for (int i = 0; i < 2; i++) in2[i] = rnd();
      for (int i = 0; i < 3; i++) in3[i] = rnd();
      for (int i = 0; i < 4; i++) in4[i] = rnd();
      for (int i = 0; i < 7; i++) in7[i] = rnd();
      // one-hot: only input (n % N) non-zero, in every tree
      if (n < 20) begin
        in1 = '0; in2 = '0; in3 = '0; in4 = '0; in7 = '0;
        in1[0] = W'(n + 1); in2[n % 2] = W'(n + 1); in3[n % 3] = W'(n + 1);
        in4[n % 4] = W'(n + 1); in7[n % 7] = W'(n + 1);
      end
      #1;
      e = '0; for (int i = 0; i < 1; i++) e ^= in1[i]; check(out1, e, "N=1");
      e = '0; for (int i = 0; i < 2; i++) e ^= in2[i]; check(out2, e, "N=2");
      e = '0; for (int i = 0; i < 3; i++) e ^= in3[i]; check(out3, e, "N=3");
      e = '0; for (int i = 0; i < 4; i++) e ^= in4[i]; check(out4, e, "N=4");
      e = '0; for (int i = 0; i < 7; i++) e ^= in7[i]; check(out7, e, "N=7");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
