// tb_nsq_ring_hop: self-checking test of the inter-PE write ring.
//
// Builds the ring of one store column over P = 4 PEs, with the column's
// origin at PE 1, exactly as the top module wires it: hop i receives the
// forward output of hop i-1 (mod 4). Random writes are issued at the origin
// on random cycles, back to back included. The testbench checks that each
// write is applied to the store port of PE 1, 2, 3 and 0 in that order on
// consecutive cycles with unchanged address, slot and data, that the hop
// before the origin (PE 0) never forwards, and that nothing else appears on
// any store port, nor anything at all while reset is asserted.
`timescale 1ns/1ps
module tb_nsq_ring_hop;
  localparam int unsigned P = 4, ORIGIN = 1, AW = 8, SW = 2, SLOT_W = 24;

  logic clk = 1'b0, rst;
  logic loc_valid;
  logic [AW-1:0] loc_addr;
  logic [SW-1:0] loc_slot;
  logic [SLOT_W-1:0] loc_data;

  logic [P-1:0] st_valid, fwd_valid;
  logic [P-1:0][AW-1:0] st_addr, fwd_addr;
  logic [P-1:0][SW-1:0] st_slot, fwd_slot;
  logic [P-1:0][SLOT_W-1:0] st_data, fwd_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < P; i++) begin : g_hop
    localparam int unsigned PREV = (i + P - 1) % P;
    nsq_ring_hop #(.AW(AW), .SW(SW), .SLOT_W(SLOT_W),
                   .IS_ORIGIN(i == ORIGIN), .IS_LAST(i == (ORIGIN + P - 1) % P)) u_hop (
      .clk, .rst,
      .loc_valid(i == ORIGIN ? loc_valid : 1'b0), .loc_addr, .loc_slot, .loc_data,
      .rem_valid(fwd_valid[PREV]), .rem_addr(fwd_addr[PREV]),
      .rem_slot(fwd_slot[PREV]), .rem_data(fwd_data[PREV]),
      .st_valid(st_valid[i]), .st_addr(st_addr[i]), .st_slot(st_slot[i]), .st_data(st_data[i]),
      .fwd_valid(fwd_valid[i]), .fwd_addr(fwd_addr[i]), .fwd_slot(fwd_slot[i]), .fwd_data(fwd_data[i]));
  end

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

  // history of what was issued at the origin, indexed by cycle
  localparam int unsigned N = 2000;
  logic              h_v [N + P + 2];
  logic [AW+SW+SLOT_W-1:0] h_w [N + P + 2];

  initial begin
    int t, src, hop;
    rst = 1'b1; loc_valid = 1'b0; loc_addr = '0; loc_slot = '0; loc_data = '0;
    for (int i = 0; i < N + P + 2; i++) begin h_v[i] = 1'b0; h_w[i] = '0; end
    // a write request during reset must not reach any store
    loc_valid = 1'b1;
    repeat (2) begin
      @(negedge clk);
      check(st_valid == '0 && fwd_valid == '0, "store written during reset");
    end
    loc_valid = 1'b0;
    rst = 1'b0;
    for (t = 0; t < N + P + 2; t++) begin
      if (t < N) begin
        loc_valid = ($urandom % 3) != 0;
        loc_addr  = AW'($urandom);
        loc_slot  = SW'($urandom);
        loc_data  = SLOT_W'($urandom);
        h_v[t] = loc_valid;
        h_w[t] = {loc_addr, loc_slot, loc_data};
      end else begin
        loc_valid = 1'b0;
      end
      #1;
      // PE number ORIGIN+d (mod P) writes, at cycle t, what the origin issued at t-d
      for (int i = 0; i < P; i++) begin
        hop = (i + P - ORIGIN) % P;
        src = t - hop;
        if (src >= 0 && h_v[src]) begin
          check(st_valid[i] && {st_addr[i], st_slot[i], st_data[i]} == h_w[src],
                $sformatf("t=%0d PE %0d missed the write issued at %0d", t, i, src));
        end else begin
          check(!st_valid[i], $sformatf("t=%0d PE %0d unexpected write", t, i));
        end
      end
      check(!fwd_valid[(ORIGIN + P - 1) % P], $sformatf("t=%0d chain not ended before origin", t));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
