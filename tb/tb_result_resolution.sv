// tb_result_resolution: self-checking test of the result resolution unit.
//
// Two instances, one of a full PE (NSQ_EN = 1) and one of a search-only PE
// (NSQ_EN = 0), get the same random queries and decoded buckets. Buckets are
// built to cover the cases: key in one slot, key in two slots (lowest wins),
// key absent with open slots at random places, key absent in a full bucket,
// and a slot holding the key with its valid bit clear. A reference written
// here predicts status, returned value, and the write request (slot and
// word = new slot XOR mask), one cycle after the query.
`timescale 1ns/1ps
module tb_result_resolution;
  import ht_pkg::*;
  localparam int unsigned KEY_W = 16, VAL_W = 16, SLOTS = 4, IDX_W = 6;
  localparam int unsigned SLOT_W = 1 + KEY_W + VAL_W, SW = 2;

  logic clk = 1'b0, rst;
  logic in_valid;
  op_e in_op;
  logic [KEY_W-1:0] in_key;
  logic [VAL_W-1:0] in_value;
  logic [IDX_W-1:0] in_idx;
  logic [SLOTS-1:0][SLOT_W-1:0] decoded, mask;

  logic resp_valid [2];
  op_e resp_op [2];
  logic [KEY_W-1:0] resp_key [2];
  logic [VAL_W-1:0] resp_value [2];
  status_e resp_status [2];
  logic wr_en [2];
  logic [IDX_W-1:0] wr_addr [2];
  logic [SW-1:0] wr_slot [2];
  logic [SLOT_W-1:0] wr_data [2];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar g = 0; g < 2; g++) begin : g_dut
    result_resolution #(.KEY_W(KEY_W), .VAL_W(VAL_W), .SLOTS(SLOTS), .IDX_W(IDX_W),
                        .NSQ_EN(g == 0)) dut (
      .clk, .rst, .in_valid, .in_op, .in_key, .in_value, .in_idx, .decoded, .mask,
      .resp_valid(resp_valid[g]), .resp_op(resp_op[g]), .resp_key(resp_key[g]),
      .resp_value(resp_value[g]), .resp_status(resp_status[g]),
      .wr_en(wr_en[g]), .wr_addr(wr_addr[g]), .wr_slot(wr_slot[g]), .wr_data(wr_data[g]));
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

  initial begin
    int hit, opn, e_slot, kind;
    bit e_wr;
    status_e e_st;
    logic [VAL_W-1:0] e_val;
    logic [SLOT_W-1:0] e_new;
    int cnt_st [8];
    for (int i = 0; i < 8; i++) cnt_st[i] = 0;

    rst = 1'b1; in_valid = 1'b0; in_op = OP_SEARCH; in_key = '0; in_value = '0;
    in_idx = '0; decoded = '0; mask = '0;
    repeat (2) @(negedge clk);
    check(!resp_valid[0] && !wr_en[0], "valids low in reset");
    rst = 1'b0;

    for (int n = 0; n < 4000; n++) begin
      in_key   = KEY_W'($urandom);
      in_value = VAL_W'($urandom);
      in_idx   = IDX_W'($urandom);
      in_op    = op_e'($urandom % 3);
      in_valid = ($urandom % 8) != 0;
      kind = $urandom % 6;
      for (int s = 0; s < SLOTS; s++) begin
        mask[s] = SLOT_W'({$urandom, $urandom});
        // occupied slot with another key, or empty slot (all zero)
        if (kind == 3 || ($urandom % 3) != 0)
          decoded[s] = {1'b1, KEY_W'(in_key + 16'd1 + 16'(s)), VAL_W'($urandom)};
        else
          decoded[s] = '0;
      end
      if (kind == 0 || kind == 1) decoded[$urandom % SLOTS] = {1'b1, in_key, VAL_W'($urandom)};
      if (kind == 1) decoded[$urandom % SLOTS] = {1'b1, in_key, VAL_W'($urandom)};
      if (kind == 4) decoded[$urandom % SLOTS] = {1'b0, in_key, VAL_W'($urandom)};

      // reference
      hit = -1; opn = -1;
      for (int s = SLOTS - 1; s >= 0; s--) begin
        if (decoded[s][SLOT_W-1] && decoded[s][KEY_W+VAL_W-1:VAL_W] == in_key) hit = s;
        if (!decoded[s][SLOT_W-1]) opn = s;
      end

      @(negedge clk);  // one cycle: both instances answer together
      for (int g = 0; g < 2; g++) begin
        e_wr = 0; e_slot = 0; e_new = '0; e_val = '0;
        case (in_op)
          OP_SEARCH: begin
            e_st  = (hit >= 0) ? ST_FOUND : ST_NOT_FOUND;
            e_val = (hit >= 0) ? decoded[hit][VAL_W-1:0] : '0;
          end
          OP_INSERT: begin
            if (g == 1) e_st = ST_REJECTED;
            else if (hit >= 0) begin e_st = ST_UPDATED;  e_wr = 1; e_slot = hit; end
            else if (opn >= 0) begin e_st = ST_INSERTED; e_wr = 1; e_slot = opn; end
            else e_st = ST_FULL;
            e_new = {1'b1, in_key, in_value};
          end
          default: begin
            if (g == 1) e_st = ST_REJECTED;
            else if (hit >= 0) begin e_st = ST_DELETED; e_wr = 1; e_slot = hit; end
            else e_st = ST_NOT_FOUND;
            e_new = '0;
          end
        endcase
        check(resp_valid[g] == in_valid, $sformatf("n=%0d g=%0d resp_valid", n, g));
        if (in_valid) begin
          if (g == 0) cnt_st[e_st]++;
          check(resp_status[g] == e_st,
                $sformatf("n=%0d g=%0d op=%s status %s expected %s", n, g, in_op.name(),
                          resp_status[g].name(), e_st.name()));
          check(resp_key[g] == in_key && resp_op[g] == in_op, $sformatf("n=%0d g=%0d key/op", n, g));
          if (in_op == OP_SEARCH && hit >= 0)
            check(resp_value[g] == e_val, $sformatf("n=%0d g=%0d value", n, g));
          check(wr_en[g] == e_wr, $sformatf("n=%0d g=%0d wr_en %0d expected %0d", n, g, wr_en[g], e_wr));
          if (e_wr) begin
            check(wr_slot[g] == SW'(e_slot) && wr_addr[g] == in_idx,
                  $sformatf("n=%0d g=%0d slot %0d expected %0d", n, g, wr_slot[g], e_slot));
            check(wr_data[g] == (e_new ^ mask[e_slot]), $sformatf("n=%0d g=%0d wr_data", n, g));
          end
        end else begin
          check(!wr_en[g], $sformatf("n=%0d g=%0d write without query", n, g));
        end
      end
    end
    // every outcome of a full PE seen
    for (int i = 0; i < 6; i++)
      check(cnt_st[i] > 0, $sformatf("status %0d never produced", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
