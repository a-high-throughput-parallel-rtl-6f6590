// tb_ht_pe: self-checking test of the processing engine, full and
// search-only.
//
// Configuration P = 3, K = 2: PE 0 is a full PE (its column 0 is Store (M)),
// PE 2 is search-only, and the testbench plays PE 1, the owner of column 1.
// The ring is closed as in the top module: PE 0 -> (testbench as PE 1) ->
// PE 2 -> PE 0 for column 0, and testbench -> PE 2 -> PE 0 for column 1.
//
// The testbench mirrors both columns. Its own column-1 writes set a slot of
// the decoded table to a chosen pair (share = pair ^ column-0 word), so the
// decoded table is the XOR of the two mirrors. From that it predicts every
// response of both PEs and every column-0 write that PE 0 sends out: slot,
// and word = new pair ^ column-1 word. Phase 1 runs one query at a time with
// time for the writes to travel; phase 2 sends a search to both PEs in every
// cycle and checks that each answer comes exactly 4 cycles later.
`timescale 1ns/1ps
module tb_ht_pe;
  import ht_pkg::*;
  localparam int unsigned P = 3, K = 2, SLOTS = 2, KEY_W = 16, VAL_W = 16, IDX_W = 4;
  localparam int unsigned SLOT_W = 1 + KEY_W + VAL_W, SW = 1, NB = 2 ** IDX_W;
  localparam logic [63:0] SEED = 64'h0123456789ABCDEF;
  localparam int unsigned LAT = 4;

  logic clk = 1'b0, rst;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // query ports of PE 0 (index 0) and PE 2 (index 1)
  logic q_valid [2];
  op_e q_op [2];
  logic [KEY_W-1:0] q_key [2];
  logic [VAL_W-1:0] q_value [2];
  logic r_valid [2];
  op_e r_op [2];
  logic [KEY_W-1:0] r_key [2];
  logic [VAL_W-1:0] r_value [2];
  status_e r_status [2];

  logic [K-1:0] in_v [2], out_v [2];
  logic [K-1:0][IDX_W-1:0] in_a [2], out_a [2];
  logic [K-1:0][SW-1:0] in_s [2], out_s [2];
  logic [K-1:0][SLOT_W-1:0] in_d [2], out_d [2];

  // testbench as PE 1
  logic t1_v;                              // column-1 write of PE 1
  logic [IDX_W-1:0] t1_a;
  logic [SW-1:0] t1_s;
  logic [SLOT_W-1:0] t1_d;
  logic f0_v; logic [IDX_W-1:0] f0_a; logic [SW-1:0] f0_s; logic [SLOT_W-1:0] f0_d;  // col 0 hop
  logic f1_v; logic [IDX_W-1:0] f1_a; logic [SW-1:0] f1_s; logic [SLOT_W-1:0] f1_d;  // col 1 hop

  always_ff @(posedge clk) begin
    f0_v <= rst ? 1'b0 : out_v[0][0];
    f0_a <= out_a[0][0]; f0_s <= out_s[0][0]; f0_d <= out_d[0][0];
    f1_v <= rst ? 1'b0 : t1_v;
    f1_a <= t1_a; f1_s <= t1_s; f1_d <= t1_d;
  end

  // PE 0 gets both columns from PE 2; PE 2 gets them from "PE 1"
  assign in_v[0] = out_v[1];  assign in_a[0] = out_a[1];
  assign in_s[0] = out_s[1];  assign in_d[0] = out_d[1];
  assign in_v[1] = {f1_v, f0_v};  assign in_a[1] = {f1_a, f0_a};
  assign in_s[1] = {f1_s, f0_s};  assign in_d[1] = {f1_d, f0_d};

  for (genvar g = 0; g < 2; g++) begin : g_dut
    ht_pe #(.P(P), .K(K), .PE_ID(g == 0 ? 0 : 2), .SLOTS(SLOTS), .KEY_W(KEY_W),
            .VAL_W(VAL_W), .IDX_W(IDX_W), .H3_SEED(SEED)) dut (
      .clk, .rst,
      .q_valid(q_valid[g]), .q_op(q_op[g]), .q_key(q_key[g]), .q_value(q_value[g]),
      .r_valid(r_valid[g]), .r_op(r_op[g]), .r_key(r_key[g]), .r_value(r_value[g]),
      .r_status(r_status[g]),
      .ring_in_valid(in_v[g]), .ring_in_addr(in_a[g]), .ring_in_slot(in_s[g]),
      .ring_in_data(in_d[g]),
      .ring_out_valid(out_v[g]), .ring_out_addr(out_a[g]), .ring_out_slot(out_s[g]),
      .ring_out_data(out_d[g]));
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  logic [SLOT_W-1:0] col0 [NB][SLOTS];
  logic [SLOT_W-1:0] col1 [NB][SLOTS];
  logic [KEY_W-1:0] pool [24];
  int cnt [8];

  function automatic logic [IDX_W-1:0] bucket(logic [KEY_W-1:0] k);
    logic [IDX_W-1:0] h = '0;
    for (int unsigned m = 0; m < KEY_W; m++) if (k[m]) h ^= IDX_W'(h3_row(SEED, m));
    return h;
  endfunction

  // expected result of one query on the decoded table
  task automatic predict(input op_e op, input logic [KEY_W-1:0] key, input logic [VAL_W-1:0] val,
                         input bit full_pe, output status_e st, output logic [VAL_W-1:0] rv,
                         output bit wr, output int ws, output logic [SLOT_W-1:0] wd);
    logic [IDX_W-1:0] b = bucket(key);
    int hit = -1, opn = -1;
    logic [SLOT_W-1:0] d;
    for (int s = SLOTS - 1; s >= 0; s--) begin
      d = col0[b][s] ^ col1[b][s];
      if (d[SLOT_W-1] && d[KEY_W+VAL_W-1:VAL_W] == key) hit = s;
      if (!d[SLOT_W-1]) opn = s;
    end
    wr = 0; ws = 0; wd = '0; rv = '0;
    if (op == OP_SEARCH) begin
      st = hit >= 0 ? ST_FOUND : ST_NOT_FOUND;
      if (hit >= 0) rv = VAL_W'(col0[b][hit] ^ col1[b][hit]);
    end else if (!full_pe) st = ST_REJECTED;
    else if (op == OP_INSERT) begin
      if (hit >= 0)      begin st = ST_UPDATED;  wr = 1; ws = hit; end
      else if (opn >= 0) begin st = ST_INSERTED; wr = 1; ws = opn; end
      else st = ST_FULL;
      wd = {1'b1, key, val} ^ col1[b][ws];
    end else begin
      if (hit >= 0) begin st = ST_DELETED; wr = 1; ws = hit; end
      else st = ST_NOT_FOUND;
      wd = '0 ^ col1[b][ws];
    end
  endtask

  initial begin
    status_e st [2];
    logic [VAL_W-1:0] rv [2];
    bit wr [2];
    int ws [2];
    logic [SLOT_W-1:0] wd [2];
    logic [IDX_W-1:0] b;
    // phase 2 queue
    logic [KEY_W-1:0] pk [$];
    int pt [$];
    int cyc;

    for (int i = 0; i < 8; i++) cnt[i] = 0;
    for (int i = 0; i < 24; i++) pool[i] = KEY_W'($urandom);
    for (int i = 0; i < int'(NB); i++)
      for (int s = 0; s < int'(SLOTS); s++) begin col0[i][s] = '0; col1[i][s] = '0; end
    rst = 1'b1; t1_v = 1'b0; t1_a = '0; t1_s = '0; t1_d = '0;
    for (int g = 0; g < 2; g++) begin
      q_valid[g] = 1'b0; q_op[g] = OP_SEARCH; q_key[g] = '0; q_value[g] = '0;
    end
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // ---------------- phase 1: one query at a time ----------------
    for (int n = 0; n < 1500; n++) begin
      // the testbench, as PE 1, sometimes mutates column 1
      if ($urandom % 5 == 0) begin
        automatic logic [KEY_W-1:0] k = pool[$urandom % 24];
        automatic logic [SLOT_W-1:0] target;
        b = bucket(k);
        target = ($urandom % 3 == 0) ? '0 : {1'b1, k, VAL_W'($urandom)};
        t1_v = 1'b1; t1_a = b; t1_s = SW'($urandom); t1_d = target ^ col0[b][t1_s];
        col1[b][t1_s] = t1_d;
        @(negedge clk);
        t1_v = 1'b0;
        repeat (4) @(negedge clk);
      end
      for (int g = 0; g < 2; g++) begin
        q_valid[g] = 1'b1;
        q_key[g]   = pool[$urandom % 24];
        q_value[g] = VAL_W'($urandom);
        case ($urandom % 8)
          0, 1, 2: q_op[g] = OP_SEARCH;
          3, 4, 5: q_op[g] = OP_INSERT;
          default: q_op[g] = OP_DELETE;
        endcase
        if (g == 1 && $urandom % 4 != 0) q_op[g] = OP_SEARCH;
        predict(q_op[g], q_key[g], q_value[g], g == 0, st[g], rv[g], wr[g], ws[g], wd[g]);
      end
      @(negedge clk);
      q_valid[0] = 1'b0; q_valid[1] = 1'b0;
      for (int c = 1; c <= 8; c++) begin
        for (int g = 0; g < 2; g++) begin
          if (c == LAT) begin
            check(r_valid[g] && r_status[g] == st[g] && r_key[g] == q_key[g] && r_op[g] == q_op[g],
                  $sformatf("n=%0d PE%0d %s %h: status %s expected %s", n, g * 2, q_op[g].name(),
                            q_key[g], r_status[g].name(), st[g].name()));
            if (st[g] == ST_FOUND)
              check(r_value[g] == rv[g], $sformatf("n=%0d PE%0d value %h expected %h",
                                                   n, g * 2, r_value[g], rv[g]));
            cnt[st[g]]++;
          end else begin
            check(!r_valid[g], $sformatf("n=%0d PE%0d response at cycle %0d", n, g * 2, c));
          end
        end
        // PE 0's column-0 write leaves on its ring output one cycle after the response
        if (c == LAT + 1) begin
          check(out_v[0][0] == wr[0], $sformatf("n=%0d write out %0d expected %0d", n, out_v[0][0], wr[0]));
          if (wr[0]) begin
            b = bucket(q_key[0]);
            check(out_a[0][0] == b && out_s[0][0] == SW'(ws[0]) && out_d[0][0] == wd[0],
                  $sformatf("n=%0d write word", n));
            col0[b][ws[0]] = wd[0];
          end
        end else begin
          check(!out_v[0][0], $sformatf("n=%0d stray column-0 write", n));
        end
        check(!out_v[1][0] && !out_v[0][1], "chain must end before the origin");
        @(negedge clk);
      end
    end

    // ---------------- phase 2: a search in both PEs every cycle ----------------
    cyc = 0;
    for (int n = 0; n < 300 + LAT; n++) begin
      for (int g = 0; g < 2; g++) begin
        q_valid[g] = n < 300;
        q_op[g]    = OP_SEARCH;
        q_key[g]   = ($urandom % 2 != 0) ? pool[$urandom % 24] : KEY_W'($urandom);
      end
      if (n < 300) begin
        pk.push_back(q_key[0]); pk.push_back(q_key[1]); pt.push_back(n);
      end
      @(negedge clk);
      if (n >= LAT - 1 && pt.size() > 0 && pt[0] == n - (LAT - 1)) begin
        void'(pt.pop_front());
        for (int g = 0; g < 2; g++) begin
          automatic logic [KEY_W-1:0] k = pk.pop_front();
          predict(OP_SEARCH, k, '0, g == 0, st[g], rv[g], wr[g], ws[g], wd[g]);
          check(r_valid[g] && r_key[g] == k && r_status[g] == st[g] &&
                (st[g] != ST_FOUND || r_value[g] == rv[g]),
                $sformatf("burst n=%0d PE%0d", n, g * 2));
          cyc++;
        end
      end
    end
    check(cyc == 600, $sformatf("burst answered %0d of 600 searches", cyc));
    for (int i = 0; i <= 6; i++) begin
      $display("status %s seen %0d times", status_e'(i), cnt[i]);
      check(cnt[i] > 0, $sformatf("status %0d never produced", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
