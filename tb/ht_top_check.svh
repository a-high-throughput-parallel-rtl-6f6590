// ht_top_check.svh: body of the end-to-end hash table testbenches.
//
// Included by tb_hash_table_top (reduced size), tb_hash_table_full (default
// size) and ht_top_run (any size) after they define P, K, SLOTS, KEY_W,
// VAL_W, IDX_W, SEED and NCYC; they then instantiate hash_table_top on the
// signals declared here, and report checks/failures once done is set.
//
// Every cycle, every PE receives a query (full throughput, P per cycle).
// PEs 0..K-1 get a mix of searches, inserts/updates and deletes; the
// search-only PEs get searches and, rarely, a non-search query that must be
// rejected. A model of the decoded table, applied in issue order, predicts
// each response, which must come exactly 3 cycles after the cycle the query
// was issued in (4 clock edges including the one that samples it).
//
// The table is relaxed-consistent, so the generator keeps the model exact:
// after a mutation of bucket b issued in cycle t, no query touches b before
// cycle t + P + 3, the first cycle in which every replica has the new data;
// and a bucket mutated in a cycle is touched by no other query of that cycle.
// This spacing is tight, so it also checks the propagation time of the ring.
//
// Keys: a pool of keys crowded into a few buckets (more keys than slots, so
// buckets fill up) plus fresh random keys.
//
// Mechanisms counted and required: search hit and miss, insert, update,
// delete, bucket full, rejection by a search-only PE, a hit in a PE other
// than the one that wrote the pair, all K full PEs mutating in one cycle.

  import ht_pkg::*;

  localparam int unsigned NB   = 2 ** IDX_W;
  localparam int unsigned NACT = (NB < 16) ? NB : 16;
  localparam int unsigned POOL = NACT * (SLOTS + 1);
  localparam int unsigned SLOT_W = 1 + KEY_W + VAL_W;
  localparam int          RESP_DELAY = 3;
  localparam int          SETTLE = P + 3;

  logic clk = 1'b0, rst;
  logic [P-1:0]            q_valid;
  op_e  [P-1:0]            q_op;
  logic [P-1:0][KEY_W-1:0] q_key;
  logic [P-1:0][VAL_W-1:0] q_value;
  logic [P-1:0]            r_valid;
  op_e  [P-1:0]            r_op;
  logic [P-1:0][KEY_W-1:0] r_key;
  logic [P-1:0][VAL_W-1:0] r_value;
  status_e [P-1:0]         r_status;

  int checks = 0, failures = 0;
  bit done = 1'b0;   // set when the run is over; the includer reports and ends
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (NCYC + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model of the decoded table ----------------
  typedef struct {
    bit               valid;
    logic [KEY_W-1:0] key;
    logic [VAL_W-1:0] value;
    int               writer;
  } mslot_t;

  typedef struct {
    int               due;
    op_e              op;
    logic [KEY_W-1:0] key;
    status_e          st;
    logic [VAL_W-1:0] value;
  } exp_t;

  mslot_t           tbl [int][SLOTS];      // only touched buckets are stored
  int               lock_until [int];
  logic [KEY_W-1:0] pool [POOL];
  int               act [NACT];
  exp_t             expq [P][$];

  int n_found, n_miss, n_ins, n_upd, n_del, n_full, n_rej, n_cross, n_allnsq, n_fullrate;

  function automatic int bucket(logic [KEY_W-1:0] k);
    logic [IDX_W-1:0] h = '0;
    for (int unsigned m = 0; m < KEY_W; m++) if (k[m]) h ^= IDX_W'(h3_row(SEED, m));
    return int'(h);
  endfunction

  function automatic logic [KEY_W-1:0] rnd_key();
    return KEY_W'({$urandom, $urandom});
  endfunction

  // apply one query to the model and return its expected response
  function automatic exp_t apply(int pe, op_e op, logic [KEY_W-1:0] key, logic [VAL_W-1:0] val);
    exp_t e;
    int b = bucket(key);
    int hit = -1, opn = -1;
    if (!tbl.exists(b))
      for (int s = 0; s < int'(SLOTS); s++) tbl[b][s] = '{0, '0, '0, -1};
    for (int s = int'(SLOTS) - 1; s >= 0; s--) begin
      if (tbl[b][s].valid && tbl[b][s].key == key) hit = s;
      if (!tbl[b][s].valid) opn = s;
    end
    e.op = op; e.key = key; e.value = '0;
    if (op == OP_SEARCH) begin
      e.st = (hit >= 0) ? ST_FOUND : ST_NOT_FOUND;
      if (hit >= 0) begin
        e.value = tbl[b][hit].value;
        n_found++;
        if (tbl[b][hit].writer != pe) n_cross++;
      end else n_miss++;
    end else if (pe >= int'(K)) begin
      e.st = ST_REJECTED; n_rej++;
    end else if (op == OP_INSERT) begin
      if (hit >= 0) begin
        e.st = ST_UPDATED; n_upd++;
        tbl[b][hit] = '{1, key, val, pe};
      end else if (opn >= 0) begin
        e.st = ST_INSERTED; n_ins++;
        tbl[b][opn] = '{1, key, val, pe};
      end else begin
        e.st = ST_FULL; n_full++;
      end
    end else begin
      if (hit >= 0) begin
        e.st = ST_DELETED; n_del++;
        tbl[b][hit] = '{0, '0, '0, -1};
      end else begin
        e.st = ST_NOT_FOUND; n_miss++;
      end
    end
    return e;
  endfunction

  initial begin
    int  used [int];      // buckets touched this cycle
    bit  mut [int];       // buckets mutated this cycle
    n_found = 0; n_miss = 0; n_ins = 0; n_upd = 0; n_del = 0; n_full = 0; n_rej = 0;
    n_cross = 0; n_allnsq = 0; n_fullrate = 0;

    // key pool crowded into NACT buckets
    for (int i = 0; i < int'(NACT); i++) act[i] = bucket(rnd_key());
    for (int i = 0; i < int'(POOL); ) begin
      automatic logic [KEY_W-1:0] k = rnd_key();
      automatic int b = bucket(k);
      automatic bit hit = 0;
      for (int a = 0; a < int'(NACT); a++) if (b == act[a]) hit = 1;
      if (hit) begin pool[i] = k; i++; end
    end

    rst = 1'b1; q_valid = '0; q_op = '{default: OP_SEARCH}; q_key = '0; q_value = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;

    for (int t = 0; t < NCYC + RESP_DELAY + 1; t++) begin
      automatic int nsq_now = 0;
      used.delete(); mut.delete();
      for (int i = 0; i < int'(P); i++) begin
        op_e op;
        logic [KEY_W-1:0] k;
        int b, tries;
        bit ok;
        q_valid[i] = 1'b0;
        ok = 0;
        if (t < NCYC) begin
          // choose the operation
          if (i < int'(K)) begin
            case ($urandom % 8)
              0, 1, 2: op = OP_SEARCH;
              3, 4, 5: op = OP_INSERT;
              default: op = OP_DELETE;
            endcase
          end else begin
            op = ($urandom % 64 == 0) ? (($urandom % 2 != 0) ? OP_INSERT : OP_DELETE) : OP_SEARCH;
          end
          // choose a key whose bucket may be touched now
          for (tries = 0; tries < 12 && !ok; tries++) begin
            k = (tries < 8 && ($urandom % 4 != 0)) ? pool[$urandom % POOL] : rnd_key();
            b = bucket(k);
            ok = !(lock_until.exists(b) && lock_until[b] > t) && !mut.exists(b);
            if (op != OP_SEARCH && i < int'(K) && used.exists(b)) ok = 0;
          end
        end
        if (ok) begin
          automatic exp_t e;
          q_valid[i] = 1'b1;
          q_op[i]    = op;
          q_key[i]   = k;
          q_value[i] = VAL_W'({$urandom, $urandom});
          used[b] = 1;
          if (op != OP_SEARCH && i < int'(K)) begin
            mut[b] = 1;
            lock_until[b] = t + SETTLE;
            nsq_now++;
          end
          e = apply(i, op, k, q_value[i]);
          e.due = t + RESP_DELAY;
          expq[i].push_back(e);
        end
      end
      if (nsq_now == int'(K)) n_allnsq++;
      if (&q_valid) n_fullrate++;
      @(negedge clk);
      for (int i = 0; i < int'(P); i++) begin
        if (expq[i].size() > 0 && expq[i][0].due == t) begin
          automatic exp_t e = expq[i].pop_front();
          check(r_valid[i] && r_op[i] == e.op && r_key[i] == e.key && r_status[i] == e.st,
                $sformatf("t=%0d PE %0d %s %h: got valid=%0d status %s, expected %s",
                          t, i, e.op.name(), e.key, r_valid[i], r_status[i].name(), e.st.name()));
          if (e.st == ST_FOUND)
            check(r_value[i] == e.value, $sformatf("t=%0d PE %0d value %h expected %h",
                                                   t, i, r_value[i], e.value));
        end else begin
          check(!r_valid[i], $sformatf("t=%0d PE %0d unexpected response", t, i));
        end
      end
    end
    for (int i = 0; i < int'(P); i++)
      check(expq[i].size() == 0, $sformatf("PE %0d: %0d responses missing", i, expq[i].size()));

    $display("P=%0d K=%0d buckets=%0d slots=%0d: cycles %0d, cycles with all %0d PEs busy %0d", P, K, NB, SLOTS, NCYC, P, n_fullrate);
    $display("found %0d, miss %0d, inserted %0d, updated %0d, deleted %0d, full %0d, rejected %0d",
             n_found, n_miss, n_ins, n_upd, n_del, n_full, n_rej);
    $display("hits on a pair written by another PE %0d, cycles with all %0d full PEs mutating %0d",
             n_cross, K, n_allnsq);
    check(n_found > 0,    "search hit never happened");
    check(n_miss > 0,     "search miss never happened");
    check(n_ins > 0,      "insert never happened");
    check(n_upd > 0,      "update never happened");
    check(n_del > 0,      "delete never happened");
    check(n_full > 0,     "full bucket never happened");
    check(n_rej > 0 || P == K, "rejection by a search-only PE never happened");
    check(n_cross > 0,    "hit across PEs never happened");
    check(n_allnsq > 0,   "all full PEs never mutated in one cycle");
    check(n_fullrate > NCYC / 2, "fewer than half the cycles ran at full rate");
    done = 1'b1;
  end
