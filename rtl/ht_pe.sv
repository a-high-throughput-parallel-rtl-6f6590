// ht_pe: one processing engine (PE) of the parallel hash table.
//
// Each PE holds a complete replica of the hash table, split into K Partial
// XOR Stores (K = number of full PEs, i.e. the most non-search queries the
// table accepts per cycle). PE number PE_ID is a full PE when PE_ID < K: its
// store in column PE_ID is its Partial XOR Store (M), where its mutations
// start. The other PEs are search-only (paper, Fig. 3(b)): no store is
// written locally and there is no non-search XOR tree. A search-only PE
// still holds all K stores, all written from the ring, since decoding a slot
// needs every share; this follows the paper's figure, while its text speaks
// of Store (M) being removed.
//
// Pipeline, one query accepted per cycle, never stalled:
//   edge 1  hashing unit: H3 bucket index (h3_hash)
//   edge 2  all K stores read the bucket in parallel
//   edge 3  search XOR tree: XOR of the K encoded buckets = decoded bucket;
//           non-search XOR tree (full PE): XOR of the K-1 buckets other
//           than Store (M) = mask for the new encoded data
//   edge 4  result resolution: response (r_*) and write request
// so a response comes out 4 cycles after its query (t0 = 4 in the paper's
// consistency bound; the paper does not give the stage split, this is the
// design's choice). The write request is written into Store (M) at edge 5
// and reaches the same column of the next PE one cycle later, and so on
// around the ring (nsq_ring_hop), which the top module closes.
//
// Consistency is relaxed as in the paper: there is no forwarding, so a query
// that reads a bucket while a write to it is still travelling sees the old
// contents.
module ht_pe
  import ht_pkg::*;
#(
  parameter int unsigned P       = 16,
  parameter int unsigned K       = 2,
  parameter int unsigned PE_ID   = 0,
  parameter int unsigned SLOTS   = 4,
  parameter int unsigned KEY_W   = 64,
  parameter int unsigned VAL_W   = 64,
  parameter int unsigned IDX_W   = 15,
  parameter logic [63:0] H3_SEED = 64'h9E3779B97F4A7C15,
  localparam int unsigned SLOT_W = 1 + KEY_W + VAL_W,
  localparam int unsigned SW     = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned BW     = SLOTS * SLOT_W
) (
  input  logic                      clk,
  input  logic                      rst,
  // query input
  input  logic                      q_valid,
  input  op_e                       q_op,
  input  logic [KEY_W-1:0]          q_key,
  input  logic [VAL_W-1:0]          q_value,
  // query return
  output logic                      r_valid,
  output op_e                       r_op,
  output logic [KEY_W-1:0]          r_key,
  output logic [VAL_W-1:0]          r_value,
  output status_e                   r_status,
  // store writes from the previous PE, one per column
  input  logic [K-1:0]              ring_in_valid,
  input  logic [K-1:0][IDX_W-1:0]   ring_in_addr,
  input  logic [K-1:0][SW-1:0]      ring_in_slot,
  input  logic [K-1:0][SLOT_W-1:0]  ring_in_data,
  // store writes to the next PE, one per column
  output logic [K-1:0]              ring_out_valid,
  output logic [K-1:0][IDX_W-1:0]   ring_out_addr,
  output logic [K-1:0][SW-1:0]      ring_out_slot,
  output logic [K-1:0][SLOT_W-1:0]  ring_out_data
);

  localparam bit          NSQ_EN = (PE_ID < K);
  localparam int unsigned M_COL  = PE_ID;   // meaningful only when NSQ_EN

  initial begin
    assert (K >= 1 && K <= P && PE_ID < P) else $fatal(1, "bad PE configuration");
  end

  // ---------------- stage A: hashing unit ----------------
  logic             a_valid;
  logic [IDX_W-1:0] a_idx;
  op_e              a_op;
  logic [KEY_W-1:0] a_key;
  logic [VAL_W-1:0] a_value;

  h3_hash #(.KEY_W(KEY_W), .IDX_W(IDX_W), .H3_SEED(H3_SEED)) u_hash (
    .clk, .rst,
    .in_valid (q_valid),
    .in_key   (q_key),
    .out_valid(a_valid),
    .out_idx  (a_idx)
  );

  always_ff @(posedge clk) begin
    a_op    <= q_op;
    a_key   <= q_key;
    a_value <= q_value;
  end

  // ---------------- stage B: parallel read of the K stores ----------------
  logic             b_valid;
  logic [IDX_W-1:0] b_idx;
  op_e              b_op;
  logic [KEY_W-1:0] b_key;
  logic [VAL_W-1:0] b_value;
  logic [K-1:0][BW-1:0] rd_bucket;

  always_ff @(posedge clk) begin
    if (rst) b_valid <= 1'b0;
    else     b_valid <= a_valid;
    b_idx   <= a_idx;
    b_op    <= a_op;
    b_key   <= a_key;
    b_value <= a_value;
  end

  // write request from result resolution (used by the full PE's column M)
  logic              w_en;
  logic [IDX_W-1:0]  w_addr;
  logic [SW-1:0]     w_slot;
  logic [SLOT_W-1:0] w_data;

  for (genvar c = 0; c < K; c++) begin : g_col
    localparam bit IS_ORIGIN = NSQ_EN && (c == M_COL);
    // column c starts at PE c; its chain ends at PE c-1 (mod P)
    localparam bit IS_LAST   = (PE_ID == ((c + P - 1) % P));

    logic              st_valid;
    logic [IDX_W-1:0]  st_addr;
    logic [SW-1:0]     st_slot;
    logic [SLOT_W-1:0] st_data;

    nsq_ring_hop #(
      .AW(IDX_W), .SW(SW), .SLOT_W(SLOT_W),
      .IS_ORIGIN(IS_ORIGIN), .IS_LAST(IS_LAST)
    ) u_hop (
      .clk, .rst,
      .loc_valid(IS_ORIGIN ? w_en : 1'b0),
      .loc_addr (w_addr),
      .loc_slot (w_slot),
      .loc_data (w_data),
      .rem_valid(ring_in_valid[c]),
      .rem_addr (ring_in_addr[c]),
      .rem_slot (ring_in_slot[c]),
      .rem_data (ring_in_data[c]),
      .st_valid, .st_addr, .st_slot, .st_data,
      .fwd_valid(ring_out_valid[c]),
      .fwd_addr (ring_out_addr[c]),
      .fwd_slot (ring_out_slot[c]),
      .fwd_data (ring_out_data[c])
    );

    partial_xor_store #(.DEPTH(2 ** IDX_W), .SLOTS(SLOTS), .SLOT_W(SLOT_W)) u_store (
      .clk,
      .rd_en  (a_valid),
      .rd_addr(a_idx),
      .rd_data(rd_bucket[c]),
      .wr_en  (st_valid),
      .wr_addr(st_addr),
      .wr_slot(st_slot),
      .wr_data(st_data)
    );
  end

  // ---------------- stage C: XOR trees ----------------
  logic          c_valid;
  logic [IDX_W-1:0] c_idx;
  op_e           c_op;
  logic [KEY_W-1:0] c_key;
  logic [VAL_W-1:0] c_value;
  logic [BW-1:0] decoded_d, decoded_q;
  logic [BW-1:0] mask_d, mask_q;

  xor_tree #(.N(K), .W(BW)) u_search_tree (.in_data(rd_bucket), .out_data(decoded_d));

  if (NSQ_EN && K > 1) begin : g_ns_tree
    logic [K-2:0][BW-1:0] others;
    // columns 0..K-1 without M_COL, in order
    for (genvar j = 0; j < K - 1; j++) begin : g_other
      assign others[j] = rd_bucket[(j < M_COL) ? j : j + 1];
    end
    xor_tree #(.N(K - 1), .W(BW)) u_nonsearch_tree (.in_data(others), .out_data(mask_d));
  end else begin : g_no_ns_tree
    assign mask_d = '0;
  end

  always_ff @(posedge clk) begin
    if (rst) c_valid <= 1'b0;
    else     c_valid <= b_valid;
    c_idx     <= b_idx;
    c_op      <= b_op;
    c_key     <= b_key;
    c_value   <= b_value;
    decoded_q <= decoded_d;
    mask_q    <= mask_d;
  end

  // ---------------- stage D: result resolution ----------------
  result_resolution #(
    .KEY_W(KEY_W), .VAL_W(VAL_W), .SLOTS(SLOTS), .IDX_W(IDX_W), .NSQ_EN(NSQ_EN)
  ) u_resolve (
    .clk, .rst,
    .in_valid   (c_valid),
    .in_op      (c_op),
    .in_key     (c_key),
    .in_value   (c_value),
    .in_idx     (c_idx),
    .decoded    (decoded_q),
    .mask       (mask_q),
    .resp_valid (r_valid),
    .resp_op    (r_op),
    .resp_key   (r_key),
    .resp_value (r_value),
    .resp_status(r_status),
    .wr_en      (w_en),
    .wr_addr    (w_addr),
    .wr_slot    (w_slot),
    .wr_data    (w_data)
  );

endmodule
