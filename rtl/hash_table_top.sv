// hash_table_top: parallel hash table of P processing engines over
// XOR-encoded replicas.
//
// The table answers P queries per clock cycle, one per PE, whatever the keys
// and operations, provided that at most K of them are insert/update or delete
// (non-search queries). PEs 0..K-1 are full PEs, the others are search-only;
// the application routes non-search queries to the full PEs. Every PE keeps
// a whole replica of the table as K partial XOR stores; column c of every PE
// holds the XOR share written by full PE c. Column c's writes start in PE c
// and ride a ring PE c -> c+1 -> ... -> P-1 -> 0 -> ... -> c-1, one hop per
// cycle (paper, Fig. 2). The top module only instantiates the PEs and closes
// the K rings; per-PE behaviour is in ht_pe.
//
// Defaults follow the paper's 16-PE configuration of Table I: P = 16, K = 2
// (NSQ ratio 2/16), 32K buckets (IDX_W = 15) of 4 slots, 64-bit keys and
// values.
//
// Interface: per PE i, q_valid[i]/q_op[i]/q_key[i]/q_value[i] is a query,
// accepted every cycle without back-pressure; r_*[i] is its result 4 cycles
// later, in order. A non-search query sent to a search-only PE (i >= K) is
// answered with ST_REJECTED and changes nothing. A mutation accepted at PE c
// in cycle t is seen by every query, in any PE, accepted in cycle t + P + 3
// or later: 4 cycles to reach Store (M) of PE c, then one PE per cycle. A
// query on the same bucket accepted earlier may see the old contents
// (relaxed consistency, no forwarding between queries in flight).
module hash_table_top
  import ht_pkg::*;
#(
  parameter int unsigned P       = 16,
  parameter int unsigned K       = 2,
  parameter int unsigned SLOTS   = 4,
  parameter int unsigned KEY_W   = 64,
  parameter int unsigned VAL_W   = 64,
  parameter int unsigned IDX_W   = 15,
  parameter logic [63:0] H3_SEED = 64'h9E3779B97F4A7C15
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [P-1:0]              q_valid,
  input  op_e  [P-1:0]              q_op,
  input  logic [P-1:0][KEY_W-1:0]   q_key,
  input  logic [P-1:0][VAL_W-1:0]   q_value,
  output logic [P-1:0]              r_valid,
  output op_e  [P-1:0]              r_op,
  output logic [P-1:0][KEY_W-1:0]   r_key,
  output logic [P-1:0][VAL_W-1:0]   r_value,
  output status_e [P-1:0]           r_status
);

  localparam int unsigned SLOT_W = 1 + KEY_W + VAL_W;
  localparam int unsigned SW     = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  logic [P-1:0][K-1:0]             ring_valid;
  logic [P-1:0][K-1:0][IDX_W-1:0]  ring_addr;
  logic [P-1:0][K-1:0][SW-1:0]     ring_slot;
  logic [P-1:0][K-1:0][SLOT_W-1:0] ring_data;

  for (genvar i = 0; i < P; i++) begin : g_pe
    localparam int unsigned PREV = (i + P - 1) % P;

    ht_pe #(
      .P(P), .K(K), .PE_ID(i), .SLOTS(SLOTS),
      .KEY_W(KEY_W), .VAL_W(VAL_W), .IDX_W(IDX_W), .H3_SEED(H3_SEED)
    ) u_pe (
      .clk, .rst,
      .q_valid       (q_valid[i]),
      .q_op          (q_op[i]),
      .q_key         (q_key[i]),
      .q_value       (q_value[i]),
      .r_valid       (r_valid[i]),
      .r_op          (r_op[i]),
      .r_key         (r_key[i]),
      .r_value       (r_value[i]),
      .r_status      (r_status[i]),
      .ring_in_valid (ring_valid[PREV]),
      .ring_in_addr  (ring_addr[PREV]),
      .ring_in_slot  (ring_slot[PREV]),
      .ring_in_data  (ring_data[PREV]),
      .ring_out_valid(ring_valid[i]),
      .ring_out_addr (ring_addr[i]),
      .ring_out_slot (ring_slot[i]),
      .ring_out_data (ring_data[i])
    );
  end

endmodule
