// result_resolution: the result resolution unit of a processing engine.
//
// Input: one query (op, key, value, bucket index) together with the decoded
// bucket from the search XOR tree and, in a full PE, the XOR mask from the
// non-search XOR tree (the XOR of the K-1 stores other than Store (M)).
// The unit probes all SLOTS slots in parallel (paper, Sec. IV-C.2):
//   - match[s]: slot s is occupied and holds the query key; the lowest such
//     slot is used;
//   - open[s]:  slot s is empty; the lowest such slot is "the first open
//     slot" used by an insert of a new key.
// It then resolves the query:
//   Search        -> ST_FOUND with the value, or ST_NOT_FOUND.
//   Insert/Update -> key present: ST_UPDATED, rewrite that slot;
//                    key absent and an open slot: ST_INSERTED, write it;
//                    key absent and bucket full: ST_FULL, no write.
//   Delete        -> key present: ST_DELETED, the slot is rewritten as all
//                    zeros (valid bit cleared); otherwise ST_NOT_FOUND.
// The word written to Store (M) is new_slot ^ mask[slot], so that the XOR of
// all K stores becomes new_slot (paper, Sec. IV-C.1). When the other stores
// are zero at that slot this is the plain pair, as the paper says of a new
// insert.
//
// With NSQ_EN = 0 (search-only PE) there is no write port: an Insert/Update
// or Delete is answered with ST_REJECTED and the mask input is ignored.
//
// Slot layout: {valid, key[KEY_W], value[VAL_W]}.
//
// Timing: one register stage; the response and the write request appear
// together one cycle after in_valid. Synchronous reset clears the valids.
module result_resolution
  import ht_pkg::*;
#(
  parameter int unsigned KEY_W  = 64,
  parameter int unsigned VAL_W  = 64,
  parameter int unsigned SLOTS  = 4,
  parameter int unsigned IDX_W  = 15,
  parameter bit          NSQ_EN = 1'b1,
  localparam int unsigned SLOT_W = 1 + KEY_W + VAL_W,
  localparam int unsigned SW     = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                         clk,
  input  logic                         rst,
  // query and the data read for it
  input  logic                         in_valid,
  input  op_e                          in_op,
  input  logic [KEY_W-1:0]             in_key,
  input  logic [VAL_W-1:0]             in_value,
  input  logic [IDX_W-1:0]             in_idx,
  input  logic [SLOTS-1:0][SLOT_W-1:0] decoded,
  input  logic [SLOTS-1:0][SLOT_W-1:0] mask,
  // query return
  output logic                         resp_valid,
  output op_e                          resp_op,
  output logic [KEY_W-1:0]             resp_key,
  output logic [VAL_W-1:0]             resp_value,
  output status_e                      resp_status,
  // write request for Store (M)
  output logic                         wr_en,
  output logic [IDX_W-1:0]             wr_addr,
  output logic [SW-1:0]                wr_slot,
  output logic [SLOT_W-1:0]            wr_data
);

  logic [SLOTS-1:0] match, open_s;
  logic             hit, any_open;
  logic [SW-1:0]    hit_slot, open_slot;

  always_comb begin
    for (int unsigned s = 0; s < SLOTS; s++) begin
      match[s]  = decoded[s][SLOT_W-1] && (decoded[s][KEY_W+VAL_W-1:VAL_W] == in_key);
      open_s[s] = !decoded[s][SLOT_W-1];
    end
    hit       = |match;
    any_open  = |open_s;
    hit_slot  = '0;
    open_slot = '0;
    // highest index first so the lowest index wins
    for (int s = int'(SLOTS) - 1; s >= 0; s--) begin
      if (match[s])  hit_slot  = SW'(s);
      if (open_s[s]) open_slot = SW'(s);
    end
  end

  status_e           status_c;
  logic              wr_c;
  logic [SW-1:0]     slot_c;
  logic [SLOT_W-1:0] new_slot_c;
  logic [VAL_W-1:0]  value_c;

  always_comb begin
    status_c   = ST_NOT_FOUND;
    wr_c       = 1'b0;
    slot_c     = hit_slot;
    new_slot_c = '0;
    value_c    = '0;
    unique case (in_op)
      OP_SEARCH: begin
        status_c = hit ? ST_FOUND : ST_NOT_FOUND;
        value_c  = decoded[hit_slot][VAL_W-1:0];
      end
      OP_INSERT: begin
        value_c = in_value;
        if (!NSQ_EN) begin
          status_c = ST_REJECTED;
        end else if (hit) begin
          status_c   = ST_UPDATED;
          wr_c       = 1'b1;
          new_slot_c = {1'b1, in_key, in_value};
        end else if (any_open) begin
          status_c   = ST_INSERTED;
          wr_c       = 1'b1;
          slot_c     = open_slot;
          new_slot_c = {1'b1, in_key, in_value};
        end else begin
          status_c = ST_FULL;
        end
      end
      OP_DELETE: begin
        if (!NSQ_EN) begin
          status_c = ST_REJECTED;
        end else if (hit) begin
          status_c   = ST_DELETED;
          wr_c       = 1'b1;
          value_c    = decoded[hit_slot][VAL_W-1:0];
          new_slot_c = '0;
        end
      end
      default: status_c = ST_REJECTED;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      resp_valid <= 1'b0;
      wr_en      <= 1'b0;
    end else begin
      resp_valid <= in_valid;
      wr_en      <= in_valid && wr_c;
    end
    resp_op     <= in_op;
    resp_key    <= in_key;
    resp_value  <= value_c;
    resp_status <= status_c;
    wr_addr     <= in_idx;
    wr_slot     <= slot_c;
    wr_data     <= new_slot_c ^ (NSQ_EN ? mask[slot_c] : '0);
  end

endmodule
