// nsq_ring_hop: one hop of the inter-PE write pipeline for one store column.
//
// Every mutation (insert, update, delete) of column c starts at the full PE
// that owns Partial XOR Store (M) of column c and must reach column c of every
// other PE (paper, Sec. IV-C.3). The PEs form a ring; the write travels one
// PE per cycle in the order c, c+1, ..., P-1, 0, ..., c-1, so it has reached
// all P replicas P-1 cycles after it was written at its origin. Since each
// column has a single origin and moves one hop per cycle, at most one write
// per column arrives at a PE per cycle and writes never collide.
//
// In each PE and column, this hop
//   - chooses what to write into the local store: the PE's own result
//     resolution output at the origin (IS_ORIGIN = 1), the write received
//     from the previous PE elsewhere;
//   - registers that write towards the next PE, except in the PE just before
//     the origin (IS_LAST = 1), where the chain ends.
// The choice of origin is fixed by the configuration, so the selection is a
// constant; the forward register is the pipeline stage of the ring.
//
// Timing: st_* is combinational from the selected input (written into the
// store at the next edge) and held invalid during reset; fwd_* is that same
// write one cycle later.
module nsq_ring_hop #(
  parameter int unsigned AW        = 15,
  parameter int unsigned SW        = 2,
  parameter int unsigned SLOT_W    = 129,
  parameter bit          IS_ORIGIN = 1'b0,
  parameter bit          IS_LAST   = 1'b0
) (
  input  logic              clk,
  input  logic              rst,
  // write produced by this PE (used only at the origin)
  input  logic              loc_valid,
  input  logic [AW-1:0]     loc_addr,
  input  logic [SW-1:0]     loc_slot,
  input  logic [SLOT_W-1:0] loc_data,
  // write received from the previous PE
  input  logic              rem_valid,
  input  logic [AW-1:0]     rem_addr,
  input  logic [SW-1:0]     rem_slot,
  input  logic [SLOT_W-1:0] rem_data,
  // write port of the local store
  output logic              st_valid,
  output logic [AW-1:0]     st_addr,
  output logic [SW-1:0]     st_slot,
  output logic [SLOT_W-1:0] st_data,
  // write sent to the next PE
  output logic              fwd_valid,
  output logic [AW-1:0]     fwd_addr,
  output logic [SW-1:0]     fwd_slot,
  output logic [SLOT_W-1:0] fwd_data
);

  always_comb begin
    // no store is written while reset is asserted, whatever the write
    // request registers held at power-up
    if (IS_ORIGIN) begin
      st_valid = loc_valid && !rst;
      st_addr  = loc_addr;
      st_slot  = loc_slot;
      st_data  = loc_data;
    end else begin
      st_valid = rem_valid && !rst;
      st_addr  = rem_addr;
      st_slot  = rem_slot;
      st_data  = rem_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) fwd_valid <= 1'b0;
    else     fwd_valid <= st_valid && !IS_LAST;
    fwd_addr <= st_addr;
    fwd_slot <= st_slot;
    fwd_data <= st_data;
  end

  // The chain of a column ends before its origin, and only the origin
  // produces local writes for its column.
  if (IS_ORIGIN) begin : g_origin_chk
    a_no_wrap: assert property (@(posedge clk) disable iff (rst) !rem_valid);
  end else begin : g_hop_chk
    a_no_local: assert property (@(posedge clk) disable iff (rst) !loc_valid);
  end

endmodule
