// partial_xor_store: one Partial XOR Store of a processing engine.
//
// A PE keeps its replica of the hash table as K partial stores. Store c of
// every PE holds the same words: the XOR share written by the c-th full PE.
// The key-value pair in a slot is the XOR of that slot over the K stores of a
// PE (paper, Sec. IV-B and Fig. 1(b)). In the full PE that owns column c, the
// store is "Partial XOR Store (M)": the same memory, with its write port fed
// by the PE's own result resolution instead of by the previous PE.
//
// Each store is a simple dual-port SRAM: one read port, used by the PE's
// queries (and, as Fig. 1(b) shows, also for the read half of a write, since
// reads and writes share the read ports), and one write port. A word is a
// bucket of SLOTS slots; the write port writes one slot, so the bucket is
// built as SLOTS memories of DEPTH x SLOT_W side by side, each with its own
// write enable. This maps to BRAM/URAM with byte-enable-like slot enables.
//
// Timing: synchronous read, rd_data valid the cycle after rd_en (registered,
// held while rd_en is low). A read and a write to the same address in the
// same cycle return the old data (read-first). The contents start at zero, so
// every slot starts empty; this is the FPGA configuration value of the RAM
// and needs no reset sweep (a choice of this design).
module partial_xor_store #(
  parameter int unsigned DEPTH  = 32768,
  parameter int unsigned SLOTS  = 4,
  parameter int unsigned SLOT_W = 129,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                         clk,
  input  logic                         rd_en,
  input  logic [AW-1:0]                rd_addr,
  output logic [SLOTS-1:0][SLOT_W-1:0] rd_data,
  input  logic                         wr_en,
  input  logic [AW-1:0]                wr_addr,
  input  logic [SW-1:0]                wr_slot,
  input  logic [SLOT_W-1:0]            wr_data
);

  for (genvar s = 0; s < SLOTS; s++) begin : g_slot
    logic [SLOT_W-1:0] mem [DEPTH];

    initial begin
      for (int unsigned a = 0; a < DEPTH; a++) mem[a] = '0;
    end

    always_ff @(posedge clk) begin
      if (wr_en && wr_slot == SW'(s)) mem[wr_addr] <= wr_data;
    end

    always_ff @(posedge clk) begin
      if (rd_en) rd_data[s] <= mem[rd_addr];
    end
  end

endmodule
