// ht_pkg: types and constants shared by the parallel XOR-store hash table.
//
// Query operations: the table serves Search, Insert/Update (one operation:
// update the value when the key is present, otherwise insert it into an open
// slot) and Delete. Insert/Update and Delete are the "non-search queries"
// (NSQ). A response carries one of the status codes below.
//
// A slot is stored as {valid, key, value}; the valid bit travels through the
// XOR encoding like the key and value bits, so a slot is occupied when the
// XOR of all partial stores has its valid bit set (a choice of this design).
//
// h3_row() defines the Boolean matrix Q of the Class H3 hash: row m is a
// pseudo-random 32-bit word obtained from (seed, m) with the SplitMix64
// finaliser. Only the low IDX_W bits of each row are used. Every PE uses the
// same seed, so every replica hashes a key to the same bucket.
package ht_pkg;

  typedef enum logic [1:0] {
    OP_SEARCH = 2'd0,
    OP_INSERT = 2'd1,   // insert, or update when the key exists
    OP_DELETE = 2'd2
  } op_e;

  typedef enum logic [2:0] {
    ST_FOUND     = 3'd0,  // search hit, value returned
    ST_NOT_FOUND = 3'd1,  // search or delete miss
    ST_INSERTED  = 3'd2,  // new pair written to an open slot
    ST_UPDATED   = 3'd3,  // existing pair's value replaced
    ST_DELETED   = 3'd4,  // pair removed, slot open again
    ST_FULL      = 3'd5,  // insert miss and no open slot in the bucket
    ST_REJECTED  = 3'd6   // NSQ sent to a search-only PE
  } status_e;

  // Row m of the H3 matrix Q.
  function automatic logic [31:0] h3_row(input logic [63:0] seed, input int unsigned m);
    logic [63:0] z;
    z = seed + (64'h9E3779B97F4A7C15 * (64'(m) + 64'd1));
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    z = z ^ (z >> 31);
    return z[31:0];
  endfunction

endpackage
