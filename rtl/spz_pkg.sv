// spz_pkg: types and constants shared by the SparseZipper matrix unit.
//
// Every key or value that moves through the systolic array carries a 3-bit
// control tag next to its 32-bit data (source, duplicate and merge bits), and
// every micro-op carries a small token that tells a PE which instruction,
// which pass and which matrix-register row (stream) the data belongs to.
// The tag follows the paper; the token layout, the opcode encoding and the
// state encoding are this design's own.
package spz_pkg;

  // Widest stream index the token can carry (N up to 64 rows).
  localparam int IDX_W = 6;

  // Routing state a PE records for each stream row and pass.
  typedef enum logic [1:0] {
    ST_NONE   = 2'd0,  // initial, no data routed
    ST_FWD    = 2'd1,  // west->east, north->south
    ST_SWITCH = 2'd2,  // west->south, north->east
    ST_COMB   = 2'd3   // equal keys: one combined key/value to the south
  } pe_state_e;

  // Operation a row micro-op performs in the array.
  typedef enum logic [1:0] {
    AOP_SORTK = 2'd0,
    AOP_ZIPK  = 2'd1,
    AOP_SORTV = 2'd2,
    AOP_ZIPV  = 2'd3
  } aop_e;

  // Control tag carried with every key (3 bits between PEs).
  typedef struct packed {
    logic src;    // 0 = west input chunk, 1 = north input chunk
    logic dup;    // invalid: padding, combined duplicate or excluded key
    logic merge;  // key counts as processed/merged
  } kctl_t;

  // Micro-op token travelling with the data.
  typedef struct packed {
    logic             vld;
    logic             pass;  // 0 = sorting/merging pass, 1 = compressing pass
    logic [IDX_W-1:0] idx;   // matrix-register row (stream) of this micro-op
    aop_e             op;
  } tok_t;

  // Instructions accepted by the matrix unit.
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_MLXE    = 4'd1,
    OP_MSXE    = 4'd2,
    OP_MSSORTK = 4'd3,
    OP_MSSORTV = 4'd4,
    OP_MSZIPK  = 4'd5,
    OP_MSZIPV  = 4'd6,
    OP_MMV_VI  = 4'd7,
    OP_MMV_VO  = 4'd8
  } opcode_e;

  function automatic logic is_key_op(aop_e op);
    return (op == AOP_SORTK) || (op == AOP_ZIPK);
  endfunction

  function automatic logic is_sort_op(aop_e op);
    return (op == AOP_SORTK) || (op == AOP_SORTV);
  endfunction

endpackage
