// louvre_pkg: types shared by the blocks of the Louvre ordering unit.
//
// The unit sees every instruction that the core issues or retires as one of a
// small set of classes. Only the memory classes and the ordering classes
// (load-acquire, store-release, full fence) matter to versioning. Branches are
// listed because a branch takes a checkpoint of the version registers and of
// the ordering-queue tail, so that a misprediction can restore both. All other
// instructions are OP_OTHER.
//
// The classes follow the paper's terms: LDR/STR are ordinary accesses, LDAR is
// a load-acquire (synchronizing load), STLR is a store-release (synchronizing
// store), FENCE is a full (bi-directional) fence. The 3-bit encoding is this
// design's own choice.
package louvre_pkg;

  typedef enum logic [2:0] {
    OP_OTHER  = 3'd0,
    OP_LOAD   = 3'd1,
    OP_STORE  = 3'd2,
    OP_LDAR   = 3'd3,
    OP_STLR   = 3'd4,
    OP_FENCE  = 3'd5,
    OP_BRANCH = 3'd6
  } op_e;

  // Instruction classes that occupy a load/store-queue entry.
  function automatic logic is_mem_op(op_e op);
    return (op == OP_LOAD) || (op == OP_STORE) || (op == OP_LDAR) || (op == OP_STLR);
  endfunction

  // Instruction classes that read memory into a register.
  function automatic logic is_load_op(op_e op);
    return (op == OP_LOAD) || (op == OP_LDAR);
  endfunction

  // Instruction classes that move to the store buffer on retirement.
  function automatic logic is_store_op(op_e op);
    return (op == OP_STORE) || (op == OP_STLR);
  endfunction

  // Instruction classes tracked by the ordering queue (ORQ).
  function automatic logic is_orq_op(op_e op);
    return (op == OP_LDAR) || (op == OP_FENCE);
  endfunction

endpackage
