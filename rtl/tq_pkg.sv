// tq_pkg - types and constants shared by the timer-queue modules.
//
// op_e is the command a user hands to the queue at its top-level port: PUSH
// (enqueue a new ID, or update the DATA of an ID already queued), POP
// (dequeue the head) and DELETE (remove an ID wherever it sits). Peek needs no
// command; the head is always on the head outputs.
//
// phase_e names the four phases every systolic block runs through for every
// operation: the enable cycle (the block is IDLE and sees a valid operation at
// its input), COMPARE, SHIFT (set-and-shift) and FINISH, in which the block's
// interface register presents the operations it passes to the next block.
// The phase names follow the paper's timing description; the encoding is
// this design's own.
package tq_pkg;

  typedef enum logic [1:0] {
    OP_PUSH   = 2'd0,
    OP_POP    = 2'd1,
    OP_DELETE = 2'd2
  } op_e;

  typedef enum logic [1:0] {
    PH_IDLE    = 2'd0,
    PH_COMPARE = 2'd1,
    PH_SHIFT   = 2'd2,
    PH_FINISH  = 2'd3
  } phase_e;

  // Cycles between two operations accepted at the queue input. One operation
  // needs four cycles in a block and the next block's head must be final
  // before the following compare, so one operation is accepted every five.
  localparam int unsigned DEFAULT_ISSUE_INTERVAL = 5;

endpackage
