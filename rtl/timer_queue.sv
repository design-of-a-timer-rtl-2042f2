// timer_queue - hardware priority queue for timers, with in-queue update.
//
// The queue keeps up to N*M elements (ID, DATA) sorted by DATA, smallest DATA
// (earliest expiry) at the head. It is a chain of N systolic blocks of M
// shift-register slots each; block 0 holds the head. Operations enter block 0
// and travel down the chain, each block doing its part in four cycles and
// passing what is left (push, delete, pop, push-first) to the next block three
// cycles after it received it.
//
// Commands (op_valid_i / op_ready_o handshake, op_code_i of tq_pkg::op_e):
//   OP_PUSH   : enqueue (op_id_i, op_data_i); if op_id_i is already queued,
//               its DATA is replaced and the element re-sorted (update).
//               Elements with equal DATA leave in the order they were pushed.
//   OP_POP    : dequeue the head; the removed element appears on deq_*_o
//               one cycle after the command is accepted (deq_id_o = 0 when
//               the queue was empty).
//   OP_DELETE : remove element op_id_i, wherever it sits (no effect if
//               absent).
//   peek      : head_*_o always show the head element; they are valid
//               whenever op_ready_o is high.
// ID 0 is reserved to mark empty slots and must not be pushed. op_ready_o is
// high one cycle in ISSUE_INTERVAL (5): a new command may start every five
// cycles, whatever the queue depth. A push into a full queue makes the
// lowest-priority element (the pushed one, or the last one) leave the tail of
// the chain; it is reported on drop_*_o for one cycle.
//
// Follows the paper: the block chain, operations and their propagation, the
// five-cycle issue interval, peek from the head block, ID width
// $clog2(N*M), asynchronous reset. This design's own choices: the command
// encoding and ready/valid handshake, the deq_* and drop_* outputs, ID 0 as
// the empty marker.
module timer_queue
  import tq_pkg::*;
#(
  parameter int unsigned N              = 32,
  parameter int unsigned M              = 8,
  parameter int unsigned ID_W           = $clog2(N*M),
  parameter int unsigned DATA_W         = 16,
  parameter int unsigned ISSUE_INTERVAL = DEFAULT_ISSUE_INTERVAL
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              op_valid_i,
  input  op_e               op_code_i,
  input  logic [ID_W-1:0]   op_id_i,
  input  logic [DATA_W-1:0] op_data_i,
  output logic              op_ready_o,
  // peek: head of the queue
  output logic              head_valid_o,
  output logic [ID_W-1:0]   head_id_o,
  output logic [DATA_W-1:0] head_data_o,
  // dequeued element
  output logic              deq_valid_o,
  output logic [ID_W-1:0]   deq_id_o,
  output logic [DATA_W-1:0] deq_data_o,
  // element pushed out of a full queue
  output logic              drop_valid_o,
  output logic [ID_W-1:0]   drop_id_o,
  output logic [DATA_W-1:0] drop_data_o
);

  localparam int unsigned CW = $clog2(ISSUE_INTERVAL + 1);

  // ---------------------------------------------------------------- issue
  logic [CW-1:0] wait_cnt;
  logic          accept;

  assign op_ready_o = (wait_cnt == '0);
  assign accept     = op_valid_i && op_ready_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               wait_cnt <= '0;
    else if (accept)          wait_cnt <= CW'(ISSUE_INTERVAL - 1);
    else if (wait_cnt != '0)  wait_cnt <= wait_cnt - 1'b1;
  end

  // ---------------------------------------------------------------- chain
  // link k carries the operation into block k; link N leaves the tail
  logic              l_valid [N+1];
  logic              l_push  [N+1];
  logic              l_del   [N+1];
  logic              l_pop   [N+1];
  logic              l_pf    [N+1];
  logic [ID_W-1:0]   l_id    [N+1];
  logic [DATA_W-1:0] l_data  [N+1];
  logic [ID_W-1:0]   l_delid [N+1];
  logic [ID_W-1:0]   f_id    [N+1];   // first element of block k (f_*[N]: none)
  logic [DATA_W-1:0] f_data  [N+1];
  logic              busy    [N];

  assign l_valid[0] = accept;
  assign l_push[0]  = (op_code_i == OP_PUSH);
  assign l_del[0]   = (op_code_i == OP_DELETE);
  assign l_pop[0]   = (op_code_i == OP_POP);
  assign l_pf[0]    = 1'b0;
  assign l_id[0]    = op_id_i;
  assign l_data[0]  = op_data_i;
  assign l_delid[0] = op_id_i;
  assign f_id[N]    = '0;
  assign f_data[N]  = '0;

  for (genvar k = 0; k < N; k++) begin : g_blk
    tq_systolic_block #(.M(M), .ID_W(ID_W), .DATA_W(DATA_W)) u_blk (
      .clk          (clk),
      .rst_n        (rst_n),
      .in_valid_i   (l_valid[k]),
      .in_push_i    (l_push[k]),
      .in_del_i     (l_del[k]),
      .in_pop_i     (l_pop[k]),
      .in_pf_i      (l_pf[k]),
      .in_id_i      (l_id[k]),
      .in_data_i    (l_data[k]),
      .in_del_id_i  (l_delid[k]),
      .out_valid_o  (l_valid[k+1]),
      .out_push_o   (l_push[k+1]),
      .out_del_o    (l_del[k+1]),
      .out_pop_o    (l_pop[k+1]),
      .out_pf_o     (l_pf[k+1]),
      .out_id_o     (l_id[k+1]),
      .out_data_o   (l_data[k+1]),
      .out_del_id_o (l_delid[k+1]),
      .last_id_i    (f_id[k+1]),
      .last_data_i  (f_data[k+1]),
      .first_id_o   (f_id[k]),
      .first_data_o (f_data[k]),
      .busy_o       (busy[k])
    );
  end

  // ---------------------------------------------------------------- head
  assign head_id_o    = f_id[0];
  assign head_data_o  = f_data[0];
  assign head_valid_o = (f_id[0] != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      deq_valid_o <= 1'b0;
      deq_id_o    <= '0;
      deq_data_o  <= '0;
    end else begin
      deq_valid_o <= accept && (op_code_i == OP_POP);
      if (accept && (op_code_i == OP_POP)) begin
        deq_id_o   <= f_id[0];
        deq_data_o <= f_data[0];
      end
    end
  end

  // ---------------------------------------------------------------- tail
  // a push or push-first leaving the last block carries an element that no
  // longer fits; a delete or pop leaving it has nothing left to do
  assign drop_valid_o = l_valid[N] && (l_push[N] || l_pf[N]) && (l_id[N] != '0);
  assign drop_id_o    = l_id[N];
  assign drop_data_o  = l_data[N];

  // the issue interval keeps block 0 idle whenever a command is taken
  a_issue_idle: assert property (@(posedge clk) disable iff (!rst_n) accept |-> !busy[0])
    else $error("timer_queue: command taken while block 0 is busy");

  a_no_zero_id: assert property (@(posedge clk) disable iff (!rst_n)
                                 accept && (op_code_i != OP_POP) |-> (op_id_i != '0))
    else $error("timer_queue: ID 0 is reserved for empty slots");

endmodule
