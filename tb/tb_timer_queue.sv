// tb_timer_queue - end-to-end testbench of the timer queue, reduced size.
//
// N = 4 blocks of M = 4 slots (capacity 16) with 6-bit IDs, so that more IDs
// exist than slots and the queue can overflow. Random enqueue, update,
// delete and dequeue commands (issued as fast as op_ready allows) run
// against a sorted-list reference model. Checked on every command: the peek
// outputs equal the model's head; on every dequeue the returned element;
// the cadence of op_ready (one command every five cycles), the one-cycle
// dequeue latency and the head being final three cycles after a command;
// at the end, every element dropped by overflow, and the whole queue
// drained in order. Every mechanism the queue relies on must
// occur at least once (counted by the model).
module tb_timer_queue;
  import tq_pkg::*;
  import tq_ref_pkg::*;

  localparam int unsigned N = 4, M = 4, ID_W = 6, DATA_W = 8;
  localparam int NOPS = 6000;
  localparam int MAXID = 63;
  localparam int DRANGE = 60;
  localparam bit EXPECT_OVERFLOW = 1'b1;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              op_valid, op_ready;
  op_e               op_code;
  logic [ID_W-1:0]   op_id, head_id, deq_id, drop_id;
  logic [DATA_W-1:0] op_data, head_data, deq_data, drop_data;
  logic              head_valid, deq_valid, drop_valid;

  timer_queue #(.N(N), .M(M), .ID_W(ID_W), .DATA_W(DATA_W)) dut (
    .clk(clk), .rst_n(rst_n),
    .op_valid_i(op_valid), .op_code_i(op_code), .op_id_i(op_id), .op_data_i(op_data),
    .op_ready_o(op_ready),
    .head_valid_o(head_valid), .head_id_o(head_id), .head_data_o(head_data),
    .deq_valid_o(deq_valid), .deq_id_o(deq_id), .deq_data_o(deq_data),
    .drop_valid_o(drop_valid), .drop_id_o(drop_id), .drop_data_o(drop_data)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 1000) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin : watchdog
    repeat (12 * NOPS + 40 * N * M + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tq_ref model;
  ent_t  dut_drops[$];
  int    last_accept = -1;
  int    n_cadence = 0;

  always @(posedge clk)
    if (rst_n && drop_valid) dut_drops.push_back('{int'(drop_id), int'(drop_data)});

  // issue one command; compares peek before it and the dequeued element
  task automatic do_op(input op_e code, input int id, input int data);
    ent_t h, e;
    op_code = code; op_id = ID_W'(id); op_data = DATA_W'(data); op_valid = 1'b1;
    while (!op_ready) begin @(posedge clk); #1; end
    h = model.head();
    check(head_valid == (h.id != 0) && int'(head_id) == h.id && (h.id == 0 || int'(head_data) == h.data),
          $sformatf("peek %0d/%0d (valid %0b), expected %0d/%0d", head_id, head_data, head_valid, h.id, h.data));
    @(posedge clk);
    if (last_accept >= 0) begin
      check(cycle - last_accept == DEFAULT_ISSUE_INTERVAL,
            $sformatf("commands accepted %0d cycles apart", cycle - last_accept));
      n_cadence++;
    end
    last_accept = cycle;
    #1 op_valid = 1'b0;
    case (code)
      OP_PUSH: model.push(id, data);
      OP_DELETE: model.del(id);
      default: begin
        e = model.pop();
        check(deq_valid == 1'b1, "dequeue result one cycle after the command");
        check(int'(deq_id) == e.id && (e.id == 0 || int'(deq_data) == e.data),
              $sformatf("dequeued %0d/%0d, expected %0d/%0d", deq_id, deq_data, e.id, e.data));
      end
    endcase
    // the head is final three cycles after the command entered block 0
    repeat (2) @(posedge clk);
    #1;
    h = model.head();
    check(int'(head_id) == h.id && (h.id == 0 || int'(head_data) == h.data),
          $sformatf("head three cycles after the command %0d/%0d, expected %0d/%0d",
                    head_id, head_data, h.id, h.data));
  endtask

  function automatic int some_id();
    if (model.q.size() > 0 && $urandom_range(0, 1) == 0)
      return model.q[$urandom_range(0, model.q.size() - 1)].id;
    return $urandom_range(1, MAXID);
  endfunction

  initial begin
    model = new(int'(N * M), int'(M));
    op_valid = 1'b0; op_code = OP_PUSH; op_id = '0; op_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // fill with distinct IDs, random DATA
    for (int i = 1; i <= MAXID && i <= int'(N * M) + 4; i++)
      do_op(OP_PUSH, i, $urandom_range(0, DRANGE));

    // mixed commands
    for (int n = 0; n < NOPS; n++) begin
      automatic int r = $urandom_range(0, 99);
      automatic int sz = model.q.size();
      if (r < 40)       do_op(OP_PUSH, some_id(), $urandom_range(0, DRANGE));
      else if (r < 55)  do_op(OP_PUSH, $urandom_range(1, MAXID), (sz > 0) ? model.q[$urandom_range(0, sz - 1)].data : 5);
      else if (r < 75)  do_op(OP_DELETE, some_id(), 0);
      else if (r < 90 || sz > int'(N * M) / 2) do_op(OP_POP, 0, 0);
      else begin
        // refill in a burst
        repeat (int'(N * M) / 2) do_op(OP_PUSH, $urandom_range(1, MAXID), $urandom_range(0, DRANGE));
      end
    end

    // let the last commands ripple through, then drain
    repeat (4 * N + 10) @(posedge clk);
    #1;
    last_accept = -1;
    while (model.q.size() > 0) do_op(OP_POP, 0, 0);
    do_op(OP_POP, 0, 0);                        // dequeue of an empty queue
    repeat (4 * N + 10) @(posedge clk);

    check(dut_drops.size() == model.drops.size(),
          $sformatf("%0d elements dropped, expected %0d", dut_drops.size(), model.drops.size()));
    foreach (dut_drops[i])
      if (i < model.drops.size())
        check(dut_drops[i].id == model.drops[i].id && dut_drops[i].data == model.drops[i].data,
              $sformatf("drop %0d: %0d/%0d, expected %0d/%0d", i, dut_drops[i].id, dut_drops[i].data,
                        model.drops[i].id, model.drops[i].data));
    check(!head_valid, "queue not empty after drain");

    $display("mechanisms: enqueue %0d, update-to-head %0d, update-to-tail %0d, cross-block push+pop %0d,",
             model.n_enqueue, model.n_upd_head, model.n_upd_tail, model.n_cross_tail);
    $display("  cross-block delete+push-first %0d, push-first carry %0d, next-head compare %0d, ties %0d,",
             model.n_cross_head, model.n_pf_carry, model.n_next_cmp, model.n_tie);
    $display("  overflow %0d, delete hit %0d, delete miss %0d, dequeue %0d, dequeue empty %0d, cadence %0d",
             model.n_overflow, model.n_del_hit, model.n_del_miss, model.n_pop, model.n_pop_empty, n_cadence);
    check(model.n_enqueue > 0, "no enqueue");
    check(model.n_upd_head > 0, "no update towards the head");
    check(model.n_upd_tail > 0, "no update towards the tail");
    check(model.n_cross_tail > 0, "no cross-block push+pop");
    check(model.n_cross_head > 0, "no cross-block delete+push-first");
    check(model.n_pf_carry > 0, "no push-first carry");
    check(model.n_next_cmp > 0, "no placement by next-head compare");
    check(model.n_tie > 0, "no equal-DATA tie");
    check(!EXPECT_OVERFLOW || model.n_overflow > 0, "no overflow");
    check(model.n_del_hit > 0, "no delete hit");
    check(model.n_del_miss > 0, "no delete miss");
    check(model.n_pop_empty > 0, "no dequeue of an empty queue");
    check(n_cadence > 0, "no back-to-back commands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
