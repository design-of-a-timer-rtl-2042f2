// tq_e2e_check - one end-to-end check of the timer queue at a given size,
// for testbenches that run several sizes side by side.
//
// Instantiates timer_queue with the given parameters and drives it on its
// own: fills it with distinct IDs, then issues NOPS random enqueue, update,
// delete and dequeue commands (about half of the pushes reuse an existing
// DATA to create ties) at the full command rate, against the sorted-list
// reference model. Checks peek before every command, every dequeued element,
// the five-cycle cadence, every element dropped by overflow, and a final drain
// in order. Reports its counts on checks_o / failures_o and raises done_o.
module tq_e2e_check
  import tq_pkg::*;
  import tq_ref_pkg::*;
#(
  parameter int unsigned N      = 4,
  parameter int unsigned M      = 4,
  parameter int unsigned ID_W   = 6,
  parameter int unsigned DATA_W = 16,
  parameter int          NOPS   = 1000,
  parameter string       NAME   = "queue"
) (
  input  logic clk,
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);
  localparam int MAXID = (1 << ID_W) - 1;

  logic              rst_n = 1'b0;
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

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  assign checks_o = checks;
  assign failures_o = failures;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 50) $display("FAIL %s @%0d: %s", NAME, cycle, what);
    end
  endtask

  tq_ref model;
  ent_t  dut_drops[$];
  int    last_accept = -1;

  always @(posedge clk)
    if (rst_n && drop_valid) dut_drops.push_back('{int'(drop_id), longint'(drop_data)});

  function automatic longint unsigned rand_data();
    longint unsigned v = {$urandom, $urandom};
    return (DATA_W >= 64) ? v : (v & ((64'd1 << DATA_W) - 1));
  endfunction

  task automatic do_op(input op_e code, input int id, input longint unsigned data);
    ent_t h, e;
    op_code = code; op_id = ID_W'(id); op_data = DATA_W'(data); op_valid = 1'b1;
    while (!op_ready) begin @(posedge clk); #1; end
    h = model.head();
    check(head_valid == (h.id != 0) && int'(head_id) == h.id && (h.id == 0 || longint'(head_data) == h.data),
          $sformatf("peek %0d/%0d, expected %0d/%0d", head_id, head_data, h.id, h.data));
    @(posedge clk);
    if (last_accept >= 0)
      check(cycle - last_accept == DEFAULT_ISSUE_INTERVAL,
            $sformatf("commands accepted %0d cycles apart", cycle - last_accept));
    last_accept = cycle;
    #1 op_valid = 1'b0;
    case (code)
      OP_PUSH:   model.push(id, data);
      OP_DELETE: model.del(id);
      default: begin
        e = model.pop();
        check(deq_valid && int'(deq_id) == e.id && (e.id == 0 || longint'(deq_data) == e.data),
              $sformatf("dequeued %0d/%0d, expected %0d/%0d", deq_id, deq_data, e.id, e.data));
      end
    endcase
  endtask

  function automatic int some_id();
    if (model.q.size() > 0 && $urandom_range(0, 1) == 0)
      return model.q[$urandom_range(0, model.q.size() - 1)].id;
    return $urandom_range(1, MAXID);
  endfunction

  initial begin
    done_o = 1'b0;
    model = new(int'(N * M), int'(M));
    op_valid = 1'b0; op_code = OP_PUSH; op_id = '0; op_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    for (int i = 1; i <= MAXID && i <= int'(N * M) + 4; i++) do_op(OP_PUSH, i, rand_data());
    for (int n = 0; n < NOPS; n++) begin
      automatic int r = $urandom_range(0, 99);
      automatic int sz = model.q.size();
      if (r < 35)      do_op(OP_PUSH, some_id(), rand_data());
      else if (r < 50) do_op(OP_PUSH, some_id(), (sz > 0) ? model.q[$urandom_range(0, sz - 1)].data : 64'd5);
      else if (r < 70) do_op(OP_DELETE, some_id(), 0);
      else             do_op(OP_POP, 0, 0);
    end
    repeat (4 * N + 10) @(posedge clk);
    #1 last_accept = -1;
    while (model.q.size() > 0) do_op(OP_POP, 0, 0);
    repeat (4 * N + 10) @(posedge clk);
    check(dut_drops.size() == model.drops.size(),
          $sformatf("%0d elements dropped, expected %0d", dut_drops.size(), model.drops.size()));
    foreach (dut_drops[i])
      if (i < model.drops.size())
        check(dut_drops[i].id == model.drops[i].id && dut_drops[i].data == model.drops[i].data,
              $sformatf("drop %0d differs", i));
    check(!head_valid, "queue not empty after drain");
    check(model.n_upd_head > 0 && model.n_upd_tail > 0 && model.n_cross_tail > 0 &&
          model.n_cross_head > 0 && model.n_pf_carry > 0 && model.n_tie > 0 && model.n_del_hit > 0,
          "a mechanism never occurred");
    $display("%s: N=%0d M=%0d ID_W=%0d DATA_W=%0d, %0d commands: enqueue %0d, update %0d/%0d, cross-block %0d/%0d, push-first carry %0d, next-head compare %0d, ties %0d, overflow %0d, delete %0d, dequeue %0d",
             NAME, N, M, ID_W, DATA_W, NOPS + ((MAXID < int'(N * M) + 4) ? MAXID : int'(N * M) + 4),
             model.n_enqueue, model.n_upd_head, model.n_upd_tail, model.n_cross_head, model.n_cross_tail,
             model.n_pf_carry, model.n_next_cmp, model.n_tie, model.n_overflow, model.n_del_hit, model.n_pop);
    done_o = 1'b1;
  end
endmodule
