// tb_tq_systolic_block - self-checking testbench of one systolic block.
//
// The testbench plays both the block's upstream (it issues operations, one
// every five cycles) and everything downstream: a list D of the elements
// behind the block, whose first element drives last_*_i and to which the
// forwarded operations are applied. The block's slots followed by D must then
// always equal a plain sorted-list model of the whole queue (ties kept in
// arrival order). Also checked:
//   - the two worked examples (M = 8): push ID 7 / DATA 21 and push ID 9 /
//     DATA 9 into the block 27 22 20 15 14 10 08 07, slot by slot;
//   - the concurrent push + pop case with M = 5 (second instance): the pushed
//     element must take slot M-1 because it is smaller than the next block's
//     first element (DATA 16 against 17);
//   - forwarded operations appear exactly three cycles after the operation
//     entered (enable, compare, set-and-shift, then finish).
// Each forwarding pattern (push; delete + push-first; push + pop; pop;
// delete) is counted and must occur.
module tb_tq_systolic_block;
  localparam int unsigned M = 8, ID_W = 6, DATA_W = 8;

  typedef struct {
    int id;
    int data;
  } ent_t;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ DUT, M = 8
  logic              in_valid, in_push, in_del, in_pop, in_pf;
  logic [ID_W-1:0]   in_id, in_del_id, last_id, first_id, out_id, out_del_id;
  logic [DATA_W-1:0] in_data, last_data, first_data, out_data;
  logic              out_valid, out_push, out_del, out_pop, out_pf, busy;

  tq_systolic_block #(.M(M), .ID_W(ID_W), .DATA_W(DATA_W)) dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid_i(in_valid), .in_push_i(in_push), .in_del_i(in_del), .in_pop_i(in_pop),
    .in_pf_i(in_pf), .in_id_i(in_id), .in_data_i(in_data), .in_del_id_i(in_del_id),
    .out_valid_o(out_valid), .out_push_o(out_push), .out_del_o(out_del), .out_pop_o(out_pop),
    .out_pf_o(out_pf), .out_id_o(out_id), .out_data_o(out_data), .out_del_id_o(out_del_id),
    .last_id_i(last_id), .last_data_i(last_data),
    .first_id_o(first_id), .first_data_o(first_data), .busy_o(busy)
  );

  // ------------------------------------------------------------ DUT, M = 5
  logic              b_in_valid, b_in_push, b_in_pop;
  logic [ID_W-1:0]   b_in_id, b_last_id, b_first_id, b_out_id, b_out_del_id;
  logic [DATA_W-1:0] b_in_data, b_last_data, b_first_data, b_out_data;
  logic              b_out_valid, b_out_push, b_out_del, b_out_pop, b_out_pf, b_busy;

  tq_systolic_block #(.M(5), .ID_W(ID_W), .DATA_W(DATA_W)) dut5 (
    .clk(clk), .rst_n(rst_n),
    .in_valid_i(b_in_valid), .in_push_i(b_in_push), .in_del_i(1'b0), .in_pop_i(b_in_pop),
    .in_pf_i(1'b0), .in_id_i(b_in_id), .in_data_i(b_in_data), .in_del_id_i('0),
    .out_valid_o(b_out_valid), .out_push_o(b_out_push), .out_del_o(b_out_del),
    .out_pop_o(b_out_pop), .out_pf_o(b_out_pf), .out_id_o(b_out_id), .out_data_o(b_out_data),
    .out_del_id_o(b_out_del_id),
    .last_id_i(b_last_id), .last_data_i(b_last_data),
    .first_id_o(b_first_id), .first_data_o(b_first_data), .busy_o(b_busy)
  );

  // ------------------------------------------------------------ models
  ent_t g[$];   // whole queue, head first
  ent_t d[$];   // elements behind the block (the downstream blocks)

  int n_fwd_push, n_fwd_delpf, n_fwd_pushpop, n_fwd_pop, n_fwd_del, n_fwd_none;

  function automatic int find(ref ent_t q[$], input int id);
    foreach (q[i]) if (q[i].id == id) return i;
    return -1;
  endfunction

  function automatic void sorted_insert(ref ent_t q[$], input ent_t e);
    int pos = q.size();
    foreach (q[i]) if (q[i].data > e.data) begin pos = i; break; end
    q.insert(pos, e);
  endfunction

  always_comb begin
    last_id   = (d.size() > 0) ? ID_W'(d[0].id) : '0;
    last_data = (d.size() > 0) ? DATA_W'(d[0].data) : '0;
  end

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // apply the operations the block forwards to the downstream list
  int fwd_cycle;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      fwd_cycle = cycle;
      if (out_push && out_pop)      n_fwd_pushpop++;
      else if (out_del && out_pf)   n_fwd_delpf++;
      else if (out_push)            n_fwd_push++;
      else if (out_pop)             n_fwd_pop++;
      else if (out_del)             n_fwd_del++;
      if (out_pop && d.size() > 0) d.pop_front();
      if (out_del) begin
        automatic int i = find(d, int'(out_del_id));
        if (i >= 0) d.delete(i);
      end
      if (out_pf && out_id != 0) d.push_front('{int'(out_id), int'(out_data)});
      if (out_push) begin
        automatic int i = find(d, int'(out_id));
        if (i >= 0) d.delete(i);
        sorted_insert(d, '{int'(out_id), int'(out_data)});
      end
    end
  end

  // issue one operation, wait five cycles, compare block + d with g
  task automatic issue(input int kind, input int id, input int data);
    int start, n_prev;
    n_prev = n_fwd_push + n_fwd_delpf + n_fwd_pushpop + n_fwd_pop + n_fwd_del;
    in_push = (kind == 0); in_pop = (kind == 1); in_del = (kind == 2); in_pf = 1'b0;
    in_id = ID_W'(id); in_data = DATA_W'(data); in_del_id = ID_W'(id);
    in_valid = 1'b1;
    fwd_cycle = -1;
    @(posedge clk); start = cycle;
    #1 in_valid = 1'b0;
    // global model
    case (kind)
      0: begin
        automatic int i = find(g, id);
        if (i >= 0) g.delete(i);
        sorted_insert(g, '{id, data});
      end
      1: if (g.size() > 0) void'(g.pop_front());
      default: begin
        automatic int i = find(g, id);
        if (i >= 0) g.delete(i);
      end
    endcase
    repeat (4) @(posedge clk);
    #1;
    if (n_fwd_push + n_fwd_delpf + n_fwd_pushpop + n_fwd_pop + n_fwd_del != n_prev)
      check(fwd_cycle - start == 3, $sformatf("forward latency %0d cycles", fwd_cycle - start));
    else n_fwd_none++;
    compare_all($sformatf("op kind %0d id %0d data %0d", kind, id, data));
  endtask

  task automatic compare_all(input string what);
    for (int i = 0; i < int'(M); i++) begin
      automatic int eid = (i < g.size()) ? g[i].id : 0;
      automatic int edata = (i < g.size()) ? g[i].data : -1;
      check(int'(dut.slot_id[i]) == eid && (eid == 0 || int'(dut.slot_data[i]) == edata),
            $sformatf("%s: slot %0d holds %0d/%0d, expected %0d/%0d", what, i,
                      dut.slot_id[i], dut.slot_data[i], eid, edata));
    end
    check(d.size() == ((g.size() > M) ? g.size() - M : 0),
          $sformatf("%s: %0d elements downstream, expected %0d", what, d.size(),
                    (g.size() > M) ? g.size() - M : 0));
    foreach (d[i])
      if (i + M < g.size())
        check(d[i].id == g[i+M].id && d[i].data == g[i+M].data,
              $sformatf("%s: downstream %0d is %0d/%0d, expected %0d/%0d", what, i,
                        d[i].id, d[i].data, g[i+M].id, g[i+M].data));
    check(int'(first_id) == ((g.size() > 0) ? g[0].id : 0), "first element output");
  endtask

  task automatic check_block(input int ids[8], input int datas[8], input string what);
    // ids/datas listed from slot 7 down to slot 0, as in the worked examples
    for (int i = 0; i < 8; i++)
      check(int'(dut.slot_id[7-i]) == ids[i] && int'(dut.slot_data[7-i]) == datas[i],
            $sformatf("%s: slot %0d holds %0d/%0d, expected %0d/%0d", what, 7-i,
                      dut.slot_id[7-i], dut.slot_data[7-i], ids[i], datas[i]));
  endtask

  int ex_ids[8]   = '{11, 9, 5, 6, 2, 7, 3, 4};
  int ex_datas[8] = '{27, 22, 20, 15, 14, 10, 8, 7};

  initial begin
    in_valid = 0; in_push = 0; in_del = 0; in_pop = 0; in_pf = 0;
    in_id = 0; in_data = 0; in_del_id = 0;
    b_in_valid = 0; b_in_push = 0; b_in_pop = 0; b_in_id = 0; b_in_data = 0;
    b_last_id = 0; b_last_data = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // ---- worked examples
    for (int i = 7; i >= 0; i--) issue(0, ex_ids[i], ex_datas[i]);
    check_block(ex_ids, ex_datas, "initial block");
    issue(0, 7, 21);
    check_block('{11, 9, 7, 5, 6, 2, 3, 4}, '{27, 22, 21, 20, 15, 14, 8, 7}, "push 7/21");
    issue(0, 7, 10);
    check_block(ex_ids, ex_datas, "push 7/10 back");
    issue(0, 9, 9);
    check_block('{11, 5, 6, 2, 7, 9, 3, 4}, '{27, 20, 15, 14, 10, 9, 8, 7}, "push 9/9");

    // ---- random operations
    for (int n = 0; n < 3000; n++) begin
      automatic int r = $urandom_range(0, 9);
      automatic int id = $urandom_range(1, 40);
      automatic int data = $urandom_range(0, 60);
      if (g.size() > 24 && r < 6) r = 9;             // keep the queue from growing forever
      if (r < 6)      issue(0, id, data);
      else if (r < 8) issue(2, (g.size() > 0 && r == 6) ? g[$urandom_range(0, g.size()-1)].id : id, 0);
      else            issue(1, 0, 0);
    end

    // ---- concurrent push + pop with M = 5: block 15 14 10 9 8, next head 9/17
    begin
      automatic int ids5[5] = '{8, 3, 2, 7, 4};         // slot 0..4
      automatic int datas5[5] = '{8, 9, 10, 14, 15};
      for (int i = 4; i >= 0; i--) begin
        b_in_push = 1; b_in_pop = 0; b_in_id = ID_W'(ids5[i]); b_in_data = DATA_W'(datas5[i]);
        b_in_valid = 1; @(posedge clk); #1 b_in_valid = 0;
        repeat (4) @(posedge clk); #1;
      end
      b_last_id = 9; b_last_data = 17;
      b_in_push = 1; b_in_pop = 1; b_in_id = 6; b_in_data = 16;
      b_in_valid = 1; @(posedge clk); #1 b_in_valid = 0;
      repeat (2) @(posedge clk); #1;
      check(b_out_valid == 1'b0, "push+pop with M+1 compare forwards nothing");
      @(posedge clk); #1;
      check(b_out_valid == 1'b0, "push+pop with M+1 compare forwards nothing (finish)");
      check(int'(dut5.slot_id[4]) == 6 && int'(dut5.slot_data[4]) == 16,
            $sformatf("slot 4 holds %0d/%0d, expected 6/16", dut5.slot_id[4], dut5.slot_data[4]));
      check(int'(dut5.slot_id[0]) == 3 && int'(dut5.slot_id[3]) == 4,
            "remaining elements shifted towards the head");
    end

    check(n_fwd_push > 0, "no push forwarded");
    check(n_fwd_delpf > 0, "no delete + push-first forwarded");
    check(n_fwd_pushpop > 0, "no push + pop forwarded");
    check(n_fwd_pop > 0, "no pop forwarded");
    check(n_fwd_del > 0, "no delete forwarded");
    check(n_fwd_none > 0, "no operation completed inside the block");
    $display("forwarded: push %0d, delete+push-first %0d, push+pop %0d, pop %0d, delete %0d, none %0d",
             n_fwd_push, n_fwd_delpf, n_fwd_pushpop, n_fwd_pop, n_fwd_del, n_fwd_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
