// tb_tq_control - self-checking testbench of the systolic-block controller.
//
// Checks the two worked examples of the set/shift encoding with M = 8
// (a push that moves an element towards the tail and one that moves it
// towards the head), then random flag patterns against a reference that
// finds positions with loops instead of the controller's subtract/XNOR
// encoding: removal slot k, insertion slot p, and from them which slots are
// set, shifted and which operations are forwarded. Also checks that the
// outputs stay zero outside the SHIFT phase and that the flags are taken
// only in the COMPARE phase.
module tb_tq_control;
  localparam int unsigned M = 8;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         cmp_en, shift_en;
  logic         op_push, op_del, op_pop, op_pf;
  logic [M-1:0] id_f, drop_f, data_f;
  logic         next_f;
  logic [M-1:0] set_en, left_en, right_en;
  logic         o_push, o_del, o_pop, o_pf;

  int checks = 0, failures = 0;

  tq_control #(.M(M)) dut (
    .clk(clk), .rst_n(rst_n), .cmp_en_i(cmp_en), .shift_en_i(shift_en),
    .op_push_i(op_push), .op_del_i(op_del), .op_pop_i(op_pop), .op_pf_i(op_pf),
    .push_id_flag_i(id_f), .drop_id_flag_i(drop_f), .push_data_flag_i(data_f),
    .next_flag_i(next_f),
    .set_en_o(set_en), .left_en_o(left_en), .right_en_o(right_en),
    .out_push_o(o_push), .out_del_o(o_del), .out_pop_o(o_pop), .out_pf_o(o_pf)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // register the flags (COMPARE), then look at the SHIFT-phase outputs
  task automatic apply(input logic p, d, po, pf, input logic [M-1:0] idf, dropf, dataf,
                       input logic nf);
    op_push = p; op_del = d; op_pop = po; op_pf = pf;
    id_f = idf; drop_f = dropf; data_f = dataf; next_f = nf;
    cmp_en = 1'b1; shift_en = 1'b0;
    @(posedge clk); #1;
    cmp_en = 1'b0;
    // outputs must be quiet outside SHIFT
    check(set_en == '0 && left_en == '0 && right_en == '0 && !o_push && !o_del && !o_pop && !o_pf,
          "outputs active outside SHIFT");
    // scramble the raw flags: the registered ones must be used
    id_f = ~idf; drop_f = ~dropf; data_f = ~dataf; next_f = ~nf;
    shift_en = 1'b1;
    #1;
  endtask

  // reference: positions found with loops
  task automatic reference(input logic p, d, po, pf, input logic [M-1:0] idf, dropf, dataf,
                           input logic nf,
                           output logic [M-1:0] s, l, r, output logic ep, ed, epo, epf);
    int k, ins_pos, q;
    logic [M:0] ext;
    s = '0; l = '0; r = '0; ep = 0; ed = 0; epo = 0; epf = 0;
    k = -1;
    if (p && po) k = 0;
    else if (p) begin for (int i = 0; i < M; i++) if (idf[i]) k = i; end
    else if (d) begin for (int i = 0; i < M; i++) if (dropf[i]) k = i; end
    else if (po) k = 0;
    // insertion slot among the M slots plus "beyond" (M) for a push
    ins_pos = -1;
    if (p) begin
      ext = {nf, dataf};
      for (int i = M; i >= 0; i--) if (ext[i]) ins_pos = i;
    end else if (d && pf) ins_pos = 0;
    if (k < 0) begin
      if (ins_pos >= 0 && ins_pos < M) begin
        s[ins_pos] = 1'b1;
        for (int i = ins_pos + 1; i < M; i++) l[i] = 1'b1;
        ed = 1; epf = 1;
      end else begin
        ep = p; ed = d;
      end
    end else if (ins_pos >= 0 && ins_pos <= k) begin
      // element moves towards the head: slots ins_pos+1..k take from the right
      s[ins_pos] = 1'b1;
      for (int i = ins_pos + 1; i <= k; i++) l[i] = 1'b1;
    end else begin
      // element moves towards the tail (or only leaves): final slot q = ins_pos-1
      q = (ins_pos < 0) ? M : ins_pos - 1;
      if (q < M) s[q] = 1'b1;
      for (int i = k; i < q && i < M; i++) r[i] = 1'b1;
      if (q >= M) begin epo = 1; ep = p; end
    end
  endtask

  task automatic run_case(input logic p, d, po, pf, input logic [M-1:0] idf, dropf, dataf,
                          input logic nf, input string name);
    logic [M-1:0] s, l, r;
    logic ep, ed, epo, epf;
    reference(p, d, po, pf, idf, dropf, dataf, nf, s, l, r, ep, ed, epo, epf);
    apply(p, d, po, pf, idf, dropf, dataf, nf);
    check(set_en == s,   $sformatf("%s set_en %b exp %b", name, set_en, s));
    check(left_en == l,  $sformatf("%s left_en %b exp %b", name, left_en, l));
    check(right_en == r, $sformatf("%s right_en %b exp %b", name, right_en, r));
    check({o_push, o_del, o_pop, o_pf} == {ep, ed, epo, epf},
          $sformatf("%s forward %b exp %b", name, {o_push, o_del, o_pop, o_pf}, {ep, ed, epo, epf}));
    @(posedge clk); #1;
    shift_en = 1'b0;
  endtask

  function automatic logic [M-1:0] thermo(int from);
    logic [M-1:0] v = '0;
    for (int i = 0; i < M; i++) if (i >= from) v[i] = 1'b1;
    return v;
  endfunction

  initial begin
    cmp_en = 0; shift_en = 0; op_push = 0; op_del = 0; op_pop = 0; op_pf = 0;
    id_f = 0; drop_f = 0; data_f = 0; next_f = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;

    // worked example 1: queue 27 22 20 15 14 10 08 07 (slot 7..0), push ID 7
    // (at slot 2) with DATA 21 -> set 0010_0000, right shift 0001_1100
    apply(1, 0, 0, 0, 8'b0000_0100, 8'b0, 8'b1100_0000, 1'b1);
    check(set_en == 8'b0010_0000, $sformatf("example 1 set_en %b", set_en));
    check(right_en == 8'b0001_1100, $sformatf("example 1 right_en %b", right_en));
    check(left_en == 8'b0, "example 1 left_en");
    check({o_push, o_del, o_pop, o_pf} == 4'b0, "example 1 forwards nothing");
    @(posedge clk); #1; shift_en = 0;

    // worked example 2: same queue, push ID 9 (at slot 6) with DATA 9
    // -> set 0000_0100, left shift 0111_1000
    apply(1, 0, 0, 0, 8'b0100_0000, 8'b0, 8'b1111_1100, 1'b1);
    check(set_en == 8'b0000_0100, $sformatf("example 2 set_en %b", set_en));
    check(left_en == 8'b0111_1000, $sformatf("example 2 left_en %b", left_en));
    check(right_en == 8'b0, "example 2 right_en");
    check({o_push, o_del, o_pop, o_pf} == 4'b0, "example 2 forwards nothing");
    @(posedge clk); #1; shift_en = 0;

    // random operations with consistent flags
    for (int n = 0; n < 4000; n++) begin
      automatic int kind = $urandom_range(0, 4);
      automatic int kpos = $urandom_range(0, M);      // M = not present
      automatic int dpos = $urandom_range(0, M);      // first slot with larger DATA (M: none)
      automatic logic nf = (dpos < M) ? 1'b1 : 1'($urandom_range(0, 1));
      automatic logic [M-1:0] onehot = (kpos < M) ? (M'(1) << kpos) : '0;
      case (kind)
        0: run_case(1, 0, 0, 0, onehot, '0, thermo(dpos), nf, "push");
        // push + pop: the pushed DATA is not smaller than this block's head
        1: run_case(1, 0, 1, 0, '0, '0, thermo((dpos == 0) ? 1 : dpos), nf, "push+pop");
        2: run_case(0, 1, 0, 0, '0, onehot, '0, nf, "delete");
        3: run_case(0, 1, 0, 1, '0, onehot, '0, nf, "delete+push-first");
        default: run_case(0, 0, 1, 0, '0, '0, '0, nf, "pop");
      endcase
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
