// tb_tq_interface_reg - self-checking testbench of the inter-block register.
//
// Random decisions are loaded; one cycle later the register must show them
// with valid set exactly when some operation is passed, carry the last-slot
// element for a push-first and the pushed element otherwise, carry the delete
// ID, and drop valid and the operation bits again in the cycle after.
module tb_tq_interface_reg;
  localparam int unsigned ID_W = 7, DATA_W = 12;

  logic              clk = 1'b0, rst_n = 1'b0, load;
  logic              push, del, pop, pf;
  logic [ID_W-1:0]   push_id, last_id, del_id, id_o, del_id_o;
  logic [DATA_W-1:0] push_data, last_data, data_o;
  logic              valid_o, push_o, del_o, pop_o, pf_o;

  int checks = 0, failures = 0;

  tq_interface_reg #(.ID_W(ID_W), .DATA_W(DATA_W)) dut (
    .clk(clk), .rst_n(rst_n), .load_i(load),
    .push_i(push), .del_i(del), .pop_i(pop), .pf_i(pf),
    .push_id_i(push_id), .push_data_i(push_data), .last_id_i(last_id), .last_data_i(last_data),
    .del_id_i(del_id),
    .valid_o(valid_o), .push_o(push_o), .del_o(del_o), .pop_o(pop_o), .pf_o(pf_o),
    .id_o(id_o), .data_o(data_o), .del_id_o(del_id_o)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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

  initial begin
    load = 0; push = 0; del = 0; pop = 0; pf = 0;
    push_id = 0; push_data = 0; last_id = 0; last_data = 0; del_id = 0;
    repeat (2) @(posedge clk);
    #1;
    check(!valid_o, "valid after reset");
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      automatic int kind = $urandom_range(0, 4);
      push = (kind == 0) || (kind == 1);
      pop  = (kind == 1) || (kind == 3);
      del  = (kind == 2) || (kind == 4);
      pf   = (kind == 2);
      if ($urandom_range(0, 9) == 0) {push, del, pop, pf} = '0;
      push_id = ID_W'($urandom); push_data = DATA_W'($urandom);
      last_id = ID_W'($urandom); last_data = DATA_W'($urandom);
      del_id = ID_W'($urandom);
      load = 1'b1;
      @(posedge clk); #1;
      load = 1'b0;
      check(valid_o == (push | del | pop | pf), "valid");
      check({push_o, del_o, pop_o, pf_o} == {push, del, pop, pf}, "operation bits");
      check(id_o == (pf ? last_id : push_id) && data_o == (pf ? last_data : push_data),
            "element mux");
      check(del_id_o == del_id, "delete id");
      @(posedge clk); #1;
      check(!valid_o && !push_o && !del_o && !pop_o && !pf_o, "valid longer than one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
