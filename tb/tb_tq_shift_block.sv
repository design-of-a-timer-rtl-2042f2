// tb_tq_shift_block - self-checking testbench of one queue slot.
//
// Random operands against an empty and a filled slot: the three comparator
// flags are checked against their definitions (ID equality only for a filled
// slot; "pushed DATA less than held DATA", always true for an empty slot).
// Random set/left/right enables (at most one at a time) are checked for the
// value the hold register takes, and the reset value is checked to be empty.
module tb_tq_shift_block;
  localparam int unsigned ID_W = 6, DATA_W = 10;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic [ID_W-1:0]   push_id, drop_id, set_id, left_id, right_id, lo_id, ro_id;
  logic [DATA_W-1:0] push_data, set_data, left_data, right_data, lo_data, ro_data;
  logic              f_pid, f_did, f_data, set_en, left_en, right_en;

  int checks = 0, failures = 0;

  tq_shift_block #(.ID_W(ID_W), .DATA_W(DATA_W)) dut (
    .clk(clk), .rst_n(rst_n),
    .push_id_i(push_id), .drop_id_i(drop_id), .push_data_i(push_data),
    .push_id_flag_o(f_pid), .drop_id_flag_o(f_did), .push_data_flag_o(f_data),
    .set_en_i(set_en), .left_en_i(left_en), .right_en_i(right_en),
    .set_id_i(set_id), .set_data_i(set_data), .left_id_i(left_id), .left_data_i(left_data),
    .right_id_i(right_id), .right_data_i(right_data),
    .left_id_o(lo_id), .left_data_o(lo_data), .right_id_o(ro_id), .right_data_o(ro_data)
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

  logic [ID_W-1:0]   exp_id;
  logic [DATA_W-1:0] exp_data;

  initial begin
    set_en = 0; left_en = 0; right_en = 0;
    push_id = 0; drop_id = 0; push_data = 0;
    set_id = 0; set_data = 0; left_id = 0; left_data = 0; right_id = 0; right_data = 0;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1;
    check(lo_id == '0 && ro_id == '0, "slot not empty after reset");
    exp_id = '0; exp_data = '0;
    rst_n = 1'b1;

    for (int n = 0; n < 5000; n++) begin
      automatic int sel = $urandom_range(0, 3);
      // operands: often equal to the held element to hit the comparators
      push_id   = ($urandom_range(0, 2) == 0) ? exp_id : ID_W'($urandom);
      drop_id   = ($urandom_range(0, 2) == 0) ? exp_id : ID_W'($urandom);
      push_data = ($urandom_range(0, 3) == 0) ? exp_data : DATA_W'($urandom);
      #1;
      check(f_pid == ((exp_id != 0) && (push_id == exp_id)), "push_id_flag");
      check(f_did == ((exp_id != 0) && (drop_id == exp_id)), "drop_id_flag");
      check(f_data == ((exp_id == 0) || (push_data < exp_data)),
            $sformatf("push_data_flag push=%0d hold=%0d id=%0d", push_data, exp_data, exp_id));
      check(lo_id == exp_id && ro_id == exp_id && lo_data == exp_data && ro_data == exp_data,
            "held element on outputs");
      set_id = ID_W'($urandom); set_data = DATA_W'($urandom);
      left_id = ID_W'($urandom); left_data = DATA_W'($urandom);
      right_id = ID_W'($urandom); right_data = DATA_W'($urandom);
      if ($urandom_range(0, 15) == 0) begin
        set_id = '0;       // occasionally empty the slot
        left_id = '0;
      end
      set_en = (sel == 1); left_en = (sel == 2); right_en = (sel == 3);
      @(posedge clk); #1;
      case (sel)
        1: begin exp_id = set_id;   exp_data = set_data;   end
        2: begin exp_id = left_id;  exp_data = left_data;  end
        3: begin exp_id = right_id; exp_data = right_data; end
        default: ;
      endcase
      check(lo_id == exp_id && lo_data == exp_data,
            $sformatf("hold after sel %0d: %0d/%0d exp %0d/%0d", sel, lo_id, lo_data, exp_id, exp_data));
      set_en = 0; left_en = 0; right_en = 0;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
