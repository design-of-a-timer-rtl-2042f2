// tb_timer_queue_tables - the timer queue at the sizes of the reference
// design's implementation tables, each exercised end to end.
//
// Six queues run side by side, each with its own reference model
// (tq_e2e_check): depth 640, 1024 and 4096 with M = 8 and 16-bit DATA (ID
// widths 9, 9 and 11 as reported for those sizes), and depth 512, 320 and 128
// with N = 32, 9-bit IDs and M = 16, 10 and 4, two of them with 64-bit DATA.
// Each queue gets more than twice its depth in commands. The depth-256
// configuration is the default one and is run by tb_timer_queue_full.
module tb_timer_queue_tables;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int K = 6;
  logic done [K];
  int   chk  [K];
  int   fail [K];

  tq_e2e_check #(.N(80),  .M(8),  .ID_W(9),  .DATA_W(16), .NOPS(1300), .NAME("depth 640"))
    u_640  (.clk(clk), .done_o(done[0]), .checks_o(chk[0]), .failures_o(fail[0]));
  tq_e2e_check #(.N(128), .M(8),  .ID_W(9),  .DATA_W(16), .NOPS(2100), .NAME("depth 1024"))
    u_1024 (.clk(clk), .done_o(done[1]), .checks_o(chk[1]), .failures_o(fail[1]));
  tq_e2e_check #(.N(512), .M(8),  .ID_W(11), .DATA_W(16), .NOPS(8200), .NAME("depth 4096"))
    u_4096 (.clk(clk), .done_o(done[2]), .checks_o(chk[2]), .failures_o(fail[2]));
  tq_e2e_check #(.N(32),  .M(16), .ID_W(9),  .DATA_W(64), .NOPS(1100), .NAME("depth 512, DATA 64"))
    u_512  (.clk(clk), .done_o(done[3]), .checks_o(chk[3]), .failures_o(fail[3]));
  tq_e2e_check #(.N(32),  .M(10), .ID_W(9),  .DATA_W(16), .NOPS(700),  .NAME("depth 320"))
    u_320  (.clk(clk), .done_o(done[4]), .checks_o(chk[4]), .failures_o(fail[4]));
  tq_e2e_check #(.N(32),  .M(4),  .ID_W(9),  .DATA_W(64), .NOPS(600),  .NAME("depth 128, DATA 64"))
    u_128  (.clk(clk), .done_o(done[5]), .checks_o(chk[5]), .failures_o(fail[5]));

  function automatic int total(input int v[K]);
    int s = 0;
    foreach (v[i]) s += v[i];
    return s;
  endfunction

  function automatic logic all_done();
    foreach (done[i]) if (!done[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail) + 1);
    $finish;
  end

  initial begin
    @(posedge clk);
    while (!all_done()) @(posedge clk);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail));
    $finish;
  end
endmodule
