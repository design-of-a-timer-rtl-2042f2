// tq_systolic_block - one stage of the systolic array: M shift blocks, a
// central controller and an interface register.
//
// Slot 0 is the right-hand end of the block, nearest the queue head; DATA
// grows from right to left. An operation arrives from the previous block (or
// the queue input) as a one-cycle pulse on in_valid_i while the block is
// idle; that cycle is the enable phase. The block then runs
//   COMPARE : the element and delete ID are broadcast to all M slots; the
//             controller registers the flags and the comparison of the pushed
//             DATA with the next block's first element (last_*_i), so that
//             M+1 elements are compared.
//   SHIFT   : the controller's set/left/right enables update the slots; slot
//             M-1 takes the next block's first element on a right shift. The
//             interface register captures the operations to pass on, with the
//             old slot M-1 element for a push-first.
//   FINISH  : the interface register presents them (out_valid_o high for one
//             cycle); this is the next block's enable phase.
// Every operation, including pop and push-first, which compare nothing, takes
// the same four cycles. The block's own first element is always on
// first_*_o, which the previous block compares with and the queue top uses
// for peek.
//
// Timing rule (checked by an assertion): a new operation may only arrive while
// the block is idle. The queue top spaces operations five cycles apart, which
// also guarantees that the next block has finished the previous operation
// before this block compares against its first element.
//
// Follows the paper: structure, four phases, M+1 comparison, forwarded
// operations. This design's own choices: the one-cycle valid handshake,
// separate delete-ID field, the empty-slot encoding (ID 0).
module tq_systolic_block
  import tq_pkg::*;
#(
  parameter int unsigned M      = 8,
  parameter int unsigned ID_W   = 8,
  parameter int unsigned DATA_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // operation in
  input  logic              in_valid_i,
  input  logic              in_push_i,
  input  logic              in_del_i,
  input  logic              in_pop_i,
  input  logic              in_pf_i,
  input  logic [ID_W-1:0]   in_id_i,
  input  logic [DATA_W-1:0] in_data_i,
  input  logic [ID_W-1:0]   in_del_id_i,
  // operation out to the next block
  output logic              out_valid_o,
  output logic              out_push_o,
  output logic              out_del_o,
  output logic              out_pop_o,
  output logic              out_pf_o,
  output logic [ID_W-1:0]   out_id_o,
  output logic [DATA_W-1:0] out_data_o,
  output logic [ID_W-1:0]   out_del_id_o,
  // first element of the next block (ID 0 if none)
  input  logic [ID_W-1:0]   last_id_i,
  input  logic [DATA_W-1:0] last_data_i,
  // first element of this block
  output logic [ID_W-1:0]   first_id_o,
  output logic [DATA_W-1:0] first_data_o,
  output logic              busy_o
);

  phase_e phase;

  // operation registers
  logic              op_push, op_del, op_pop, op_pf;
  logic [ID_W-1:0]   op_id, op_del_id;
  logic [DATA_W-1:0] op_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= PH_IDLE;
      op_push   <= 1'b0;
      op_del    <= 1'b0;
      op_pop    <= 1'b0;
      op_pf     <= 1'b0;
      op_id     <= '0;
      op_data   <= '0;
      op_del_id <= '0;
    end else begin
      unique case (phase)
        PH_IDLE: if (in_valid_i) begin
          phase     <= PH_COMPARE;
          op_push   <= in_push_i;
          op_del    <= in_del_i;
          op_pop    <= in_pop_i;
          op_pf     <= in_pf_i;
          op_id     <= in_id_i;
          op_data   <= in_data_i;
          op_del_id <= in_del_id_i;
        end
        PH_COMPARE: phase <= PH_SHIFT;
        PH_SHIFT:   phase <= PH_FINISH;
        PH_FINISH:  phase <= PH_IDLE;
        default:    phase <= PH_IDLE;
      endcase
    end
  end

  assign busy_o = (phase != PH_IDLE);

  // slots
  logic [M-1:0]      push_id_flag, drop_id_flag, push_data_flag;
  logic [M-1:0]      set_en, left_en, right_en;
  logic [ID_W-1:0]   slot_id   [M];
  logic [DATA_W-1:0] slot_data [M];
  logic [ID_W-1:0]   set_id;
  logic [DATA_W-1:0] set_data;

  // a push sets the pushed element, a push-first the element it carries:
  // both arrive in op_id / op_data
  assign set_id   = op_id;
  assign set_data = op_data;

  for (genvar i = 0; i < M; i++) begin : g_slot
    logic [ID_W-1:0]   l_id, r_id;
    logic [DATA_W-1:0] l_data, r_data;
    logic [ID_W-1:0]   unused_id;
    logic [DATA_W-1:0] unused_data;

    // left shift: take from the right-hand neighbour (slot i-1)
    if (i == 0) begin : g_first
      assign l_id   = '0;
      assign l_data = '0;
    end else begin : g_inner_l
      assign l_id   = slot_id[i-1];
      assign l_data = slot_data[i-1];
    end
    // right shift: take from the left-hand neighbour (slot i+1) or, for the
    // last slot, from the next block's first element
    if (i == M-1) begin : g_last
      assign r_id   = last_id_i;
      assign r_data = last_data_i;
    end else begin : g_inner_r
      assign r_id   = slot_id[i+1];
      assign r_data = slot_data[i+1];
    end

    tq_shift_block #(.ID_W(ID_W), .DATA_W(DATA_W)) u_shift (
      .clk              (clk),
      .rst_n            (rst_n),
      .push_id_i        (op_id),
      .drop_id_i        (op_del_id),
      .push_data_i      (op_data),
      .push_id_flag_o   (push_id_flag[i]),
      .drop_id_flag_o   (drop_id_flag[i]),
      .push_data_flag_o (push_data_flag[i]),
      .set_en_i         (set_en[i]),
      .left_en_i        (left_en[i]),
      .right_en_i       (right_en[i]),
      .set_id_i         (set_id),
      .set_data_i       (set_data),
      .left_id_i        (l_id),
      .left_data_i      (l_data),
      .right_id_i       (r_id),
      .right_data_i     (r_data),
      .left_id_o        (slot_id[i]),
      .left_data_o      (slot_data[i]),
      .right_id_o       (unused_id),
      .right_data_o     (unused_data)
    );
  end

  // comparison with the next block's first element (the (M+1)-th compare)
  logic next_flag;
  assign next_flag = (last_id_i == '0) || (op_data < last_data_i);

  logic c_push, c_del, c_pop, c_pf;

  tq_control #(.M(M)) u_ctrl (
    .clk              (clk),
    .rst_n            (rst_n),
    .cmp_en_i         (phase == PH_COMPARE),
    .shift_en_i       (phase == PH_SHIFT),
    .op_push_i        (op_push),
    .op_del_i         (op_del),
    .op_pop_i         (op_pop),
    .op_pf_i          (op_pf),
    .push_id_flag_i   (push_id_flag),
    .drop_id_flag_i   (drop_id_flag),
    .push_data_flag_i (push_data_flag),
    .next_flag_i      (next_flag),
    .set_en_o         (set_en),
    .left_en_o        (left_en),
    .right_en_o       (right_en),
    .out_push_o       (c_push),
    .out_del_o        (c_del),
    .out_pop_o        (c_pop),
    .out_pf_o         (c_pf)
  );

  tq_interface_reg #(.ID_W(ID_W), .DATA_W(DATA_W)) u_iface (
    .clk         (clk),
    .rst_n       (rst_n),
    .load_i      (phase == PH_SHIFT),
    .push_i      (c_push),
    .del_i       (c_del),
    .pop_i       (c_pop),
    .pf_i        (c_pf),
    .push_id_i   (op_id),
    .push_data_i (op_data),
    .last_id_i   (slot_id[M-1]),
    .last_data_i (slot_data[M-1]),
    .del_id_i    (op_push ? op_id : op_del_id),
    .valid_o     (out_valid_o),
    .push_o      (out_push_o),
    .del_o       (out_del_o),
    .pop_o       (out_pop_o),
    .pf_o        (out_pf_o),
    .id_o        (out_id_o),
    .data_o      (out_data_o),
    .del_id_o    (out_del_id_o)
  );

  assign first_id_o   = slot_id[0];
  assign first_data_o = slot_data[0];

  a_idle_when_fed: assert property (@(posedge clk) disable iff (!rst_n)
                                    in_valid_i |-> (phase == PH_IDLE))
    else $error("tq_systolic_block: operation arrived while busy");

endmodule
