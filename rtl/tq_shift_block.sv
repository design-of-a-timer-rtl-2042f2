// tq_shift_block - one slot of the timer queue.
//
// The slot holds one element: an ID (all zeros means the slot is empty) and a
// DATA value, the expiry time by which the queue is sorted. Three comparators
// run against the operands broadcast to every slot of a systolic block:
//   push_id_flag_o   : the held ID equals the pushed ID  (update target)
//   drop_id_flag_o   : the held ID equals the ID to delete
//   push_data_flag_o : the pushed DATA is less than the held DATA, i.e. the
//                      new element must be placed to the right of (ahead of)
//                      this one. An empty slot also raises this flag, so empty
//                      slots behave as if they held the largest possible DATA.
// The flags are purely combinational; the systolic block's controller
// collects them. On a clock edge the hold register takes, by priority,
//   set_en_i   : the set element (the pushed or push-first element),
//   left_en_i  : the element of the right-hand neighbour (a left shift,
//                towards the tail of the queue),
//   right_en_i : the element of the left-hand neighbour (a right shift,
//                towards the head),
// and otherwise keeps its value. The controller never raises two enables at
// once. The held element is driven on both sides (left_*_o, right_*_o) as the
// neighbours' shift inputs.
//
// Follows the paper: the hold register, the three comparators and the
// set/left/right input mux. This design's own choices: the empty-slot
// qualification of the flags, one enable wire per mux input, asynchronous
// active-low reset to the empty state.
module tq_shift_block #(
  parameter int unsigned ID_W   = 8,
  parameter int unsigned DATA_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // broadcast operands
  input  logic [ID_W-1:0]   push_id_i,
  input  logic [ID_W-1:0]   drop_id_i,
  input  logic [DATA_W-1:0] push_data_i,
  // comparator flags
  output logic              push_id_flag_o,
  output logic              drop_id_flag_o,
  output logic              push_data_flag_o,
  // control
  input  logic              set_en_i,
  input  logic              left_en_i,
  input  logic              right_en_i,
  // mux inputs
  input  logic [ID_W-1:0]   set_id_i,
  input  logic [DATA_W-1:0] set_data_i,
  input  logic [ID_W-1:0]   left_id_i,
  input  logic [DATA_W-1:0] left_data_i,
  input  logic [ID_W-1:0]   right_id_i,
  input  logic [DATA_W-1:0] right_data_i,
  // held element
  output logic [ID_W-1:0]   left_id_o,
  output logic [DATA_W-1:0] left_data_o,
  output logic [ID_W-1:0]   right_id_o,
  output logic [DATA_W-1:0] right_data_o
);

  logic [ID_W-1:0]   hold_id;
  logic [DATA_W-1:0] hold_data;
  logic              hold_valid;

  assign hold_valid = (hold_id != '0);

  assign push_id_flag_o   = hold_valid && (hold_id == push_id_i);
  assign drop_id_flag_o   = hold_valid && (hold_id == drop_id_i);
  assign push_data_flag_o = !hold_valid || (push_data_i < hold_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_id   <= '0;
      hold_data <= '0;
    end else if (set_en_i) begin
      hold_id   <= set_id_i;
      hold_data <= set_data_i;
    end else if (left_en_i) begin
      hold_id   <= left_id_i;
      hold_data <= left_data_i;
    end else if (right_en_i) begin
      hold_id   <= right_id_i;
      hold_data <= right_data_i;
    end
  end

  assign left_id_o    = hold_id;
  assign left_data_o  = hold_data;
  assign right_id_o   = hold_id;
  assign right_data_o = hold_data;

  // The controller's encoding makes the three enables mutually exclusive.
  a_onehot_ctrl: assert property (@(posedge clk) disable iff (!rst_n)
                                  $onehot0({set_en_i, left_en_i, right_en_i}))
    else $error("tq_shift_block: more than one of set/left/right enabled");

endmodule
