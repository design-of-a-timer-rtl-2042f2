// tq_control - centralised controller of one systolic block.
//
// Every shift block of a systolic block reports three flags. In the COMPARE
// phase (cmp_en_i) this controller registers them as M-bit vectors together
// with the comparison of the pushed DATA against the first element of the
// next systolic block (next_flag_i):
//   id_flag   : one-hot (or zero) position of the pushed ID
//   drop_flag : one-hot (or zero) position of the ID to delete
//   data_flag : thermometer code, ones at and above the first slot whose DATA
//               is larger than the pushed DATA (or that is empty)
// In the SHIFT phase (shift_en_i) it turns them, with a few subtractions,
// XNORs and one-bit shifts instead of priority encoders, into the per-slot
// set_en / left_en / right_en vectors and decides which operations pass to
// the next block (out_push_o, out_del_o, out_pop_o, out_pf_o). All outputs are
// zero outside the SHIFT phase.
//
// Let rmv be the slot that empties (the ID found for a push or a delete; slot 0
// for a pop, whose head element leaves towards the previous block) and ins
// the insertion thermometer (data_flag for a push, all ones for a push-first,
// which always lands in slot 0).
//   left case  (insertion at or right of rmv, or nothing removed):
//     set_en  = ~(ins - 1)                          paper eq. (4)
//     left_en = {ins XNOR (rmv - 1), 1'b0}          paper eq. (5)
//     With nothing removed the last element is evicted: the block forwards
//     delete(ID) + push-first(last element).
//   right case (insertion left of rmv, or no insertion):
//     lp       = {next_flag, ins[M-1:1]}            paper eq. (1)
//     set_en   = ~(lp - 1)                          paper eq. (2)
//     right_en = lp XNOR (rmv - 1)                  paper eq. (3)
//     Slot M-1 then refills from the next block's head, so the block forwards
//     pop, plus the push if it found no place (lp == 0).
//   nothing found: push or delete is forwarded unchanged.
// The forwarding follows the paper's Table I and its delete / pop rules.
// Equation (1) in the paper puts a constant 1 in the top bit of lp; this
// design puts the comparison with the next block's first element there, which
// the paper's conflict-resolution section requires (the last block, having no
// next block, sees an empty one and so gets the constant 1). The left/right
// case selection, the pop handled as "slot 0 removed" and the push-first /
// delete combination written through the same equations are this design's
// reading of "derived using a similar approach".
module tq_control #(
  parameter int unsigned M = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cmp_en_i,
  input  logic         shift_en_i,
  // operation being executed (held stable by the systolic block)
  input  logic         op_push_i,
  input  logic         op_del_i,
  input  logic         op_pop_i,
  input  logic         op_pf_i,
  // raw comparator flags from the shift blocks
  input  logic [M-1:0] push_id_flag_i,
  input  logic [M-1:0] drop_id_flag_i,
  input  logic [M-1:0] push_data_flag_i,
  input  logic         next_flag_i,
  // slot control
  output logic [M-1:0] set_en_o,
  output logic [M-1:0] left_en_o,
  output logic [M-1:0] right_en_o,
  // operations passed to the next block
  output logic         out_push_o,
  output logic         out_del_o,
  output logic         out_pop_o,
  output logic         out_pf_o
);

  logic [M-1:0] id_flag, drop_flag, data_flag;
  logic         next_flag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      id_flag   <= '0;
      drop_flag <= '0;
      data_flag <= '0;
      next_flag <= 1'b0;
    end else if (cmp_en_i) begin
      id_flag   <= push_id_flag_i;
      drop_flag <= drop_id_flag_i;
      data_flag <= push_data_flag_i;
      next_flag <= next_flag_i;
    end
  end

  logic [M-1:0] rmv, rmv_m1, ins, ins_m1, lp, lp_m1, left_w;
  logic         left_case, right_case;

  always_comb begin
    // slot that empties and insertion thermometer for this operation
    if (op_push_i) begin
      rmv = op_pop_i ? M'(1) : id_flag;
      ins = data_flag;
    end else if (op_del_i) begin
      rmv = drop_flag;
      ins = op_pf_i ? '1 : '0;
    end else if (op_pop_i) begin
      rmv = M'(1);
      ins = '0;
    end else begin
      rmv = '0;
      ins = '0;
    end
    rmv_m1 = rmv - M'(1);
    ins_m1 = ins - M'(1);
    lp     = op_push_i ? {next_flag, ins[M-1:1]} : '0;
    lp_m1  = lp - M'(1);
    left_w = (ins ~^ rmv_m1) << 1;

    left_case  = ins[M-1] && ((rmv == '0) || ((ins & rmv) != '0));
    right_case = !left_case && (rmv != '0);

    set_en_o   = '0;
    left_en_o  = '0;
    right_en_o = '0;
    out_push_o = 1'b0;
    out_del_o  = 1'b0;
    out_pop_o  = 1'b0;
    out_pf_o   = 1'b0;
    if (shift_en_i) begin
      if (left_case) begin
        set_en_o  = ~ins_m1;
        left_en_o = left_w;
        if (rmv == '0) begin
          out_del_o = 1'b1;
          out_pf_o  = 1'b1;
        end
      end else if (right_case) begin
        set_en_o   = ~lp_m1;
        right_en_o = lp ~^ rmv_m1;
        if (lp == '0) begin
          out_pop_o  = 1'b1;
          out_push_o = op_push_i;
        end
      end else begin
        out_push_o = op_push_i;
        out_del_o  = op_del_i;
      end
    end
  end

  a_set_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(set_en_o))
    else $error("tq_control: set_en not one-hot");
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 ((set_en_o & left_en_o) == '0) && ((set_en_o & right_en_o) == '0)
                                 && ((left_en_o & right_en_o) == '0))
    else $error("tq_control: overlapping slot enables");

endmodule
