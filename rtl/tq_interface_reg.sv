// tq_interface_reg - the register that passes operations from one systolic
// block to the next.
//
// At the end of its block's SHIFT phase (load_i) it captures the controller's
// forwarding decision and presents it for exactly one cycle, the block's
// FINISH phase, which is also the next block's enable cycle:
//   valid_o           : some operation is passed on
//   push_o / del_o / pop_o / pf_o : which ones (push+pop and delete+push-first
//                       are the combinations that occur)
//   id_o / data_o     : the element carried. A 2:1 mux selects the block's
//                       last element (slot M-1, before the shift) for a
//                       push-first and the pushed element otherwise.
//   del_id_o          : the ID to delete downstream; for a delete created by
//                       a push it is the pushed ID.
// The element mux follows the paper's block diagram; splitting the delete ID
// into its own field and the one-cycle valid are this design's choices.
module tq_interface_reg #(
  parameter int unsigned ID_W   = 8,
  parameter int unsigned DATA_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load_i,
  // decision from the controller (meaningful when load_i)
  input  logic              push_i,
  input  logic              del_i,
  input  logic              pop_i,
  input  logic              pf_i,
  // candidate elements
  input  logic [ID_W-1:0]   push_id_i,
  input  logic [DATA_W-1:0] push_data_i,
  input  logic [ID_W-1:0]   last_id_i,
  input  logic [DATA_W-1:0] last_data_i,
  input  logic [ID_W-1:0]   del_id_i,
  // registered output towards the next block
  output logic              valid_o,
  output logic              push_o,
  output logic              del_o,
  output logic              pop_o,
  output logic              pf_o,
  output logic [ID_W-1:0]   id_o,
  output logic [DATA_W-1:0] data_o,
  output logic [ID_W-1:0]   del_id_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o  <= 1'b0;
      push_o   <= 1'b0;
      del_o    <= 1'b0;
      pop_o    <= 1'b0;
      pf_o     <= 1'b0;
      id_o     <= '0;
      data_o   <= '0;
      del_id_o <= '0;
    end else if (load_i) begin
      valid_o  <= push_i | del_i | pop_i | pf_i;
      push_o   <= push_i;
      del_o    <= del_i;
      pop_o    <= pop_i;
      pf_o     <= pf_i;
      id_o     <= pf_i ? last_id_i   : push_id_i;
      data_o   <= pf_i ? last_data_i : push_data_i;
      del_id_o <= del_id_i;
    end else begin
      valid_o  <= 1'b0;
      push_o   <= 1'b0;
      del_o    <= 1'b0;
      pop_o    <= 1'b0;
      pf_o     <= 1'b0;
    end
  end

endmodule
