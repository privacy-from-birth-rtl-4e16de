// er_atomicity: atomic execution and controlled invocation of ER.
//
// A five-state Mealy FSM that follows the program counter through the
// executable region ER = [ER_min, ER_max] holding the sensing operation.
//
//   A_NOT_ER  : PC outside ER.  Stays while PC is outside ER; PC == ER_min
//               with no interrupt and no DMA moves to A_FIRST_ER; any other
//               entry into ER is a violation.
//   A_FIRST_ER: PC == ER_min.  Stays while PC == ER_min; moves to A_MID_ER
//               when ER_min < PC < ER_max.
//   A_MID_ER  : ER_min < PC < ER_max.  Stays there; moves to A_LAST_ER when
//               PC == ER_max.
//   A_LAST_ER : PC == ER_max.  Stays while PC == ER_max; moves to A_NOT_ER
//               when PC leaves ER.
//   A_RESET   : entered on every other transition, and from every state
//               except A_NOT_ER when irq or DMA_en is seen; left for A_NOT_ER
//               once PC == 0 and the external reset is released.
//
// Every move between the four running states requires irq and DMA_en low, so
// ER runs from its first to its last instruction with no interrupt, no DMA
// and no jump in or out except through ER_min and ER_max.
//
// Output convention (paper): reset_o is 1 in the cycle the FSM moves to
// A_RESET and while it stays there.  The paper's diagram has no MCU-reset
// edge for this FSM; here the external reset (any MCU reset not caused by
// VERSA) also forces A_RESET, as it does in the two access-control FSMs, so
// that all monitors restart together.
module er_atomicity
  import versa_pkg::*;
(
  input  logic      clk_i,
  input  logic      ext_reset_i,
  input  access_t   acc_i,
  output logic      reset_o,
  output at_state_e state_o
);

  at_state_e state_q, state_d;
  logic      quiet;  // no interrupt and no DMA this cycle

  always_comb begin
    quiet   = !acc_i.irq && !acc_i.dma_en;
    state_d = A_RESET;
    if (!ext_reset_i) begin
      unique case (state_q)
        A_RESET:
          state_d = acc_i.pc_zero ? A_NOT_ER : A_RESET;
        A_NOT_ER: begin
          if (!acc_i.pc_in_er)                state_d = A_NOT_ER;
          else if (acc_i.pc_er_min && quiet)  state_d = A_FIRST_ER;
        end
        A_FIRST_ER: begin
          if (acc_i.pc_er_min && quiet)       state_d = A_FIRST_ER;
          else if (acc_i.pc_mid_er && quiet)  state_d = A_MID_ER;
        end
        A_MID_ER: begin
          if (acc_i.pc_mid_er && quiet)       state_d = A_MID_ER;
          else if (acc_i.pc_er_max && quiet)  state_d = A_LAST_ER;
        end
        A_LAST_ER: begin
          if (acc_i.pc_er_max && quiet)       state_d = A_LAST_ER;
          else if (!acc_i.pc_in_er && quiet)  state_d = A_NOT_ER;
        end
        default: state_d = A_RESET;
      endcase
    end
  end

  always_ff @(posedge clk_i) state_q <= state_d;

  assign reset_o = (state_q == A_RESET) || (state_d == A_RESET);
  assign state_o = state_q;

  // LTL (17): interrupts and DMA are violations while ER runs.
  a_atomic : assert property (@(posedge clk_i)
    (acc_i.pc_in_er && (acc_i.irq || acc_i.dma_en)) |-> reset_o);

endmodule
