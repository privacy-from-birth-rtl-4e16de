// ekr_write_ac: write-access control of the key region eKR.
//
// A two-state Mealy FSM.  The one-time encryption key K_enc in eKR may be
// written only by the Verify routine, i.e. while the program counter is in
// the ROM region VR.  Any other write to eKR, by the CPU or by DMA, is a
// violation and drives reset_o.
//
//   W_RESET : entered at boot and after a violation; left for W_UNLOCK when
//             the MCU reset routine has finished (PC == 0, external reset
//             no longer asserted) and nothing writes eKR.
//   W_UNLOCK: writes to eKR from PC in VR are legal; a write from PC outside
//             VR, or the external reset, moves to W_RESET.
//
// Output convention (paper): reset_o is 1 in the cycle the FSM moves to
// W_RESET and in every cycle it stays there.  ext_reset_i is a reset of the
// MCU from any source other than VERSA; requiring it low before leaving
// W_RESET is this design's choice.
module ekr_write_ac
  import versa_pkg::*;
(
  input  logic      clk_i,
  input  logic      ext_reset_i,
  input  access_t   acc_i,
  output logic      reset_o,
  output wr_state_e state_o
);

  wr_state_e state_q, state_d;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      W_RESET: begin
        if (acc_i.pc_zero && !ext_reset_i && !acc_i.wr_ekr) state_d = W_UNLOCK;
        else                                                state_d = W_RESET;
      end
      W_UNLOCK: begin
        if ((acc_i.wr_ekr && !acc_i.pc_in_vr) || ext_reset_i) state_d = W_RESET;
        else                                                  state_d = W_UNLOCK;
      end
      default: state_d = W_RESET;
    endcase
  end

  always_ff @(posedge clk_i) state_q <= state_d;

  assign reset_o = (state_q == W_RESET) || (state_d == W_RESET);
  assign state_o = state_q;

  // LTL (20): eKR is writable only from VR.
  a_ekr_write_only_from_vr : assert property (@(posedge clk_i)
    (acc_i.wr_ekr && !acc_i.pc_in_vr) |-> reset_o);

endmodule
