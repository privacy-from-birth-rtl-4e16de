// gpio_read_ac: read-access control of GPIO and eKR.
//
// A three-state Mealy FSM.  GPIO (and, when ENC_SUPPORT is set, the key
// region eKR) is locked by default.  The lock opens only when the program
// counter reaches i_Auth, the exit that the ROM-resident Verify routine takes
// when the authorisation token matches the HMAC of ER, and it closes again
// when the authorised code in ER finishes (PC == ER_max) or when ER or
// METADATA is modified after authorisation.  A read while locked, or a read
// from outside ER while unlocked, drives reset_o.
//
//   R_RESET : entered at boot and after every violation; left for R_LOCK once
//             the MCU has finished its reset routine (PC == 0, external
//             reset no longer asserted) and nothing reads GPIO/eKR.
//   R_LOCK  : GPIO/eKR reads are violations.  PC == i_Auth with no such read
//             moves to R_UNLOCK.
//   R_UNLOCK: reads are legal from PC in ER.  PC == ER_max, Write_Mem(ER) or
//             Write_Mem(METADATA) returns to R_LOCK.
//
// Output convention (paper): reset_o is 1 in the cycle the FSM moves to
// R_RESET and in every cycle it stays there, 0 otherwise.  reset_o therefore
// depends combinationally on acc_i; the state register updates on clk_i.
//
// The paper draws the transitions in a state diagram and also states the LTL
// properties the FSM is proven to satisfy.  Some corner cases are covered by
// the LTLs but not by the printed edge labels, and this design follows the
// LTLs:
//   * a read at PC == ER_max, or in the same cycle as a write to ER or
//     METADATA, resets even though PC is in ER (LTLs (11) and (13): the read
//     must be blocked from that very state on);
//   * a write to ER or METADATA while PC == i_Auth resets (LTL (12)).
// ext_reset_i is the paper's "reset" input: a reset of the MCU from any
// source other than VERSA itself (power-up, watchdog, another monitor).  It
// must not include reset_o, which would close a combinational loop.  Leaving
// R_RESET also requires ext_reset_i to be low (this design's choice).
module gpio_read_ac
  import versa_pkg::*;
#(
  parameter bit ENC_SUPPORT = 1'b1  // also guard eKR (output encryption)
) (
  input  logic    clk_i,
  input  logic    ext_reset_i,  // MCU reset from other sources
  input  access_t acc_i,
  output logic    reset_o,
  output rd_state_e state_o
);

  rd_state_e state_q, state_d;

  logic rd_any;     // Read_Mem(GPIO) or Read_Mem(eKR)
  logic modify;     // Write_Mem(ER) or Write_Mem(METADATA)
  logic auth_mod;   // modification at the moment of authorisation

  always_comb begin
    rd_any   = acc_i.rd_gpio || (ENC_SUPPORT && acc_i.rd_ekr);
    modify   = acc_i.wr_er || acc_i.wr_meta;
    auth_mod = acc_i.pc_auth && modify;
  end

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      R_RESET: begin
        if (acc_i.pc_zero && !ext_reset_i && !rd_any) state_d = R_LOCK;
        else                                          state_d = R_RESET;
      end
      R_LOCK: begin
        if (rd_any || ext_reset_i || auth_mod) state_d = R_RESET;
        else if (acc_i.pc_auth)                 state_d = R_UNLOCK;
        else                                    state_d = R_LOCK;
      end
      R_UNLOCK: begin
        if (ext_reset_i || auth_mod ||
            (rd_any && (!acc_i.pc_in_er || acc_i.pc_er_max || modify)))
          state_d = R_RESET;
        else if (acc_i.pc_er_max || modify)
          state_d = R_LOCK;
        else
          state_d = R_UNLOCK;
      end
      default: state_d = R_RESET;
    endcase
  end

  always_ff @(posedge clk_i) state_q <= state_d;

  assign reset_o = (state_q == R_RESET) || (state_d == R_RESET);
  assign state_o = state_q;

  // LTL (10): GPIO is readable only while PC is in ER.
  a_gpio_only_in_er : assert property (@(posedge clk_i)
    (acc_i.rd_gpio && !acc_i.pc_in_er) |-> reset_o);
  // LTL (12): no change to ER or METADATA at the instant of authorisation.
  a_no_mod_at_auth : assert property (@(posedge clk_i) auth_mod |-> reset_o);

endmodule
