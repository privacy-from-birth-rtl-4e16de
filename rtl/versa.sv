// versa: the VERSA hardware monitor (top level).
//
// VERSA sits beside an unmodified MSP430-class core and observes, every
// clock, the program counter, the CPU data-access signals (R_en, W_en,
// D_addr), the DMA signals (DMA_en, DMA_addr) and the interrupt signal, plus
// the bounds ER_min and ER_max of the executable region ER read from the
// METADATA words of memory.  It never stalls or alters the core; its only
// output is reset_o, which must be OR-ed into the core's reset.  Resetting
// the MCU is the whole enforcement mechanism: a reset stops the offending
// software and the ROM boot code then erases data memory.
//
// Structure (all from the paper):
//   access_decode  region and access predicates (Read_Mem / Write_Mem),
//   gpio_read_ac   GPIO / eKR read-access control FSM,
//   ekr_write_ac   eKR write-access control FSM (only with ENC_SUPPORT),
//   er_atomicity   ER atomicity and controlled-invocation FSM,
// and reset_o is the OR of the FSMs' local resets.
//
// Timing: reset_o is combinational in the current sample of the MCU signals
// (the FSMs are Mealy machines), so a violating access raises reset_o in the
// same cycle; the FSM state registers advance on the rising edge of clk_i.
// ext_reset_i is the paper's "reset" input: any reset of the MCU that VERSA
// did not cause (power-up, watchdog, another monitor such as VRASED).  It
// must not contain reset_o.  Every FSM waits in its RESET state until PC == 0
// with ext_reset_i low; since the core holds PC at 0 while it is reset, the
// monitor releases reset_o one cycle after the core reaches PC == 0.
//
// ENC_SUPPORT selects the paper's optional output-encryption properties
// (protection of eKR); the paper's prototype uses them, so it defaults to 1.
module versa
  import versa_pkg::*;
#(
  parameter bit    ENC_SUPPORT = 1'b1,
  parameter addr_t GPIO_MIN    = GPIO_MIN_DEF,
  parameter addr_t GPIO_MAX    = GPIO_MAX_DEF,
  parameter addr_t EKR_MIN     = EKR_MIN_DEF,
  parameter addr_t EKR_MAX     = EKR_MAX_DEF,
  parameter addr_t META_MIN    = META_MIN_DEF,
  parameter addr_t META_MAX    = META_MAX_DEF,
  parameter addr_t VR_MIN      = VR_MIN_DEF,
  parameter addr_t VR_MAX      = VR_MAX_DEF,
  parameter addr_t I_AUTH      = I_AUTH_DEF
) (
  input  logic      clk_i,
  input  logic      ext_reset_i,  // MCU reset from other sources
  input  mcu_sig_t  sig_i,        // monitored core signals
  input  addr_t     er_min_i,     // METADATA: first instruction of ER
  input  addr_t     er_max_i,     // METADATA: last instruction of ER
  output logic      reset_o,      // VERSA reset request to the core
  output logic      rd_reset_o,   // local resets, for observation
  output logic      wr_reset_o,
  output logic      at_reset_o,
  output rd_state_e rd_state_o,   // FSM states, for observation
  output wr_state_e wr_state_o,
  output at_state_e at_state_o
);

  access_t acc;

  access_decode #(
    .GPIO_MIN(GPIO_MIN), .GPIO_MAX(GPIO_MAX),
    .EKR_MIN (EKR_MIN),  .EKR_MAX (EKR_MAX),
    .META_MIN(META_MIN), .META_MAX(META_MAX),
    .VR_MIN  (VR_MIN),   .VR_MAX  (VR_MAX),
    .I_AUTH  (I_AUTH)
  ) u_decode (
    .sig_i    (sig_i),
    .er_min_i (er_min_i),
    .er_max_i (er_max_i),
    .acc_o    (acc)
  );

  gpio_read_ac #(.ENC_SUPPORT(ENC_SUPPORT)) u_read_ac (
    .clk_i       (clk_i),
    .ext_reset_i (ext_reset_i),
    .acc_i       (acc),
    .reset_o     (rd_reset_o),
    .state_o     (rd_state_o)
  );

  if (ENC_SUPPORT) begin : g_ekr_write
    ekr_write_ac u_write_ac (
      .clk_i       (clk_i),
      .ext_reset_i (ext_reset_i),
      .acc_i       (acc),
      .reset_o     (wr_reset_o),
      .state_o     (wr_state_o)
    );
  end else begin : g_no_ekr_write
    assign wr_reset_o = 1'b0;
    assign wr_state_o = W_UNLOCK;
  end

  er_atomicity u_atomicity (
    .clk_i       (clk_i),
    .ext_reset_i (ext_reset_i),
    .acc_i       (acc),
    .reset_o     (at_reset_o),
    .state_o     (at_state_o)
  );

  assign reset_o = rd_reset_o || wr_reset_o || at_reset_o;

endmodule
