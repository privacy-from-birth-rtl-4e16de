// versa_pkg: types and constants shared by the VERSA hardware monitor.
//
// VERSA watches a low-end 16-bit MCU (an MSP430-class core) and forces a
// reset whenever software breaks the rules that keep sensed data private:
// GPIO and the one-time key region eKR may be read only by an authorised
// sensing operation running atomically inside the executable region ER.
//
// This package holds
//   * the width of an MCU address (16 bits, as on MSP430),
//   * the default memory map of the protected regions,
//   * mcu_sig_t, the bundle of core signals the monitor observes,
//   * access_t, the decoded predicates the three FSMs consume,
//   * the state encodings of the three FSMs.
//
// Which numbers follow the paper: the 16-bit address width, the GPIO base
// 0x0018 (P3IN of an MSP430) and the eKR base 0x0360 with a 32-byte key
// are printed in the paper's sample sensing operation; METADATA is 4 bytes,
// which is the reserved-RAM growth the paper reports over VRASED.  The
// remaining bounds (GPIO top, METADATA base, the VRASED ROM region VR and the
// authorisation exit address i_Auth) are this design's choice; every module
// takes them as parameters.
package versa_pkg;

  localparam int unsigned ADDR_W = 16;
  typedef logic [ADDR_W-1:0] addr_t;

  // Default memory map (inclusive bounds, byte addresses).
  localparam addr_t GPIO_MIN_DEF = 16'h0018;  // P3IN
  localparam addr_t GPIO_MAX_DEF = 16'h0037;  // last MSP430 port register (P6)
  localparam addr_t EKR_MIN_DEF  = 16'h0360;  // one-time key K_enc
  localparam addr_t EKR_MAX_DEF  = 16'h037F;  // 32 bytes
  localparam addr_t META_MIN_DEF = 16'h0380;  // ER_min word
  localparam addr_t META_MAX_DEF = 16'h0383;  // ER_max word
  localparam addr_t VR_MIN_DEF   = 16'hA000;  // Verify (VRASED SW-Att) ROM
  localparam addr_t VR_MAX_DEF   = 16'hDFFF;
  localparam addr_t I_AUTH_DEF   = 16'hDFFE;  // reached only when Verify succeeds

  // Signals of the MCU core that VERSA monitors (one sample per clock).
  typedef struct packed {
    addr_t pc;        // address of the instruction being executed
    logic  irq;       // an interrupt is being taken
    logic  r_en;      // CPU data read
    logic  w_en;      // CPU data write
    addr_t d_addr;    // CPU data address
    logic  dma_en;    // DMA controller is accessing memory
    addr_t dma_addr;  // DMA address
  } mcu_sig_t;

  // Predicates derived from mcu_sig_t and the region bounds.
  typedef struct packed {
    logic rd_gpio;    // Read_Mem(GPIO)
    logic rd_ekr;     // Read_Mem(eKR)
    logic wr_er;      // Write_Mem(ER)
    logic wr_meta;    // Write_Mem(METADATA)
    logic wr_ekr;     // Write_Mem(eKR)
    logic pc_in_er;   // ER_min <= PC <= ER_max
    logic pc_in_vr;   // PC inside the Verify ROM
    logic pc_er_min;  // PC == ER_min
    logic pc_er_max;  // PC == ER_max
    logic pc_mid_er;  // ER_min < PC < ER_max
    logic pc_auth;    // PC == i_Auth
    logic pc_zero;    // PC == 0 (MCU reset routine finished)
    logic irq;
    logic dma_en;
  } access_t;

  // GPIO / eKR read-access control FSM.
  typedef enum logic [1:0] {
    R_RESET  = 2'd0,
    R_LOCK   = 2'd1,
    R_UNLOCK = 2'd2
  } rd_state_e;

  // eKR write-access control FSM.
  typedef enum logic {
    W_RESET  = 1'b0,
    W_UNLOCK = 1'b1
  } wr_state_e;

  // ER atomicity and controlled-invocation FSM.
  typedef enum logic [2:0] {
    A_RESET    = 3'd0,
    A_NOT_ER   = 3'd1,
    A_FIRST_ER = 3'd2,
    A_MID_ER   = 3'd3,
    A_LAST_ER  = 3'd4
  } at_state_e;

endpackage
