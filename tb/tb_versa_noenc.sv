// tb_versa_noenc: the monitor built without the output-encryption rules.
//
// With ENC_SUPPORT = 0 the key region eKR is ordinary memory: reading it
// from outside ER, or writing it from outside VR, must not reset the MCU,
// while the GPIO read rules and ER atomicity are unchanged.  The testbench
// drives short directed sequences of monitored-signal samples and compares
// reset_o and the FSM states with the expected values written out by hand.
module tb_versa_noenc;
  import versa_pkg::*;

  localparam addr_t ER_LO = 16'hE000;
  localparam addr_t ER_HI = 16'hE0A0;
  localparam addr_t APP   = 16'h4400;

  logic      clk = 1'b0;
  logic      ext_reset;
  mcu_sig_t  sig;
  logic      reset, rd_reset, wr_reset, at_reset;
  rd_state_e rd_state;
  wr_state_e wr_state;
  at_state_e at_state;

  versa #(.ENC_SUPPORT(1'b0)) dut (
    .clk_i(clk), .ext_reset_i(ext_reset), .sig_i(sig),
    .er_min_i(ER_LO), .er_max_i(ER_HI),
    .reset_o(reset), .rd_reset_o(rd_reset), .wr_reset_o(wr_reset),
    .at_reset_o(at_reset), .rd_state_o(rd_state), .wr_state_o(wr_state),
    .at_state_o(at_state)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // Apply one sample, check reset_o before the edge, then clock.
  task automatic step(string what, addr_t pc, bit rd, bit wr, addr_t addr, bit exp_reset);
    sig = '0;
    sig.pc = pc; sig.r_en = rd; sig.w_en = wr; sig.d_addr = addr;
    #1;
    checks++;
    if (reset !== exp_reset) begin
      failures++;
      $display("FAIL %s: reset=%0b expected %0b", what, reset, exp_reset);
    end
    checks++;
    if (wr_reset !== 1'b0) begin
      failures++;
      $display("FAIL %s: eKR write FSM present without ENC_SUPPORT", what);
    end
    @(posedge clk);
    #1;
  endtask

  task automatic boot();
    sig = '0;
    ext_reset = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    ext_reset = 1'b0;
    step("boot at PC 0", 16'h0000, 0, 0, '0, 1'b1);
    step("running after boot", APP, 0, 0, '0, 1'b0);
  endtask

  initial begin
    boot();
    step("eKR read outside ER",   APP, 1, 0, EKR_MIN_DEF, 1'b0);
    step("eKR write outside VR",  APP, 0, 1, EKR_MAX_DEF, 1'b0);
    step("GPIO read outside ER",  APP, 1, 0, GPIO_MIN_DEF, 1'b1);
    boot();
    // Authorised run: i_Auth, enter at ER_min, read GPIO, leave at ER_max.
    step("i_Auth",                I_AUTH_DEF, 0, 0, '0, 1'b0);
    step("ER_min",                ER_LO, 0, 0, '0, 1'b0);
    step("GPIO read in ER",       ER_LO + 16'h10, 1, 0, GPIO_MIN_DEF, 1'b0);
    step("eKR read in ER",        ER_LO + 16'h12, 1, 0, EKR_MIN_DEF, 1'b0);
    step("ER_max",                ER_HI, 0, 0, '0, 1'b0);
    step("back outside",          APP, 0, 0, '0, 1'b0);
    checks++;
    if (rd_state != R_LOCK || at_state != A_NOT_ER) begin
      failures++;
      $display("FAIL lock not closed after ER_max");
    end
    // Entering ER in the middle still violates controlled invocation.
    step("jump into mid ER",      ER_LO + 16'h20, 0, 0, '0, 1'b1);
    boot();
    step("eKR read after reboot", APP, 1, 0, EKR_MIN_DEF + 16'h5, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
