// tb_gpio_read_ac: self-checking test of the GPIO/eKR read-access FSM.
//
// Part 1 walks the FSM through the paper's intended flow and its violations
// with explicitly expected states and reset values: boot, a locked read,
// authorisation at i_Auth, legal reads from ER, a read from outside ER, the
// relock at ER_max, the relock on a write to ER or METADATA, and a write at
// the instant of authorisation.  Part 2 applies random predicate vectors and
// compares state and reset_o with a reference model written from the state
// diagram plus the LTL corner cases.
module tb_gpio_read_ac;
  import versa_pkg::*;

  logic      clk = 1'b0;
  logic      ext_reset;
  access_t   acc;
  logic      reset;
  rd_state_e state;
  int        checks = 0, failures = 0;

  gpio_read_ac dut (.clk_i(clk), .ext_reset_i(ext_reset), .acc_i(acc),
                    .reset_o(reset), .state_o(state));

  always #5 clk = ~clk;

  task automatic expect_now(string what, logic exp_reset);
    #1;
    checks++;
    if (reset !== exp_reset) begin
      failures++;
      $display("FAIL %s: reset=%0b expected %0b (state %s)", what, reset, exp_reset, state.name());
    end
  endtask

  task automatic step_expect(string what, logic exp_reset, rd_state_e exp_state);
    expect_now(what, exp_reset);
    @(posedge clk);
    #1;
    checks++;
    if (state !== exp_state) begin
      failures++;
      $display("FAIL %s: state %s expected %s", what, state.name(), exp_state.name());
    end
    acc = '0;
    acc.pc_in_vr = 1'b0;
  endtask

  // Reference next state and reset, per the read-access rules.
  function automatic rd_state_e ref_next(rd_state_e s, access_t a, logic mr);
    bit rd  = a.rd_gpio || a.rd_ekr;
    bit mod = a.wr_er || a.wr_meta;
    case (s)
      R_RESET:  return (a.pc_zero && !mr && !rd) ? R_LOCK : R_RESET;
      R_LOCK: begin
        if (mr || rd) return R_RESET;
        if (a.pc_auth && mod) return R_RESET;
        if (a.pc_auth) return R_UNLOCK;
        return R_LOCK;
      end
      default: begin
        if (mr) return R_RESET;
        if (a.pc_auth && mod) return R_RESET;
        if (rd && !a.pc_in_er) return R_RESET;
        if (rd && (a.pc_er_max || mod)) return R_RESET;
        if (a.pc_er_max || mod) return R_LOCK;
        return R_UNLOCK;
      end
    endcase
  endfunction

  rd_state_e model;

  initial begin
    acc = '0;
    ext_reset = 1'b1;
    repeat (3) @(posedge clk);
    #1;
    // Boot: held in RESET while the MCU reset is asserted, even with PC == 0.
    acc.pc_zero = 1'b1;
    step_expect("held in reset", 1'b1, R_RESET);
    ext_reset = 1'b0;
    acc.pc_zero = 1'b1;
    step_expect("boot to lock", 1'b1, R_LOCK);
    // Unprivileged code runs; no GPIO access.
    step_expect("idle in lock", 1'b0, R_LOCK);
    // Unauthorised read of GPIO from outside ER.
    acc.rd_gpio = 1'b1;
    step_expect("read while locked", 1'b1, R_RESET);
    acc.rd_gpio = 1'b1;            // still reading: stays in reset
    step_expect("stay in reset", 1'b1, R_RESET);
    acc.pc_zero = 1'b1;
    step_expect("reboot", 1'b1, R_LOCK);
    // Authorisation succeeds.
    acc.pc_auth = 1'b1;
    step_expect("auth", 1'b0, R_UNLOCK);
    // Legal reads of GPIO and eKR from ER.
    acc.pc_in_er = 1'b1; acc.pc_er_min = 1'b1;
    step_expect("enter ER", 1'b0, R_UNLOCK);
    acc.pc_in_er = 1'b1; acc.pc_mid_er = 1'b1; acc.rd_gpio = 1'b1;
    step_expect("read gpio in ER", 1'b0, R_UNLOCK);
    acc.pc_in_er = 1'b1; acc.pc_mid_er = 1'b1; acc.rd_ekr = 1'b1;
    step_expect("read ekr in ER", 1'b0, R_UNLOCK);
    // Exit at ER_max relocks.
    acc.pc_in_er = 1'b1; acc.pc_er_max = 1'b1;
    step_expect("ER_max relocks", 1'b0, R_LOCK);
    // The old authorisation is spent: a read from ER is now a violation.
    acc.pc_in_er = 1'b1; acc.pc_mid_er = 1'b1; acc.rd_gpio = 1'b1;
    step_expect("token used once", 1'b1, R_RESET);
    acc.pc_zero = 1'b1;
    step_expect("reboot 2", 1'b1, R_LOCK);
    acc.pc_auth = 1'b1;
    step_expect("auth 2", 1'b0, R_UNLOCK);
    // Read from outside ER while unlocked.
    acc.rd_ekr = 1'b1;
    step_expect("read outside ER", 1'b1, R_RESET);
    acc.pc_zero = 1'b1;
    step_expect("reboot 3", 1'b1, R_LOCK);
    acc.pc_auth = 1'b1;
    step_expect("auth 3", 1'b0, R_UNLOCK);
    // Modifying METADATA after authorisation relocks.
    acc.wr_meta = 1'b1;
    step_expect("write metadata relocks", 1'b0, R_LOCK);
    acc.pc_auth = 1'b1;
    step_expect("auth 4", 1'b0, R_UNLOCK);
    acc.wr_er = 1'b1;
    step_expect("write ER relocks", 1'b0, R_LOCK);
    // Write to ER at the very moment of authorisation.
    acc.pc_auth = 1'b1; acc.wr_er = 1'b1;
    step_expect("write at auth", 1'b1, R_RESET);
    acc.pc_zero = 1'b1;
    step_expect("reboot 4", 1'b1, R_LOCK);
    acc.pc_auth = 1'b1;
    step_expect("auth 5", 1'b0, R_UNLOCK);
    // Read at ER_max itself is blocked.
    acc.pc_in_er = 1'b1; acc.pc_er_max = 1'b1; acc.rd_gpio = 1'b1;
    step_expect("read at ER_max", 1'b1, R_RESET);
    acc.pc_zero = 1'b1;
    step_expect("reboot 5", 1'b1, R_LOCK);
    acc.pc_auth = 1'b1;
    step_expect("auth 6", 1'b0, R_UNLOCK);
    // MCU reset from elsewhere.
    ext_reset = 1'b1;
    step_expect("mcu reset", 1'b1, R_RESET);
    ext_reset = 1'b0;

    // Part 2: random vectors against the reference model.
    model = state;
    repeat (20000) begin
      acc = access_t'({$urandom, $urandom});
      // Keep the PC predicates self-consistent and the rare events rare.
      acc.pc_er_min = ($urandom_range(0, 7) == 0);
      acc.pc_er_max = !acc.pc_er_min && ($urandom_range(0, 7) == 0);
      acc.pc_mid_er = !acc.pc_er_min && !acc.pc_er_max && ($urandom_range(0, 1) == 0);
      acc.pc_in_er  = acc.pc_er_min || acc.pc_er_max || acc.pc_mid_er;
      acc.pc_auth   = !acc.pc_in_er && ($urandom_range(0, 5) == 0);
      acc.pc_zero   = !acc.pc_in_er && !acc.pc_auth && ($urandom_range(0, 5) == 0);
      acc.rd_gpio   = ($urandom_range(0, 5) == 0);
      acc.rd_ekr    = ($urandom_range(0, 9) == 0);
      acc.wr_er     = ($urandom_range(0, 15) == 0);
      acc.wr_meta   = ($urandom_range(0, 15) == 0);
      ext_reset     = ($urandom_range(0, 63) == 0);
      #1;
      checks++;
      if (reset !== (model == R_RESET || ref_next(model, acc, ext_reset) == R_RESET)) begin
        failures++;
        $display("FAIL random reset: got %0b in %s", reset, model.name());
      end
      model = ref_next(model, acc, ext_reset);
      @(posedge clk);
      #1;
      checks++;
      if (state !== model) begin
        failures++;
        $display("FAIL random state: got %s expected %s", state.name(), model.name());
        model = state;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
