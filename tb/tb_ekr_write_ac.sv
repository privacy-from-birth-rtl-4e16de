// tb_ekr_write_ac: self-checking test of the eKR write-access FSM.
//
// Directed part: boot, writes of the key from inside VR (legal), a write
// from outside VR (violation), the reset hold while writes continue, and an
// MCU reset.  Random part: random predicate vectors compared with a
// reference model of the two-state diagram.
module tb_ekr_write_ac;
  import versa_pkg::*;

  logic      clk = 1'b0;
  logic      ext_reset;
  access_t   acc;
  logic      reset;
  wr_state_e state;
  wr_state_e model;
  int        checks = 0, failures = 0;

  ekr_write_ac dut (.clk_i(clk), .ext_reset_i(ext_reset), .acc_i(acc),
                    .reset_o(reset), .state_o(state));

  always #5 clk = ~clk;

  task automatic step_expect(string what, logic exp_reset, wr_state_e exp_state);
    #1;
    checks++;
    if (reset !== exp_reset) begin
      failures++;
      $display("FAIL %s: reset=%0b expected %0b", what, reset, exp_reset);
    end
    @(posedge clk);
    #1;
    checks++;
    if (state !== exp_state) begin
      failures++;
      $display("FAIL %s: state %s expected %s", what, state.name(), exp_state.name());
    end
    acc = '0;
  endtask

  function automatic wr_state_e ref_next(wr_state_e s, access_t a, logic mr);
    if (s == W_RESET) return (a.pc_zero && !mr && !a.wr_ekr) ? W_UNLOCK : W_RESET;
    if (mr) return W_RESET;
    if (a.wr_ekr && !a.pc_in_vr) return W_RESET;
    return W_UNLOCK;
  endfunction

  initial begin
    acc = '0;
    ext_reset = 1'b1;
    repeat (3) @(posedge clk);
    #1;
    acc.pc_zero = 1'b1;
    step_expect("held in reset", 1'b1, W_RESET);
    ext_reset = 1'b0;
    acc.pc_zero = 1'b1; acc.wr_ekr = 1'b1;
    step_expect("no exit while writing eKR", 1'b1, W_RESET);
    acc.pc_zero = 1'b1;
    step_expect("boot", 1'b1, W_UNLOCK);
    step_expect("idle", 1'b0, W_UNLOCK);
    acc.pc_in_vr = 1'b1; acc.wr_ekr = 1'b1;
    step_expect("Verify writes key", 1'b0, W_UNLOCK);
    acc.pc_in_vr = 1'b1; acc.wr_ekr = 1'b1;
    step_expect("Verify writes key 2", 1'b0, W_UNLOCK);
    acc.pc_in_vr = 1'b1; acc.wr_er = 1'b1;
    step_expect("other writes from VR", 1'b0, W_UNLOCK);
    acc.wr_ekr = 1'b1;
    step_expect("write from outside VR", 1'b1, W_RESET);
    step_expect("stay in reset", 1'b1, W_RESET);
    acc.pc_zero = 1'b1;
    step_expect("reboot", 1'b1, W_UNLOCK);
    ext_reset = 1'b1;
    step_expect("mcu reset", 1'b1, W_RESET);
    ext_reset = 1'b0;

    model = state;
    repeat (20000) begin
      acc = '0;
      acc.pc_in_vr = ($urandom_range(0, 2) == 0);
      acc.pc_zero  = !acc.pc_in_vr && ($urandom_range(0, 3) == 0);
      acc.wr_ekr   = ($urandom_range(0, 3) == 0);
      acc.wr_er    = 1'($urandom);
      acc.rd_ekr   = 1'($urandom);
      ext_reset    = ($urandom_range(0, 63) == 0);
      #1;
      checks++;
      if (reset !== (model == W_RESET || ref_next(model, acc, ext_reset) == W_RESET)) begin
        failures++;
        $display("FAIL random reset in %s", model.name());
      end
      model = ref_next(model, acc, ext_reset);
      @(posedge clk);
      #1;
      checks++;
      if (state !== model) begin
        failures++;
        $display("FAIL random state %s expected %s", state.name(), model.name());
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
