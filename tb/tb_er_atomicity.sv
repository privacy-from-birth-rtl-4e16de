// tb_er_atomicity: self-checking test of the ER atomicity FSM.
//
// The test drives a real program-counter trace through access_decode's
// definitions computed here in the testbench (ER = [0xE000, 0xE0A0]):
// legal runs (enter at ER_min, run, leave from ER_max), and each violation
// the paper names: entry into the middle of ER, exit from the middle, a jump
// from ER_min straight out, an interrupt or a DMA access inside ER.  Every
// cycle's reset_o and the next state are checked against values written out
// by hand for the directed traces, and against a reference model of the
// five-state diagram for a random trace.
module tb_er_atomicity;
  import versa_pkg::*;

  localparam addr_t ERMIN = 16'hE000;
  localparam addr_t ERMAX = 16'hE0A0;

  logic      clk = 1'b0;
  logic      ext_reset;
  access_t   acc;
  logic      reset;
  at_state_e state;
  at_state_e model;
  int        checks = 0, failures = 0;

  er_atomicity dut (.clk_i(clk), .ext_reset_i(ext_reset), .acc_i(acc),
                    .reset_o(reset), .state_o(state));

  always #5 clk = ~clk;

  function automatic access_t mk(addr_t pc, bit irq, bit dma);
    access_t a = '0;
    a.pc_in_er  = (pc >= ERMIN) && (pc <= ERMAX);
    a.pc_er_min = (pc == ERMIN);
    a.pc_er_max = (pc == ERMAX);
    a.pc_mid_er = (pc > ERMIN) && (pc < ERMAX);
    a.pc_zero   = (pc == 0);
    a.irq       = irq;
    a.dma_en    = dma;
    return a;
  endfunction

  task automatic step(string what, addr_t pc, bit irq, bit dma,
                      logic exp_reset, at_state_e exp_state);
    acc = mk(pc, irq, dma);
    #1;
    checks++;
    if (reset !== exp_reset) begin
      failures++;
      $display("FAIL %s: reset=%0b expected %0b (pc=%h state %s)", what, reset, exp_reset,
               pc, state.name());
    end
    @(posedge clk);
    #1;
    checks++;
    if (state !== exp_state) begin
      failures++;
      $display("FAIL %s: state %s expected %s", what, state.name(), exp_state.name());
    end
  endtask

  function automatic at_state_e ref_next(at_state_e s, addr_t pc, bit irq, bit dma, bit mr);
    bit q = !irq && !dma;
    bit in_er = (pc >= ERMIN) && (pc <= ERMAX);
    bit mid = (pc > ERMIN) && (pc < ERMAX);
    if (mr) return A_RESET;
    case (s)
      A_RESET:    return (pc == 0) ? A_NOT_ER : A_RESET;
      A_NOT_ER:   return !in_er ? A_NOT_ER : ((pc == ERMIN && q) ? A_FIRST_ER : A_RESET);
      A_FIRST_ER: return (pc == ERMIN && q) ? A_FIRST_ER : ((mid && q) ? A_MID_ER : A_RESET);
      A_MID_ER:   return (mid && q) ? A_MID_ER : ((pc == ERMAX && q) ? A_LAST_ER : A_RESET);
      A_LAST_ER:  return (pc == ERMAX && q) ? A_LAST_ER : ((!in_er && q) ? A_NOT_ER : A_RESET);
      default:    return A_RESET;
    endcase
  endfunction

  task automatic reboot();
    step("reboot", 16'h0000, 0, 0, 1'b1, A_NOT_ER);
  endtask

  addr_t pc;
  bit    irq, dma;

  initial begin
    ext_reset = 1'b1;
    acc = mk(16'h0000, 0, 0);
    repeat (3) @(posedge clk);
    step("held", 16'h0000, 0, 0, 1'b1, A_RESET);
    ext_reset = 1'b0;
    reboot();
    // Legal run; interrupts and DMA are allowed outside ER.
    step("outside",   16'h4400, 1, 0, 1'b0, A_NOT_ER);
    step("outside dma", 16'h4402, 0, 1, 1'b0, A_NOT_ER);
    step("entry",     ERMIN,     0, 0, 1'b0, A_FIRST_ER);
    step("entry 2",   ERMIN,     0, 0, 1'b0, A_FIRST_ER);
    step("body",      16'hE002,  0, 0, 1'b0, A_MID_ER);
    step("body 2",    16'hE050,  0, 0, 1'b0, A_MID_ER);
    step("body back", 16'hE004,  0, 0, 1'b0, A_MID_ER);
    step("exit",      ERMAX,     0, 0, 1'b0, A_LAST_ER);
    step("exit 2",    ERMAX,     0, 0, 1'b0, A_LAST_ER);
    step("leave",     16'h4410,  0, 0, 1'b0, A_NOT_ER);
    // Entry into the middle of ER.
    step("bad entry", 16'hE010,  0, 0, 1'b1, A_RESET);
    step("held 2",    16'hE012,  0, 0, 1'b1, A_RESET);
    reboot();
    // Exit from the middle of ER.
    step("entry",     ERMIN,     0, 0, 1'b0, A_FIRST_ER);
    step("body",      16'hE002,  0, 0, 1'b0, A_MID_ER);
    step("bad exit",  16'h4000,  0, 0, 1'b1, A_RESET);
    reboot();
    // Interrupt inside ER.
    step("entry",     ERMIN,     0, 0, 1'b0, A_FIRST_ER);
    step("body",      16'hE002,  0, 0, 1'b0, A_MID_ER);
    step("irq in ER", 16'hE004,  1, 0, 1'b1, A_RESET);
    reboot();
    // DMA at the entry point.
    step("dma at entry", ERMIN,  0, 1, 1'b1, A_RESET);
    reboot();
    // DMA at the exit point.
    step("entry",     ERMIN,     0, 0, 1'b0, A_FIRST_ER);
    step("body",      16'hE002,  0, 0, 1'b0, A_MID_ER);
    step("exit",      ERMAX,     0, 0, 1'b0, A_LAST_ER);
    step("dma at exit", ERMAX,   0, 1, 1'b1, A_RESET);
    reboot();
    // Leaving straight from ER_min.
    step("entry",     ERMIN,     0, 0, 1'b0, A_FIRST_ER);
    step("out of first", 16'h4000, 0, 0, 1'b1, A_RESET);
    reboot();
    // Interrupt taken in the cycle ER is left.
    step("entry",     ERMIN,     0, 0, 1'b0, A_FIRST_ER);
    step("body",      16'hE002,  0, 0, 1'b0, A_MID_ER);
    step("exit",      ERMAX,     0, 0, 1'b0, A_LAST_ER);
    step("irq on leave", 16'h4000, 1, 0, 1'b1, A_RESET);
    reboot();
    // Middle jumps back to ER_min.
    step("entry",     ERMIN,     0, 0, 1'b0, A_FIRST_ER);
    step("body",      16'hE002,  0, 0, 1'b0, A_MID_ER);
    step("back to first", ERMIN, 0, 0, 1'b1, A_RESET);
    reboot();
    // MCU reset from elsewhere.
    ext_reset = 1'b1;
    step("mcu reset", 16'h4000, 0, 0, 1'b1, A_RESET);
    ext_reset = 1'b0;

    // Random PC walk that mostly follows the legal path.
    model = state;
    pc = 16'h0000;
    repeat (20000) begin
      case ($urandom_range(0, 9))
        0: pc = ERMIN;
        1: pc = ERMAX;
        2: pc = 16'h0000;
        3: pc = ERMIN + addr_t'($urandom_range(1, 159));
        4: pc = 16'h4000 + addr_t'($urandom_range(0, 255));
        default: begin
          if (pc >= ERMIN && pc < ERMAX) pc = pc + 16'd2;
          else if (pc == ERMAX) pc = 16'h4000;
          else pc = pc + 16'd2;
        end
      endcase
      irq = ($urandom_range(0, 15) == 0);
      dma = ($urandom_range(0, 15) == 0);
      ext_reset = ($urandom_range(0, 127) == 0);
      acc = mk(pc, irq, dma);
      #1;
      checks++;
      if (reset !== (model == A_RESET ||
                     ref_next(model, pc, irq, dma, ext_reset) == A_RESET)) begin
        failures++;
        $display("FAIL random reset in %s pc=%h", model.name(), pc);
      end
      model = ref_next(model, pc, irq, dma, ext_reset);
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
