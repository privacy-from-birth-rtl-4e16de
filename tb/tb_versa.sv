// tb_versa: end-to-end test of the VERSA monitor with a cycle-level model of
// an MSP430-class MCU around it.
//
// The testbench plays the part of the core, its memory and its software.
// Each cycle it presents one sample of PC, the CPU data access, the DMA
// access and irq to VERSA, and applies the access to a 64 KiB byte memory.
// Whenever VERSA raises reset_o the modelled core abandons the running code,
// holds its reset for a few cycles, restarts from PC = 0 and runs a boot-time
// data-erasure loop that clears data memory (DMEM, 0x0200-0x09FF, except the
// key region eKR, which only Verify may write).
//
// Software modelled, with the monitor at its default parameters:
//   * Verify: runs in the ROM region VR, writes a 32-byte key into eKR and,
//     when the token is accepted, passes through i_Auth;
//   * the sample sensing operation in ER = [0xE000, 0xE0A0]: reads 32 bytes
//     of P3IN (0x0018) onto its stack, XORs them with the key from eKR,
//     writes the ciphertext to RESULT (0x1030), clears its stack and leaves
//     through ER_max;
//   * attacks: every violation the monitor is meant to stop.
// For every scenario the test checks whether a reset happened and where, and
// checks memory: the ciphertext after a legal run, and the absence of sensed
// bytes in DMEM after an aborted one.  Every mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_versa;
  import versa_pkg::*;

  localparam addr_t ER_MIN  = 16'hE000;
  localparam addr_t ER_MAX  = 16'hE0A0;
  localparam addr_t P3IN    = 16'h0018;
  localparam addr_t EKR     = EKR_MIN_DEF;
  localparam addr_t META    = META_MIN_DEF;
  localparam addr_t STACK   = 16'h0900;  // sensing operation's stack area
  localparam addr_t RESULT  = 16'h1030;
  localparam addr_t APP     = 16'h4400;  // unprivileged code
  localparam addr_t DE_PC   = 16'hF000;  // boot-time erasure routine (ROM)
  localparam addr_t DMEM_LO = 16'h0200;
  localparam addr_t DMEM_HI = 16'h09FF;

  logic      clk = 1'b0;
  logic      ext_reset;
  mcu_sig_t  sig;
  addr_t     er_min, er_max;
  logic      reset, rd_reset, wr_reset, at_reset;
  rd_state_e rd_state;
  wr_state_e wr_state;
  at_state_e at_state;

  versa dut (
    .clk_i(clk), .ext_reset_i(ext_reset), .sig_i(sig),
    .er_min_i(er_min), .er_max_i(er_max),
    .reset_o(reset), .rd_reset_o(rd_reset), .wr_reset_o(wr_reset),
    .at_reset_o(at_reset), .rd_state_o(rd_state), .wr_state_o(wr_state),
    .at_state_o(at_state)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;

  // Mechanism counters.
  typedef enum int {
    M_AUTH_RUN, M_LOCKED_READ, M_READ_OUTSIDE_ER, M_EKR_READ_OUTSIDE, M_ER_WRITE_RELOCK,
    M_META_WRITE_RELOCK, M_WRITE_AT_AUTH, M_BAD_ENTRY, M_BAD_EXIT, M_IRQ_IN_ER,
    M_DMA_IN_ER, M_DMA_GPIO, M_EKR_WRITE_OUTSIDE_VR, M_TOKEN_REUSE, M_FAILED_VERIFY,
    M_ERASURE, M_READ_AT_ER_MAX, M_EXT_RESET, M_N
  } mech_e;
  int mech [M_N];
  string mech_name [M_N] = '{"authorised run", "locked GPIO read", "read outside ER",
    "eKR read outside ER", "ER write relocks", "METADATA write relocks",
    "write at i_Auth", "bad ER entry", "bad ER exit", "irq in ER", "DMA in ER",
    "DMA read of GPIO", "eKR write outside VR", "token reuse", "failed Verify",
    "data erasure", "read at ER_max", "external reset relocks"};

  // Memory and sensor model.
  logic [7:0] mem [0:65535];
  logic [7:0] sensor;          // value on the P3 pins
  logic [7:0] key  [0:31];     // key Verify derives for this authorisation
  logic [7:0] seen [0:31];     // bytes sensed in the current run

  // Abort handling: once VERSA resets, the rest of the running code is void.
  bit aborted;
  bit reset_seen;
  logic [2:0] reset_src;       // {read FSM, eKR-write FSM, atomicity FSM}
  localparam logic [2:0] RD = 3'b100, WR = 3'b010, AT = 3'b001;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cycles);
    end
  endtask

  // One core cycle: PC plus at most one CPU access and one DMA access.
  task automatic cyc(addr_t pc, bit rd = 0, bit wr = 0, addr_t addr = '0,
                     logic [7:0] wdata = '0, bit irq = 0, bit dma = 0,
                     addr_t daddr = '0, output logic [7:0] rdata);
    rdata = '0;
    if (aborted) return;
    sig.pc = pc; sig.r_en = rd; sig.w_en = wr; sig.d_addr = addr;
    sig.irq = irq; sig.dma_en = dma; sig.dma_addr = daddr;
    #1;
    if (reset) begin
      // The core sees the reset request before the access takes effect.
      aborted = 1'b1;
      reset_seen = 1'b1;
      reset_src = {rd_reset, wr_reset, at_reset};
    end else begin
      if (rd) rdata = (addr == P3IN) ? sensor : mem[addr];
      if (wr) mem[addr] = wdata;
    end
    @(posedge clk);
    cycles++;
    #1;
    sig = '0;
    sig.pc = pc;
  endtask

  task automatic run(addr_t pc);
    logic [7:0] d;
    cyc(.pc(pc), .rdata(d));
  endtask

  // Reset and boot.  power_on adds an external reset (ext_reset_i) of a few
  // cycles; otherwise the core is in reset only because VERSA asked for it.
  // The core holds PC at 0 for as long as reset_o is high, then runs the
  // erasure routine from ROM.
  task automatic boot(bit power_on = 0);
    logic [7:0] d;
    int n;
    aborted = 1'b0;
    sig = '0;
    if (power_on) begin
      ext_reset = 1'b1;
      repeat (3) begin @(posedge clk); cycles++; end
      #1;
      ext_reset = 1'b0;
    end
    #1;
    n = 0;
    while (reset && n < 8) begin
      @(posedge clk);
      cycles++;
      #1;
      n++;
    end
    check("reset released at PC = 0", !reset);
    for (int a = DMEM_LO; a <= DMEM_HI; a += 2) begin
      if (a >= EKR_MIN_DEF && a <= EKR_MAX_DEF) continue;
      if (a >= META_MIN_DEF && a <= META_MAX_DEF) continue;
      cyc(.pc(DE_PC + 16'(a[3:0])), .wr(1), .addr(addr_t'(a)), .wdata(8'h00), .rdata(d));
      mem[a + 1] = 8'h00;
    end
    run(APP);
    check("boot completes without reset", !aborted);
  endtask

  // Start a scenario from a clean, booted machine.
  task automatic fresh();
    reset_seen = 1'b0;
    boot(1);
    reset_seen = 1'b0;
  endtask

  // After a violation the machine must reboot; counts the erasure.
  task automatic expect_reset(string what, mech_e m, logic [2:0] src);
    check({what, ": VERSA reset"}, reset_seen);
    check({what, ": reset raised by the expected FSM"}, (reset_src & src) != 0);
    if (reset_seen) mech[m]++;
    reset_src = '0;
    reset_seen = 1'b0;
    boot();
    check({what, ": erased DMEM holds no sensed byte"}, stack_clean());
    mech[M_ERASURE]++;
    reset_seen = 1'b0;
  endtask

  function automatic bit stack_clean();
    for (int i = 0; i < 32; i++) if (mem[STACK + i] != 8'h00) return 0;
    return 1;
  endfunction

  // ROM Verify routine.  ok = token matches.
  task automatic verify(bit ok);
    logic [7:0] d;
    for (int i = 0; i < 16; i++) run(VR_MIN_DEF + addr_t'(2 * i));
    for (int i = 0; i < 32; i++) begin
      key[i] = 8'($urandom);
      cyc(.pc(VR_MIN_DEF + 16'h0100 + addr_t'(2 * i)), .wr(1), .addr(EKR + addr_t'(i)),
          .wdata(key[i]), .rdata(d));
    end
    if (ok) run(I_AUTH_DEF);
    else run(VR_MIN_DEF + 16'h0200);
    run(APP + 16'h0010);
  endtask

  // Sample sensing operation.  stop_after >= 0 cuts the body short at that
  // point and runs the attack selected by attack instead.
  typedef enum int {
    A_NONE, A_IRQ, A_DMA, A_BAD_EXIT, A_EKR_WRITE
  } attack_e;

  task automatic sensing_op(attack_e attack = A_NONE, int stop_after = -1);
    logic [7:0] d;
    addr_t pc;
    pc = ER_MIN;
    run(pc);                                              // ER_min: save SP
    pc += 2;
    for (int i = 0; i < 32; i++) begin
      if (i == stop_after) begin
        case (attack)
          A_IRQ:       cyc(.pc(pc), .irq(1), .rdata(d));
          A_DMA:       cyc(.pc(pc), .dma(1), .daddr(STACK), .rdata(d));
          A_BAD_EXIT:  run(APP + 16'h0020);
          A_EKR_WRITE: cyc(.pc(pc), .wr(1), .addr(EKR), .wdata(8'hAA), .rdata(d));
          default: ;
        endcase
      end
      sensor = 8'($urandom) | 8'h01;                      // never zero
      cyc(.pc(pc), .rd(1), .addr(P3IN), .rdata(d));       // digitalRead()
      seen[i] = d;
      cyc(.pc(pc + 16'd2), .wr(1), .addr(STACK + addr_t'(i)), .wdata(d), .rdata(d));
      pc = ER_MIN + 16'h0010 + addr_t'(i % 8) * 2;
    end
    for (int i = 0; i < 32; i++) begin                    // encrypt()
      logic [7:0] k, x;
      cyc(.pc(ER_MIN + 16'h0040), .rd(1), .addr(EKR + addr_t'(i)), .rdata(k));
      cyc(.pc(ER_MIN + 16'h0042), .rd(1), .addr(STACK + addr_t'(i)), .rdata(x));
      cyc(.pc(ER_MIN + 16'h0044), .wr(1), .addr(STACK + addr_t'(i)), .wdata(x ^ k), .rdata(d));
    end
    for (int i = 0; i < 32; i++) begin                    // memcpy(RESULT)
      logic [7:0] x;
      cyc(.pc(ER_MIN + 16'h0060), .rd(1), .addr(STACK + addr_t'(i)), .rdata(x));
      cyc(.pc(ER_MIN + 16'h0062), .wr(1), .addr(RESULT + addr_t'(i)), .wdata(x), .rdata(d));
    end
    for (int i = 0; i < 36; i++)                          // cleanUp()
      cyc(.pc(ER_MIN + 16'h0080), .wr(1), .addr(STACK + addr_t'(i)), .wdata(8'h00), .rdata(d));
    run(ER_MAX);                                          // ret
    run(APP + 16'h0030);
  endtask

  task automatic check_result(string what);
    bit ok = 1;
    for (int i = 0; i < 32; i++)
      if (mem[RESULT + i] != (seen[i] ^ key[i])) ok = 0;
    check({what, ": RESULT = sensed XOR key"}, ok);
    check({what, ": stack cleaned"}, stack_clean());
  endtask

  initial begin
    logic [7:0] d;
    for (int a = 0; a < 65536; a++) mem[a] = 8'h00;
    foreach (mech[i]) mech[i] = 0;
    er_min = ER_MIN;
    er_max = ER_MAX;
    sig = '0;
    sensor = 8'h5A;
    ext_reset = 1'b1;

    // 1. Authorised sensing run.
    fresh();
    verify(1);
    check("unlocked after i_Auth", rd_state == R_UNLOCK);
    sensing_op();
    check("authorised run: no reset", !reset_seen);
    check("relocked after ER_max", rd_state == R_LOCK);
    check_result("authorised run");
    if (!reset_seen) mech[M_AUTH_RUN]++;

    // 2. The token is spent: a second run of ER without Verify.
    sensing_op();
    expect_reset("token reuse", M_TOKEN_REUSE, RD);

    // 3. Malware reads GPIO with the lock closed.
    cyc(.pc(APP), .rd(1), .addr(P3IN), .rdata(d));
    expect_reset("locked GPIO read", M_LOCKED_READ, RD);

    // 4. Verify fails (bad token): no unlock, ER's first GPIO read resets.
    verify(0);
    check("still locked after failed Verify", rd_state == R_LOCK);
    mech[M_FAILED_VERIFY] += (rd_state == R_LOCK);
    sensing_op();
    expect_reset("ER after failed Verify", M_LOCKED_READ, RD);

    // 5. Unlocked, but GPIO is read from outside ER.
    verify(1);
    cyc(.pc(APP), .rd(1), .addr(P3IN + 16'd1), .rdata(d));
    expect_reset("read outside ER", M_READ_OUTSIDE_ER, RD);

    // 6. Unlocked, eKR read from outside ER.
    verify(1);
    cyc(.pc(APP), .rd(1), .addr(EKR + 16'd5), .rdata(d));
    expect_reset("eKR read outside ER", M_EKR_READ_OUTSIDE, RD);

    // 7. ER patched after authorisation: lock closes, sensing then resets.
    verify(1);
    cyc(.pc(APP), .wr(1), .addr(ER_MIN + 16'h0010), .wdata(8'h4F), .rdata(d));
    check("ER write relocks without reset", !reset_seen && rd_state == R_LOCK);
    mech[M_ER_WRITE_RELOCK] += (!reset_seen && rd_state == R_LOCK);
    sensing_op();
    expect_reset("sensing after ER write", M_LOCKED_READ, RD);

    // 8. METADATA changed after authorisation (by DMA).
    verify(1);
    cyc(.pc(APP), .dma(1), .daddr(META + 16'd2), .rdata(d));
    check("METADATA write relocks without reset", !reset_seen && rd_state == R_LOCK);
    mech[M_META_WRITE_RELOCK] += (!reset_seen && rd_state == R_LOCK);
    sensing_op();
    expect_reset("sensing after METADATA write", M_LOCKED_READ, RD);

    // 9. DMA writes ER at the instant Verify reaches i_Auth.
    run(VR_MIN_DEF);
    cyc(.pc(I_AUTH_DEF), .dma(1), .daddr(ER_MIN + 16'h0020), .rdata(d));
    expect_reset("write at i_Auth", M_WRITE_AT_AUTH, RD);

    // 10. Jump into the middle of ER.
    verify(1);
    run(ER_MIN + 16'h0010);
    expect_reset("bad ER entry", M_BAD_ENTRY, AT);

    // 11. Leave ER from its middle, after sensing 5 bytes.
    verify(1);
    sensing_op(A_BAD_EXIT, 5);
    expect_reset("bad ER exit", M_BAD_EXIT, AT);

    // 12. Interrupt during sensing, after 10 bytes are on the stack.
    verify(1);
    sensing_op(A_IRQ, 10);
    expect_reset("irq in ER", M_IRQ_IN_ER, AT);

    // 13. DMA during sensing.
    verify(1);
    sensing_op(A_DMA, 20);
    expect_reset("DMA in ER", M_DMA_IN_ER, AT);

    // 14. DMA reads GPIO while unlocked (DMA address is outside ER's PC test).
    verify(1);
    cyc(.pc(APP), .dma(1), .daddr(P3IN), .rdata(d));
    expect_reset("DMA read of GPIO", M_DMA_GPIO, RD);

    // 15. eKR overwritten by code outside VR: from unprivileged code and from ER.
    cyc(.pc(APP), .wr(1), .addr(EKR + 16'd3), .wdata(8'h00), .rdata(d));
    expect_reset("eKR write from APP", M_EKR_WRITE_OUTSIDE_VR, WR);
    verify(1);
    sensing_op(A_EKR_WRITE, 3);
    expect_reset("eKR write from ER", M_EKR_WRITE_OUTSIDE_VR, WR);

    // 16. GPIO read by the last instruction of ER.
    verify(1);
    run(ER_MIN);
    run(ER_MIN + 16'h0002);
    cyc(.pc(ER_MAX), .rd(1), .addr(P3IN), .rdata(d));
    expect_reset("read at ER_max", M_READ_AT_ER_MAX, RD);

    // 17. An external reset after authorisation voids the authorisation.
    verify(1);
    reset_seen = 1'b0;
    boot(1);
    check("external reset relocks", rd_state == R_LOCK);
    mech[M_EXT_RESET] += (rd_state == R_LOCK);
    sensing_op();
    expect_reset("sensing after external reset", M_LOCKED_READ, RD);

    // 18. A second authorised run after all of this still works.
    verify(1);
    sensing_op();
    check("second authorised run: no reset", !reset_seen);
    check_result("second authorised run");
    if (!reset_seen) mech[M_AUTH_RUN]++;

    for (int m = 0; m < M_N; m++) begin
      $display("mechanism %-24s happened %0d times", mech_name[m], mech[m]);
      check({"mechanism ", mech_name[m], " exercised"}, mech[m] > 0);
    end
    $display("total cycles %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
