// tb_versa_workloads: the three sample sensing operations run under VERSA.
//
// Each application is placed in its own ER, whose bounds unprivileged code
// first writes into the METADATA words (the monitor's er_min_i/er_max_i are
// driven from those memory words, as in a real integration).  Verify then
// runs in VR for a long stretch, reading every byte of ER (the HMAC) and
// writing the key into eKR, and passes through i_Auth; the application runs
// from ER_min to ER_max; finally unprivileged code tries to read GPIO again,
// which must reset the MCU because the authorisation is used up.
//
//   simple      : ER of 162 bytes; reads P3IN 32 times, XORs with a
//                 32-byte key, writes the result, clears its stack.
//   motion      : ER of 230 bytes; polls P1IN 64 times and drives P1OUT
//                 (a GPIO write, which VERSA does not restrict); no key.
//   temperature : ER of 498 bytes; reads a 2-byte sample from P6IN,
//                 XORs it with 2 key bytes, writes the result.
// The ER sizes approximate the binary sizes plotted in the paper's runtime
// figure; the 10^6-cycle Verify stretch is of the order of the runtimes
// plotted there.  The paper gives no more detail of the three programs; the
// traces are this testbench's own rendering of what they do.
module tb_versa_workloads;
  import versa_pkg::*;

  localparam addr_t P1IN   = 16'h0020;
  localparam addr_t P1OUT  = 16'h0021;
  localparam addr_t P3IN   = 16'h0018;
  localparam addr_t P6IN   = 16'h0034;
  localparam addr_t STACK  = 16'h0900;
  localparam addr_t RESULT = 16'h1030;
  localparam addr_t APP    = 16'h4400;
  localparam int    VERIFY_CYCLES = 1000000;

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

  logic [7:0] mem [0:65535];
  // METADATA words in memory feed the monitor.
  always_comb begin
    er_min = {mem[META_MIN_DEF + 1], mem[META_MIN_DEF]};
    er_max = {mem[META_MIN_DEF + 3], mem[META_MIN_DEF + 2]};
  end

  int checks = 0, failures = 0;
  longint cycles = 0;
  bit reset_seen;
  int gpio_reads, gpio_writes, key_reads, er_reads;
  logic [7:0] key [0:31];
  logic [7:0] sensor;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cycles);
    end
  endtask

  task automatic cyc(addr_t pc, bit rd = 0, bit wr = 0, addr_t addr = '0,
                     logic [7:0] wdata = '0, output logic [7:0] rdata);
    rdata = '0;
    sig = '0;
    sig.pc = pc; sig.r_en = rd; sig.w_en = wr; sig.d_addr = addr;
    #1;
    if (reset) reset_seen = 1'b1;
    else begin
      if (rd) rdata = (addr >= GPIO_MIN_DEF && addr <= GPIO_MAX_DEF) ? sensor : mem[addr];
      if (wr) mem[addr] = wdata;
    end
    @(posedge clk);
    cycles++;
    #1;
  endtask

  task automatic run(addr_t pc);
    logic [7:0] d;
    cyc(.pc(pc), .rdata(d));
  endtask

  task automatic boot();
    int n = 0;
    sig = '0;
    ext_reset = 1'b1;
    repeat (3) @(posedge clk);
    #1;
    ext_reset = 1'b0;
    while (reset && n < 8) begin @(posedge clk); #1; n++; end
    check("boot releases reset", !reset);
    reset_seen = 1'b0;
  endtask

  task automatic set_er(addr_t lo, addr_t hi);
    logic [7:0] d;
    cyc(.pc(APP), .wr(1), .addr(META_MIN_DEF),     .wdata(lo[7:0]),  .rdata(d));
    cyc(.pc(APP), .wr(1), .addr(META_MIN_DEF + 1), .wdata(lo[15:8]), .rdata(d));
    cyc(.pc(APP), .wr(1), .addr(META_MIN_DEF + 2), .wdata(hi[7:0]),  .rdata(d));
    cyc(.pc(APP), .wr(1), .addr(META_MIN_DEF + 3), .wdata(hi[15:8]), .rdata(d));
    check("METADATA programmed", er_min == lo && er_max == hi);
  endtask

  // Verify: VERIFY_CYCLES cycles in VR, reading ER byte by byte, then the key.
  task automatic verify(int key_len);
    logic [7:0] d;
    int span = int'(er_max) - int'(er_min) + 1;
    for (int c = 0; c < VERIFY_CYCLES; c++) begin
      addr_t pc = VR_MIN_DEF + addr_t'((c % 4096) * 2);
      if (c % 64 == 0) begin
        cyc(.pc(pc), .rd(1), .addr(er_min + addr_t'((c / 64) % span)), .rdata(d));
        er_reads++;
      end else run(pc);
    end
    for (int i = 0; i < key_len; i++) begin
      key[i] = 8'($urandom);
      cyc(.pc(VR_MIN_DEF + 16'h0100), .wr(1), .addr(EKR_MIN_DEF + addr_t'(i)), .wdata(key[i]),
          .rdata(d));
    end
    run(I_AUTH_DEF);
    run(APP);
    check("Verify leaves GPIO unlocked without reset", !reset_seen && rd_state == R_UNLOCK);
  endtask

  task automatic leave_er();
    run(er_max);
    run(APP + 16'h0040);
    check("ER left cleanly, lock closed", !reset_seen && rd_state == R_LOCK &&
          at_state == A_NOT_ER);
  endtask

  task automatic spent_token();
    logic [7:0] d;
    cyc(.pc(APP), .rd(1), .addr(P3IN), .rdata(d));
    check("GPIO read after the run resets the MCU", reset_seen);
    boot();
  endtask

  task automatic app_simple();
    logic [7:0] d, k, s [0:31];
    run(er_min);
    for (int i = 0; i < 32; i++) begin
      sensor = 8'($urandom);
      cyc(.pc(er_min + 16'h0010), .rd(1), .addr(P3IN), .rdata(s[i]));
      gpio_reads++;
      cyc(.pc(er_min + 16'h0012), .wr(1), .addr(STACK + addr_t'(i)), .wdata(s[i]), .rdata(d));
    end
    for (int i = 0; i < 32; i++) begin
      cyc(.pc(er_min + 16'h0030), .rd(1), .addr(EKR_MIN_DEF + addr_t'(i)), .rdata(k));
      key_reads++;
      cyc(.pc(er_min + 16'h0032), .wr(1), .addr(RESULT + addr_t'(i)), .wdata(s[i] ^ k), .rdata(d));
    end
    for (int i = 0; i < 36; i++)
      cyc(.pc(er_min + 16'h0050), .wr(1), .addr(STACK + addr_t'(i)), .wdata(8'h00), .rdata(d));
    leave_er();
    for (int i = 0; i < 32; i++)
      check("simple: RESULT byte", mem[RESULT + i] == (s[i] ^ key[i]));
  endtask

  task automatic app_motion();
    logic [7:0] d, v;
    int lights = 0, expect_lights = 0;
    run(er_min);
    for (int i = 0; i < 64; i++) begin
      sensor = 8'($urandom);
      cyc(.pc(er_min + 16'h0020), .rd(1), .addr(P1IN), .rdata(v));
      gpio_reads++;
      if (v[0]) expect_lights++;
      if (v[0]) begin
        cyc(.pc(er_min + 16'h0024), .wr(1), .addr(P1OUT), .wdata(8'h02), .rdata(d));
        gpio_writes++;
        lights++;
      end else
        cyc(.pc(er_min + 16'h0026), .wr(1), .addr(P1OUT), .wdata(8'h00), .rdata(d));
    end
    for (int i = 0; i < 8; i++)
      cyc(.pc(er_min + 16'h0060), .wr(1), .addr(STACK + addr_t'(i)), .wdata(8'h00), .rdata(d));
    leave_er();
    check("motion: light driven once per detected movement", lights == expect_lights);
  endtask

  task automatic app_temperature();
    logic [7:0] d, k, s [0:1];
    run(er_min);
    for (int i = 0; i < 2; i++) begin
      sensor = 8'($urandom);
      cyc(.pc(er_min + 16'h0100), .rd(1), .addr(P6IN), .rdata(s[i]));
      gpio_reads++;
    end
    for (int i = 0; i < 2; i++) begin
      cyc(.pc(er_min + 16'h0120), .rd(1), .addr(EKR_MIN_DEF + addr_t'(i)), .rdata(k));
      key_reads++;
      cyc(.pc(er_min + 16'h0122), .wr(1), .addr(RESULT + addr_t'(i)), .wdata(s[i] ^ k), .rdata(d));
    end
    for (int i = 0; i < 8; i++)
      cyc(.pc(er_min + 16'h0180), .wr(1), .addr(STACK + addr_t'(i)), .wdata(8'h00), .rdata(d));
    leave_er();
    for (int i = 0; i < 2; i++)
      check("temperature: RESULT byte", mem[RESULT + i] == (s[i] ^ key[i]));
  endtask

  initial begin
    for (int a = 0; a < 65536; a++) mem[a] = 8'h00;
    gpio_reads = 0; gpio_writes = 0; key_reads = 0; er_reads = 0;
    sensor = 8'h00;
    boot();

    set_er(16'hE000, 16'hE0A1);     // 162 bytes
    verify(32);
    app_simple();
    spent_token();

    set_er(16'hE200, 16'hE2E5);     // 230 bytes
    verify(0);
    app_motion();
    spent_token();

    set_er(16'hE400, 16'hE5F1);     // 498 bytes
    verify(2);
    app_temperature();
    spent_token();

    $display("GPIO reads %0d, GPIO writes %0d, key reads %0d, ER reads by Verify %0d",
             gpio_reads, gpio_writes, key_reads, er_reads);
    check("GPIO writes happened", gpio_writes > 0);
    check("key reads happened", key_reads > 0);
    $display("total cycles %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
