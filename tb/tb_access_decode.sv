// tb_access_decode: self-checking test of the region/access decoder.
//
// Drives random and boundary samples of the monitored MCU signals and ER
// bounds and compares every predicate with a reference computed here from
// the definitions Read_Mem(R) = (R_en & D_addr in R) | (DMA_en & DMA_addr in
// R) and Write_Mem(R) = (W_en & D_addr in R) | (DMA_en & DMA_addr in R), with
// inclusive region bounds.  The decoder is combinational; a small clock only
// paces the test and feeds the watchdog.
module tb_access_decode;
  import versa_pkg::*;

  logic     clk = 1'b0;
  mcu_sig_t sig;
  addr_t    er_min, er_max;
  access_t  acc;
  int       checks = 0, failures = 0;

  access_decode dut (.sig_i(sig), .er_min_i(er_min), .er_max_i(er_max), .acc_o(acc));

  always #5 clk = ~clk;

  // Reference: integer comparisons, regions passed as [lo, hi].
  function automatic bit inr(int a, int lo, int hi);
    return !(a < lo) && !(a > hi);
  endfunction

  task automatic check_bit(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b (pc=%h d=%h dma=%h er=[%h,%h])",
               what, got, exp, sig.pc, sig.d_addr, sig.dma_addr, int'(er_min), int'(er_max));
    end
  endtask

  task automatic check_all();
    bit cpu_r, cpu_w, dma;
    #1;
    cpu_r = sig.r_en; cpu_w = sig.w_en; dma = sig.dma_en;
    check_bit("rd_gpio", acc.rd_gpio,
      (cpu_r && inr(int'(sig.d_addr), 'h18, 'h37)) || (dma && inr(int'(sig.dma_addr), 'h18, 'h37)));
    check_bit("rd_ekr", acc.rd_ekr,
      (cpu_r && inr(int'(sig.d_addr), 'h360, 'h37f)) || (dma && inr(int'(sig.dma_addr), 'h360, 'h37f)));
    check_bit("wr_er", acc.wr_er,
      (cpu_w && inr(int'(sig.d_addr), int'(er_min), int'(er_max))) || (dma && inr(int'(sig.dma_addr), int'(er_min), int'(er_max))));
    check_bit("wr_meta", acc.wr_meta,
      (cpu_w && inr(int'(sig.d_addr), 'h380, 'h383)) || (dma && inr(int'(sig.dma_addr), 'h380, 'h383)));
    check_bit("wr_ekr", acc.wr_ekr,
      (cpu_w && inr(int'(sig.d_addr), 'h360, 'h37f)) || (dma && inr(int'(sig.dma_addr), 'h360, 'h37f)));
    check_bit("pc_in_er", acc.pc_in_er, inr(int'(sig.pc), int'(er_min), int'(er_max)));
    check_bit("pc_in_vr", acc.pc_in_vr, inr(int'(sig.pc), 'ha000, 'hdfff));
    check_bit("pc_er_min", acc.pc_er_min, int'(sig.pc) == int'(er_min));
    check_bit("pc_er_max", acc.pc_er_max, int'(sig.pc) == int'(er_max));
    check_bit("pc_mid_er", acc.pc_mid_er, (sig.pc > er_min) && (sig.pc < er_max));
    check_bit("pc_auth", acc.pc_auth, int'(sig.pc) == 'hdffe);
    check_bit("pc_zero", acc.pc_zero, sig.pc == 0);
    check_bit("irq", acc.irq, sig.irq);
    check_bit("dma_en", acc.dma_en, sig.dma_en);
  endtask

  // Pick an address near one of the interesting region edges.
  function automatic addr_t near_edge();
    addr_t edges[12] = '{16'h0017, 16'h0018, 16'h0037, 16'h0038, 16'h035f,
                         16'h0360, 16'h037f, 16'h0380, 16'h0383, 16'h0384,
                         16'h9fff, 16'hdffe};
    int    k = int'($urandom_range(0, 13));
    if (k < 12) return edges[k];
    if (k == 12) return er_min + addr_t'($urandom_range(0, 2)) - 16'd1;
    return er_max + addr_t'($urandom_range(0, 2)) - 16'd1;
  endfunction

  initial begin
    er_min = 16'he000;
    er_max = 16'he0a0;
    sig    = '0;
    // Directed: CPU read of P3IN, DMA access to eKR, write of ER_max word.
    sig.r_en = 1'b1; sig.d_addr = 16'h0018; check_all();
    sig = '0; sig.dma_en = 1'b1; sig.dma_addr = 16'h037f; check_all();
    sig = '0; sig.w_en = 1'b1; sig.d_addr = 16'h0382; check_all();
    sig = '0; sig.w_en = 1'b1; sig.d_addr = 16'he0a0; sig.pc = 16'he000; check_all();
    sig = '0; sig.r_en = 1'b1; sig.d_addr = 16'h0038; sig.pc = 16'hdffe; check_all();
    // Random samples, mostly near region edges.
    repeat (4000) begin
      @(posedge clk);
      if ($urandom_range(0, 9) == 0) begin
        er_min = addr_t'($urandom);
        er_max = er_min + addr_t'($urandom_range(0, 600));
      end
      sig.r_en     = 1'($urandom);
      sig.w_en     = 1'($urandom);
      sig.dma_en   = 1'($urandom);
      sig.irq      = 1'($urandom);
      sig.d_addr   = ($urandom_range(0, 3) != 0) ? near_edge() : addr_t'($urandom);
      sig.dma_addr = ($urandom_range(0, 3) != 0) ? near_edge() : addr_t'($urandom);
      case ($urandom_range(0, 4))
        0: sig.pc = er_min;
        1: sig.pc = er_max;
        2: sig.pc = near_edge();
        3: sig.pc = 16'h0000;
        default: sig.pc = addr_t'($urandom);
      endcase
      check_all();
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
