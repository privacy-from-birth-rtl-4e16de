// access_decode: region and access predicates for the VERSA monitor.
//
// Purely combinational.  From one sample of the monitored MCU signals and the
// current ER bounds it computes the predicates the three VERSA FSMs act on:
//
//   Read_Mem(R)  = (R_en   & D_addr   in R) | (DMA_en & DMA_addr in R)
//   Write_Mem(R) = (W_en   & D_addr   in R) | (DMA_en & DMA_addr in R)
//
// for R = GPIO and eKR (reads) and R = ER, METADATA and eKR (writes), plus
// the program-counter tests PC in ER, PC in VR, PC == ER_min, PC == ER_max,
// ER_min < PC < ER_max, PC == i_Auth and PC == 0.  "x in [lo, hi]" is
// inclusive at both ends.  The two macros are the paper's; because the DMA
// signals carry no direction, any DMA access to a region counts as both a
// read and a write of it, as in the paper.
//
// The fixed regions (GPIO, eKR, METADATA, VR) and i_Auth are parameters;
// ER = [er_min, er_max] is an input because ER_min and ER_max live in the
// METADATA words of memory and software may change them.  The default
// addresses are set in versa_pkg.
module access_decode
  import versa_pkg::*;
#(
  parameter addr_t GPIO_MIN = GPIO_MIN_DEF,
  parameter addr_t GPIO_MAX = GPIO_MAX_DEF,
  parameter addr_t EKR_MIN  = EKR_MIN_DEF,
  parameter addr_t EKR_MAX  = EKR_MAX_DEF,
  parameter addr_t META_MIN = META_MIN_DEF,
  parameter addr_t META_MAX = META_MAX_DEF,
  parameter addr_t VR_MIN   = VR_MIN_DEF,
  parameter addr_t VR_MAX   = VR_MAX_DEF,
  parameter addr_t I_AUTH   = I_AUTH_DEF
) (
  input  mcu_sig_t sig_i,
  input  addr_t    er_min_i,
  input  addr_t    er_max_i,
  output access_t  acc_o
);

  function automatic logic in_range(addr_t a, addr_t lo, addr_t hi);
    return (a >= lo) && (a <= hi);
  endfunction

  // Read_Mem(R) / Write_Mem(R) for a region [lo, hi].
  function automatic logic read_mem(mcu_sig_t s, addr_t lo, addr_t hi);
    return (s.r_en && in_range(s.d_addr, lo, hi)) ||
           (s.dma_en && in_range(s.dma_addr, lo, hi));
  endfunction

  function automatic logic write_mem(mcu_sig_t s, addr_t lo, addr_t hi);
    return (s.w_en && in_range(s.d_addr, lo, hi)) ||
           (s.dma_en && in_range(s.dma_addr, lo, hi));
  endfunction

  always_comb begin
    acc_o.rd_gpio   = read_mem(sig_i, GPIO_MIN, GPIO_MAX);
    acc_o.rd_ekr    = read_mem(sig_i, EKR_MIN, EKR_MAX);
    acc_o.wr_er     = write_mem(sig_i, er_min_i, er_max_i);
    acc_o.wr_meta   = write_mem(sig_i, META_MIN, META_MAX);
    acc_o.wr_ekr    = write_mem(sig_i, EKR_MIN, EKR_MAX);
    acc_o.pc_in_er  = in_range(sig_i.pc, er_min_i, er_max_i);
    acc_o.pc_in_vr  = in_range(sig_i.pc, VR_MIN, VR_MAX);
    acc_o.pc_er_min = (sig_i.pc == er_min_i);
    acc_o.pc_er_max = (sig_i.pc == er_max_i);
    acc_o.pc_mid_er = (sig_i.pc > er_min_i) && (sig_i.pc < er_max_i);
    acc_o.pc_auth   = (sig_i.pc == I_AUTH);
    acc_o.pc_zero   = (sig_i.pc == '0);
    acc_o.irq       = sig_i.irq;
    acc_o.dma_en    = sig_i.dma_en;
  end

endmodule
