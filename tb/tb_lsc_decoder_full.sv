// tb_lsc_decoder_full: lsc_decoder at its default size.
//
// N = 1024, L = 2, P = 64, Q_ch = 3: the (1024, 512) code of the reference
// design. Decodes six codewords, from 1 to 3 dB Eb/N0, and checks them
// against the behavioural list decoder, including the cycle count of
// 2592 + 1 cycles per codeword (see tb_lsc_env).
module tb_lsc_decoder_full;
  import lsc_pkg::*;

  localparam int N = N_DEF, L = L_DEF, P = P_DEF, QCH = QCH_DEF;
  localparam int LOGN = $clog2(N), QMAX = QCH + LOGN, LW = idx_w(L);
  localparam int RW = $clog2(N / P);

  logic clk, rst_n, ld_we, start, busy, done;
  logic [RW-1:0] ld_row;
  logic [P-1:0][1:0][QCH-1:0] ld_ll;
  logic [P-1:0] ld_frozen;
  logic [N-1:0] dec_bits;
  logic [QMAX-1:0] dec_metric;

  lsc_decoder dut (.*);

  tb_lsc_env #(.N(N), .L(L), .P(P), .QCH(QCH), .FRAMES(6),
               .EBN0_LO(1.0), .EBN0_HI(3.0)) env (
    .clk, .rst_n, .ld_we, .ld_row, .ld_ll, .ld_frozen, .start, .busy, .done,
    .dec_bits, .dec_metric,
    .pr_commit(dut.commit), .pr_sel_sort(dut.sel_sort),
    .pr_mem_we(dut.mem_we), .pr_from_ch(dut.from_ch), .pr_ptr(dut.ptr),
    .pr_parent(dut.sel_parent)
  );
endmodule
