// tb_lsc_ll_mux: checks that the LL multiplexer forwards the memory named
// by sel, or the channel memory when from_ch is set.
module tb_lsc_ll_mux;
  import lsc_pkg::*;
  localparam int L = 4, P = 2, QMAX = 8, LW = idx_w(L);
  logic [L-1:0][P-1:0][1:0][QMAX-1:0] mem_a, mem_b;
  logic [P-1:0][1:0][QMAX-1:0] ch_a, ch_b, a, b;
  logic from_ch;
  logic [LW-1:0] sel;
  int checks = 0, failures = 0;

  lsc_ll_mux #(.L(L), .P(P), .QMAX(QMAX)) dut (.*);

  initial begin
    repeat (400) begin
      for (int l = 0; l < L; l++)
        for (int j = 0; j < P; j++)
          for (int t = 0; t < 2; t++) begin
            mem_a[l][j][t] = QMAX'($urandom);
            mem_b[l][j][t] = QMAX'($urandom);
          end
      for (int j = 0; j < P; j++)
        for (int t = 0; t < 2; t++) begin
          ch_a[j][t] = QMAX'($urandom);
          ch_b[j][t] = QMAX'($urandom);
        end
      from_ch = ($urandom % 4) == 0;
      sel = LW'($urandom);
      #1;
      checks++;
      if (from_ch ? (a != ch_a || b != ch_b)
                  : (a != mem_a[sel] || b != mem_b[sel])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
