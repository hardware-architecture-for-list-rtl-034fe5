// tb_lsc_pe: checks one processing element against the f and g formulas
// for random LL pairs (up to W-1 significant bits, as in the decoder) and
// for the corner cases of all-zero and all-maximum inputs.
module tb_lsc_pe;
  import lsc_pkg::*;
  localparam int W = 13;
  pe_func_e func;
  logic us;
  logic [1:0][W-1:0] a, b, y;
  int checks = 0, failures = 0;

  lsc_pe #(.W(W)) dut (.*);

  task automatic run(input int a0, a1, b0, b1, input bit fg, input bit u);
    int e0, e1;
    a[0] = W'(a0); a[1] = W'(a1); b[0] = W'(b0); b[1] = W'(b1);
    func = fg ? PE_G : PE_F; us = u;
    #1;
    if (!fg) begin
      e0 = (a0 + b0 < a1 + b1) ? a0 + b0 : a1 + b1;
      e1 = (a1 + b0 < a0 + b1) ? a1 + b0 : a0 + b1;
    end else begin
      e0 = (u ? a1 : a0) + b0;
      e1 = (u ? a0 : a1) + b1;
    end
    checks++;
    if (int'(y[0]) != e0 || int'(y[1]) != e1) begin
      failures++;
      $display("FAIL fg=%0d u=%0d a=%0d,%0d b=%0d,%0d y=%0d,%0d exp %0d,%0d",
               fg, u, a0, a1, b0, b1, y[0], y[1], e0, e1);
    end
  endtask

  initial begin
    int mx = (1 << (W - 1)) - 1;
    for (int fg = 0; fg < 2; fg++)
      for (int u = 0; u < 2; u++) begin
        run(0, 0, 0, 0, fg[0], u[0]);
        run(mx, mx, mx, mx, fg[0], u[0]);
      end
    repeat (2000) run($urandom % (mx + 1), $urandom % (mx + 1),
                      $urandom % (mx + 1), $urandom % (mx + 1),
                      1'($urandom), 1'($urandom));
    repeat (500) run($urandom % 8, $urandom % 8, $urandom % 8, $urandom % 8,
                     1'($urandom), 1'($urandom));
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
