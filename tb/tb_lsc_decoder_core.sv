// tb_lsc_decoder_core: checks that every PE lane of a decoder core computes
// f or g of its own inputs and partial sum, and that the metric output is
// lane 0, for random stimulus.
module tb_lsc_decoder_core;
  import lsc_pkg::*;
  localparam int P = 8, W = 13;
  pe_func_e func;
  logic [P-1:0] us;
  logic [P-1:0][1:0][W-1:0] a, b, y;
  logic [1:0][W-1:0] metric;
  int checks = 0, failures = 0;

  lsc_decoder_core #(.P(P), .W(W)) dut (.*);

  initial begin
    repeat (500) begin
      bit fg;
      fg = 1'($urandom);
      func = fg ? PE_G : PE_F;
      us = P'($urandom);
      for (int j = 0; j < P; j++)
        for (int t = 0; t < 2; t++) begin
          a[j][t] = W'($urandom % 4096);
          b[j][t] = W'($urandom % 4096);
        end
      #1;
      for (int j = 0; j < P; j++) begin
        automatic int a0 = a[j][0], a1 = a[j][1], b0 = b[j][0], b1 = b[j][1];
        int e0, e1;
        if (!fg) begin
          e0 = (a0 + b0 < a1 + b1) ? a0 + b0 : a1 + b1;
          e1 = (a1 + b0 < a0 + b1) ? a1 + b0 : a0 + b1;
        end else begin
          e0 = (us[j] ? a1 : a0) + b0;
          e1 = (us[j] ? a0 : a1) + b1;
        end
        checks++;
        if (int'(y[j][0]) != e0 || int'(y[j][1]) != e1) begin
          failures++;
          if (failures < 5) $display("FAIL lane %0d", j);
        end
      end
      checks++;
      if (metric != y[0]) failures++;
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
