// tb_lsc_channel_memory: loads N = 64 random channel LL pairs (Q_ch = 3)
// row by row and reads them back as the stage logN-1 update does: pair j of
// part p on port a and pair j + N/2 on port b, zero-extended to Q_max.
module tb_lsc_channel_memory;
  localparam int N = 64, P = 8, QCH = 3;
  localparam int LOGN = $clog2(N), QMAX = QCH + LOGN, RW = $clog2(N / P);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_we;
  logic [RW-1:0] ld_row, rd_row_a, rd_row_b;
  logic [P-1:0][1:0][QCH-1:0] ld_data;
  logic [P-1:0][1:0][QMAX-1:0] rd_a, rd_b;
  int shadow [N][2];

  lsc_channel_memory #(.N(N), .P(P), .QCH(QCH)) dut (.*);

  initial begin
    ld_we = 0; ld_row = 0; rd_row_a = 0; rd_row_b = 0; ld_data = '0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int r = 0; r < N / P; r++) begin
        @(negedge clk);
        ld_we = 1; ld_row = RW'(r);
        for (int j = 0; j < P; j++) for (int t = 0; t < 2; t++) begin
          ld_data[j][t] = QCH'($urandom);
          shadow[r*P+j][t] = ld_data[j][t];
        end
      end
      @(negedge clk);
      ld_we = 0;
      for (int p = 0; p < N / 2 / P; p++) begin
        rd_row_a = RW'(p);
        rd_row_b = RW'(p + N / 2 / P);
        #1;
        for (int j = 0; j < P; j++) for (int t = 0; t < 2; t++) begin
          checks++;
          if (int'(rd_a[j][t]) != shadow[p*P+j][t] ||
              int'(rd_b[j][t]) != shadow[p*P+j+N/2][t]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
