// tb_lsc_ll_memory: fills every stage of an LL state memory (N = 64, P = 8,
// Q_ch = 3) with random values, each fitting the width Q_ch + logN - s of its
// stage, then reads every stage 1..logN-1 the way the decoder does (rows p
// and p + 2^(s-1)/P, or the two halves of a single-row stage) and compares
// with a shadow copy. Values written beyond a stage's width must come back
// truncated; writes to another stage must leave a stage untouched.
module tb_lsc_ll_memory;
  localparam int N = 64, P = 8, QCH = 3;
  localparam int LOGN = $clog2(N), QMAX = QCH + LOGN;
  localparam int SW = $clog2(LOGN + 1), RW = $clog2(N / P);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [SW-1:0] wr_stage, rd_stage;
  logic [RW-1:0] wr_row, rd_row_a, rd_row_b;
  logic [P-1:0][1:0][QMAX-1:0] wr_data, rd_a, rd_b;
  int shadow [LOGN][N][2];

  lsc_ll_memory #(.N(N), .P(P), .QCH(QCH)) dut (.*);

  initial begin
    we = 0; wr_stage = 0; rd_stage = 1; wr_row = 0; rd_row_a = 0;
    rd_row_b = 0; wr_data = '0;
    for (int rep = 0; rep < 3; rep++) begin
      for (int s = 0; s < LOGN; s++)
        for (int r = 0; r < (((1 << s) > P) ? (1 << s) / P : 1); r++) begin
          @(negedge clk);
          we = 1; wr_stage = SW'(s); wr_row = RW'(r);
          for (int j = 0; j < P; j++) for (int t = 0; t < 2; t++) begin
            automatic int v = $urandom % (1 << QMAX);
            wr_data[j][t] = QMAX'(v);
            if (j < (1 << s))
              shadow[s][r*P+j][t] = v % (1 << (QCH + LOGN - s));
          end
        end
      @(negedge clk);
      we = 0;
      for (int s = 1; s < LOGN; s++) begin
        automatic int h = 1 << (s - 1);   // nodes of stage s-1
        for (int p = 0; p < ((h > P) ? h / P : 1); p++) begin
          rd_stage = SW'(s);
          rd_row_a = RW'(p);
          rd_row_b = (h >= P) ? RW'(p + h / P) : '0;
          #1;
          for (int j = 0; j < P; j++) for (int t = 0; t < 2; t++) begin
            automatic int ea = (j < h) ? shadow[s][p*((h >= P) ? P : 0) + j][t] : 0;
            automatic int eb = (j < h) ? shadow[s][p*((h >= P) ? P : 0) + j + h][t] : 0;
            checks++;
            if (int'(rd_a[j][t]) != ea || int'(rd_b[j][t]) != eb) begin
              failures++;
              if (failures < 5)
                $display("FAIL stage %0d part %0d lane %0d", s, p, j);
            end
          end
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
