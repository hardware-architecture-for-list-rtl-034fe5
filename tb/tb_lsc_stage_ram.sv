// tb_lsc_stage_ram: checks a multi-row stage RAM (32 entries, P = 8, W = 5)
// and a single-row one (4 entries): rows written with random values wider
// than W must read back truncated to W bits, zero-extended, on the a/b
// ports (a/b rows for the wide RAM, the two halves for the narrow one).
module tb_lsc_stage_ram;
  localparam int P = 8, W = 5, QMAX = 8, RW = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we1, we2;
  logic [RW-1:0] wr_row, ra, rb;
  logic [P-1:0][1:0][QMAX-1:0] wd, a1, b1, a2, b2;
  int shadow1 [32][2];
  int shadow2 [4][2];

  lsc_stage_ram #(.ENTRIES(32), .P(P), .W(W), .QMAX(QMAX), .RW(RW)) d1 (
    .clk, .we(we1), .wr_row, .wr_data(wd), .rd_row_a(ra), .rd_row_b(rb),
    .rd_a(a1), .rd_b(b1));
  lsc_stage_ram #(.ENTRIES(4), .P(P), .W(W), .QMAX(QMAX), .RW(RW)) d2 (
    .clk, .we(we2), .wr_row, .wr_data(wd), .rd_row_a(ra), .rd_row_b(rb),
    .rd_a(a2), .rd_b(b2));

  initial begin
    we1 = 0; we2 = 0; wr_row = 0; ra = 0; rb = 0; wd = '0;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      wr_row = RW'($urandom);
      for (int j = 0; j < P; j++)
        for (int t = 0; t < 2; t++) wd[j][t] = QMAX'($urandom);
      we1 = (it < 8) || ($urandom % 2);
      we2 = (it < 8) || ($urandom % 2);
      if (it < 4) wr_row = RW'(it);
      @(posedge clk);
      #1;
      if (we1) for (int j = 0; j < P; j++) for (int t = 0; t < 2; t++)
        shadow1[int'(wr_row)*P+j][t] = wd[j][t] % (1 << W);
      if (we2) for (int j = 0; j < 4; j++) for (int t = 0; t < 2; t++)
        shadow2[j][t] = wd[j][t] % (1 << W);
      we1 = 0; we2 = 0;
      if (it >= 4) begin
        ra = RW'($urandom); rb = RW'($urandom);
        #1;
        for (int j = 0; j < P; j++) for (int t = 0; t < 2; t++) begin
          checks += 4;
          if (int'(a1[j][t]) != shadow1[int'(ra)*P+j][t]) failures++;
          if (int'(b1[j][t]) != shadow1[int'(rb)*P+j][t]) failures++;
          if (int'(a2[j][t]) != ((j < 2) ? shadow2[j][t] : 0)) failures++;
          if (int'(b2[j][t]) != ((j < 2) ? shadow2[j+2][t] : 0)) failures++;
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
