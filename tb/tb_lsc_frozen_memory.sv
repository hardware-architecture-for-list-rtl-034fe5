// tb_lsc_frozen_memory: loads a random frozen mask (N = 64, P = 8) and reads
// back the bit of every index.
module tb_lsc_frozen_memory;
  localparam int N = 64, P = 8, LOGN = $clog2(N), RW = $clog2(N / P);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_we, frozen;
  logic [RW-1:0] ld_row;
  logic [P-1:0] ld_data;
  logic [LOGN-1:0] rd_idx;
  bit shadow [N];

  lsc_frozen_memory #(.N(N), .P(P)) dut (.*);

  initial begin
    ld_we = 0; ld_row = 0; ld_data = '0; rd_idx = '0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int r = 0; r < N / P; r++) begin
        @(negedge clk);
        ld_we = 1; ld_row = RW'(r); ld_data = P'($urandom);
        for (int j = 0; j < P; j++) shadow[r*P+j] = ld_data[j];
      end
      @(negedge clk);
      ld_we = 0;
      for (int i = 0; i < N; i++) begin
        rd_idx = LOGN'(i);
        #1;
        checks++;
        if (frozen != shadow[i]) failures++;
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
