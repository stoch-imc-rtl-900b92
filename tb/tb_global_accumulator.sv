// tb_global_accumulator -- adds N random group counts (0..M) and checks the
// sum, including the all-ones case N*M = 256 that needs the full 9 bits.
module tb_global_accumulator;

  localparam int unsigned N  = 16;
  localparam int unsigned M  = 16;
  localparam int unsigned CW = $clog2(M + 1);
  localparam int unsigned SW = $clog2(N * M + 1);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          clr, en;
  logic [CW-1:0] cnt_in;
  logic [SW-1:0] sum;
  int checks = 0, failures = 0;

  global_accumulator #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; en = 0; cnt_in = 0;
    checks++; if (SW != 9) failures++;   // floor(log2 256)+1
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int total;
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      total = 0;
      for (int i = 0; i < N; i++) begin
        int c;
        c = (t == 0) ? M : $urandom_range(0, M);
        en = 1; cnt_in = CW'(c); total += c;
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin en = 0; cnt_in = CW'(M); @(negedge clk); end
      end
      en = 0;
      @(negedge clk);
      checks++;
      if (int'(sum) != total) begin
        failures++; $display("round %0d: sum %0d want %0d", t, sum, total);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
