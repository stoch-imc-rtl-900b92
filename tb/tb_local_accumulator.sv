// tb_local_accumulator -- feeds random bit sequences of length M (and with
// idle cycles in between) and checks that the register counts the ones,
// that clear empties it and that its width holds the full count M.
module tb_local_accumulator;

  localparam int unsigned M  = 16;
  localparam int unsigned CW = $clog2(M + 1);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          clr, en, bit_in;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;

  local_accumulator #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; en = 0; bit_in = 0;
    checks++; if (CW != 5) failures++;   // floor(log2 16)+1
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int ones;
      @(negedge clk); clr = 1; en = 0;
      @(negedge clk); clr = 0;
      checks++; if (count !== '0) failures++;
      ones = 0;
      for (int j = 0; j < M; j++) begin
        logic b;
        b = (t == 0) ? 1'b1 : 1'($urandom);
        en = 1; bit_in = b; ones += int'(b);
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin en = 0; bit_in = 1; @(negedge clk); end
      end
      en = 0;
      @(negedge clk);
      checks++;
      if (int'(count) != ones) begin
        failures++; $display("round %0d: count %0d want %0d", t, count, ones);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
