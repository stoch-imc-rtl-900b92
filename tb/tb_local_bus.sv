// tb_local_bus -- checks that the selected subarray bit, and only it,
// reaches the bus, for random bit patterns and every select value.
module tb_local_bus;

  localparam int unsigned M = 16;

  logic         clk = 1'b0;
  logic [M-1:0] sa_bit;
  logic [3:0]   sel;
  logic         bus_bit;
  int checks = 0, failures = 0;

  local_bus #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      sa_bit = M'($urandom);
      for (int s = 0; s < M; s++) begin
        sel = 4'(s);
        @(posedge clk);
        checks++;
        if (bus_bit !== sa_bit[s]) failures++;
      end
    end
    // one-hot patterns: exactly one select value gives '1'
    for (int h = 0; h < M; h++) begin
      sa_bit = M'(1) << h;
      for (int s = 0; s < M; s++) begin
        sel = 4'(s);
        @(posedge clk);
        checks++;
        if (bus_bit !== (s == h)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
