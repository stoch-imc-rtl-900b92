// tb_global_bus -- checks that the selected group count reaches the global
// accumulator input for random counts and every select value.
module tb_global_bus;

  localparam int unsigned N = 16;
  localparam int unsigned W = 5;

  logic               clk = 1'b0;
  logic [N-1:0][W-1:0] cnt;
  logic [3:0]          sel;
  logic [W-1:0]        bus_cnt;
  int checks = 0, failures = 0;

  global_bus #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) cnt[i] = W'($urandom_range(0, 16));
      for (int s = 0; s < N; s++) begin
        sel = 4'(s);
        @(posedge clk);
        checks++;
        if (bus_cnt !== cnt[s]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
