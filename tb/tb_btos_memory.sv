// tb_btos_memory -- checks the BtoS table: writes every entry with a
// pseudo-random code, reads all back in random order and checks the
// one-cycle read latency and that a read without `re` holds the output.
module tb_btos_memory;

  logic       clk = 1'b0;
  logic       we, re;
  logic [7:0] waddr, wdata, raddr, rdata;
  logic [7:0] shadow [256];
  int checks = 0, failures = 0;

  btos_memory dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a); wdata = 8'($urandom); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 512; k++) begin
      int a;
      a = $urandom_range(0, 255);
      @(negedge clk); re = 1; raddr = 8'(a);
      @(negedge clk); re = 0; raddr = 8'($urandom);
      checks++;
      if (rdata !== shadow[a]) begin
        failures++; $display("entry %0d: got %h want %h", a, rdata, shadow[a]);
      end
      @(negedge clk);
      checks++;
      if (rdata !== shadow[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
