// tb_global_buffer -- writes random instructions into the program store and
// reads them back in random order (one-cycle read latency).
module tb_global_buffer;
  import stoch_imc_pkg::*;

  localparam int unsigned DEPTH = 1024;

  logic        clk = 1'b0;
  logic        we, re;
  logic [9:0]  waddr, raddr;
  inst_t       wdata, rdata;
  inst_t       shadow [DEPTH];
  int checks = 0, failures = 0;

  global_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic inst_t rnd_inst();
    logic [95:0] r;
    r = {$urandom, $urandom, $urandom};
    return inst_t'(r[$bits(inst_t)-1:0]);
  endfunction

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 10'(a); wdata = rnd_inst(); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 2000; k++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      @(negedge clk); re = 1; raddr = 10'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== shadow[a]) begin
        failures++; if (failures < 5) $display("word %0d mismatch", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
