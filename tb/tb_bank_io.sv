// tb_bank_io -- checks the host port: writes reach the BtoS memory or the
// global buffer (by host_sel) one cycle later with the right address and
// data, start is only passed on while the bank is idle, and results are
// forwarded with a running index that restarts at every start.
module tb_bank_io;
  import stoch_imc_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        host_we, host_sel, host_start;
  logic [15:0] host_addr;
  inst_t       host_wdata;
  logic        res_valid;
  logic [8:0]  res_data;
  logic [15:0] res_idx;
  logic        bt_we, gb_we, start, busy, acc_valid;
  logic [7:0]  bt_waddr, bt_wdata;
  logic [9:0]  gb_waddr;
  inst_t       gb_wdata;
  logic [8:0]  acc_sum;
  int checks = 0, failures = 0;

  bank_io #(.AW(10), .SW(9)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_we = 0; host_sel = 0; host_start = 0; host_addr = 0; host_wdata = '0;
    busy = 0; acc_valid = 0; acc_sum = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      logic s;
      logic [15:0] a;
      inst_t d;
      s = 1'($urandom); a = 16'($urandom); d = inst_t'({$urandom, $urandom, $urandom});
      @(negedge clk); host_we = 1; host_sel = s; host_addr = a; host_wdata = d;
      @(negedge clk); host_we = 0;
      checks++;
      if (s) begin
        if (!gb_we || bt_we || gb_waddr != a[9:0] || gb_wdata != d) failures++;
      end else begin
        if (!bt_we || gb_we || bt_waddr != a[7:0] || bt_wdata != d[7:0]) failures++;
      end
      @(negedge clk);
      checks++; if (gb_we || bt_we) failures++;
    end
    // start while idle passes, while busy is dropped
    @(negedge clk); host_start = 1;
    @(negedge clk); host_start = 0; checks++; if (!start) failures++;
    @(negedge clk); checks++; if (start) failures++;
    busy = 1;
    @(negedge clk); host_start = 1;
    @(negedge clk); host_start = 0; checks++; if (start) failures++;
    // results with running index
    for (int r = 0; r < 20; r++) begin
      logic [8:0] v;
      v = 9'($urandom_range(0, 256));
      @(negedge clk); acc_valid = 1; acc_sum = v;
      @(negedge clk); acc_valid = 0; acc_sum = 9'($urandom);
      checks++;
      if (!res_valid || res_data != v || res_idx != 16'(r)) begin
        failures++; $display("result %0d: %b %0d %0d", r, res_valid, res_data, res_idx);
      end
      @(negedge clk); checks++; if (res_valid) failures++;
    end
    // a new start restarts the index
    busy = 0;
    @(negedge clk); host_start = 1;
    @(negedge clk); host_start = 0; busy = 1;
    @(negedge clk); acc_valid = 1; acc_sum = 9'd5;
    @(negedge clk); acc_valid = 0;
    checks++; if (!res_valid || res_idx != 0 || res_data != 9'd5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
