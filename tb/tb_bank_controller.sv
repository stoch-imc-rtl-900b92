// tb_bank_controller -- runs a short program through the controller with the
// real global buffer and BtoS memory and checks every command it broadcasts:
// fields, order, the BtoS lookup of a stochastic write, the accumulation
// sequence (buffer load and clear, then exactly M local cycles with lsel
// 0..M-1, then exactly N global cycles with gsel 0..N-1, then res_valid),
// the step count (1 per preset/write/logic, N+M per accumulation) and done.
module tb_bank_controller;
  import stoch_imc_pkg::*;

  localparam int unsigned N = 16, M = 16, DEPTH = 1024;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        start, busy, done;
  logic        gb_re, gb_we, bt_re, bt_we;
  logic [9:0]  gb_raddr, gb_waddr;
  inst_t       gb_rdata, gb_wdata;
  logic [7:0]  bt_raddr, bt_waddr, bt_rdata, bt_wdata;
  sa_cmd_t     cmd;
  logic        rd_en, lacc_clr, lacc_en, gacc_clr, gacc_en, res_valid;
  addr_t       rd_row, rd_col;
  logic [3:0]  lsel, gsel;
  logic [31:0] steps;
  int checks = 0, failures = 0;

  global_buffer #(.DEPTH(DEPTH)) u_gb (.clk, .we(gb_we), .waddr(gb_waddr), .wdata(gb_wdata),
                                       .re(gb_re), .raddr(gb_raddr), .rdata(gb_rdata));
  btos_memory u_bt (.clk, .we(bt_we), .waddr(bt_waddr), .wdata(bt_wdata),
                    .re(bt_re), .raddr(bt_raddr), .rdata(bt_rdata));
  bank_controller #(.N(N), .M(M), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic inst_t mk(iop_e op, gate_e g, int r0, int r1, int sh, int c0, int c1, int oc, int imm);
    inst_t i;
    i = '0;
    i.op = op; i.gate = g; i.row_first = addr_t'(r0); i.row_last = addr_t'(r1);
    i.row_shift = 9'(sh); i.in_col[0] = addr_t'(c0); i.in_col[1] = addr_t'(c1);
    i.out_col = addr_t'(oc); i.imm = 8'(imm);
    return i;
  endfunction

  inst_t prog [8];
  // commands seen on the broadcast
  sa_cmd_t seen [$];
  int lcyc, gcyc, nres, nrd, lbad, gbad;

  always @(posedge clk) if (rst_n) begin
    if (cmd.op != SA_NOP) seen.push_back(cmd);
    if (rd_en) begin
      nrd++;
      if (!lacc_clr || !gacc_clr || rd_row != 8'd7 || rd_col != 8'd3) lbad++;
      lcyc = 0; gcyc = 0;
    end
    if (lacc_en) begin if (int'(lsel) != lcyc || gacc_en) lbad++; lcyc++; end
    if (gacc_en) begin if (int'(gsel) != gcyc || lcyc != int'(M)) gbad++; gcyc++; end
    if (res_valid) begin nres++; if (gcyc != int'(N) || lcyc != int'(M)) gbad++; end
  end

  initial begin
    int t0, t_done;
    start = 0; gb_we = 0; bt_we = 0; gb_waddr = 0; bt_waddr = 0; gb_wdata = '0; bt_wdata = 0;
    nres = 0; nrd = 0; lbad = 0; gbad = 0; lcyc = 0; gcyc = 0;
    prog[0] = mk(I_PRESET, G_BUFF, 0, 15, 0, 0, 0, 3, 0);
    prog[1] = mk(I_SBG,    G_BUFF, 2, 9,  0, 0, 0, 3, 37);
    prog[2] = mk(I_NOP,    G_BUFF, 0, 0,  0, 0, 0, 0, 0);
    prog[3] = mk(I_LOGIC,  G_NAND, 1, 14, -2, 3, 4, 5, 0);
    prog[4] = mk(I_ACC,    G_BUFF, 7, 7,  0, 3, 0, 0, 0);
    prog[5] = mk(I_LOGIC,  G_MAJ3N, 0, 255, 3, 1, 2, 9, 0);
    prog[6] = mk(I_HALT,   G_BUFF, 0, 0,  0, 0, 0, 0, 0);
    prog[7] = mk(I_PRESET, G_BUFF, 0, 0,  0, 0, 0, 1, 1);   // after HALT: never issued
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < 8; a++) begin
      @(negedge clk); gb_we = 1; gb_waddr = 10'(a); gb_wdata = prog[a];
    end
    for (int a = 0; a < 256; a++) begin
      @(negedge clk); gb_we = 0; bt_we = 1; bt_waddr = 8'(a); bt_wdata = 8'(a ^ 8'h5a);
    end
    @(negedge clk); bt_we = 0;
    checks++; if (busy) failures++;
    start = 1; @(negedge clk); start = 0;
    t0 = $time;
    while (!done) @(negedge clk);
    t_done = ($time - t0) / 10;
    @(negedge clk);
    checks++; if (busy) failures++;

    // four commands, in program order
    checks++;
    if (seen.size() != 4) begin failures++; $display("saw %0d commands", seen.size()); end
    else begin
      checks++; if (seen[0].op != SA_PRESET || seen[0].out_col != 3 || seen[0].row_last != 15 || seen[0].data[0] != 1'b0) failures++;
      checks++; if (seen[1].op != SA_SBG || seen[1].data != (8'd37 ^ 8'h5a) || seen[1].row_first != 2 || seen[1].row_last != 9) failures++;
      checks++; if (seen[2].op != SA_LOGIC || seen[2].gate != G_NAND || seen[2].row_shift != -9'sd2 ||
                    seen[2].in_col[0] != 3 || seen[2].in_col[1] != 4 || seen[2].out_col != 5) failures++;
      checks++; if (seen[3].op != SA_LOGIC || seen[3].gate != G_MAJ3N || seen[3].row_last != 255) failures++;
    end
    checks++; if (nrd != 1 || lbad != 0) begin failures++; $display("local phase wrong %0d %0d", nrd, lbad); end
    checks++; if (nres != 1 || gbad != 0) begin failures++; $display("global phase wrong %0d %0d", nres, gbad); end
    checks++; if (lcyc != int'(M) || gcyc != int'(N)) begin failures++; $display("acc cycles %0d %0d", lcyc, gcyc); end
    checks++; if (steps != 32'(4 + N + M)) begin failures++; $display("steps %0d", steps); end
    $display("program took %0d cycles", t_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
