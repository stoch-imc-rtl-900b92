// tb_workloads -- runs three of the evaluated stochastic workloads on a
// full-size bank (every parameter at its default) and checks the binary
// results against the exact expected values within statistical bounds.
//
// 1. Stochastic square root: Y = OR(OR(AND(A1, C1), A2), C2) with C1 = 0.67,
//    C2 = 0.18 and A1, A2 two independently generated bitstreams of the same
//    value a. Expected value 1 - (1 - C1 a)(1 - a)(1 - C2), which
//    approximates sqrt(a). Sixteen values of a, one per row, computed in the
//    same three row-parallel logic steps.
// 2. Object location (Bayesian inference): for each grid point the product
//    of six conditional probabilities P(B1) P(D1) P(B2) P(D2) P(B3) P(D3),
//    a chain of five AND gates. One batch of 16 grid points, one per row,
//    computed in five row-parallel logic steps, as in the paper's
//    16-point partitioning.
// 3. Pipelined long bitstream: a 512-bit multiplication (K = 2 sub-bitstreams
//    of N*M = 256 bits) on one bank. The program generates and multiplies
//    the first 256 bits, accumulates them, then regenerates fresh bits in
//    the same cells and repeats; the host adds the two partial counts.
// Gate chains preset the next gate's output cell during the current gate, so
// a chain of k gates takes 1 preset + k logic steps.
// Every subarray computes one bit of each 256-bit output bitstream; the
// results are read by stochastic-to-binary accumulation (N+M steps each).
// The bound per result is 5 standard deviations of a binomial count plus
// 4% of full scale for the quantisation of the pulse-code table.
module tb_workloads;
  import stoch_imc_pkg::*;

  localparam int R = 16;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        host_we, host_sel, host_start;
  logic [15:0] host_addr;
  inst_t       host_wdata;
  logic        res_valid;
  logic [8:0]  res_data;
  logic [15:0] res_idx;
  logic        busy, done;
  logic [31:0] steps;

  int checks = 0, failures = 0;

  stoch_imc_bank dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_sw(int code);
    real vp, tau;
    if (code == 0) return 0.0;
    vp  = 0.25 + code * 0.0005;
    tau = 1.0 * $exp(40.0 * (1.0 - vp / 0.31959));
    return 1.0 - $exp(-4.0 / tau);
  endfunction

  function automatic logic [7:0] calib(int v);
    real target, best_err, err;
    int best;
    if (v == 0) return 8'd0;
    target = real'(v) / 256.0;
    best = 1; best_err = 2.0;
    for (int c = 1; c < 256; c++) begin
      err = p_sw(c) - target;
      if (err < 0.0) err = -err;
      if (err < best_err) begin best_err = err; best = c; end
    end
    return 8'(best);
  endfunction

  inst_t prog [$];
  int    n_logic = 0;

  function automatic inst_t mk(iop_e op, gate_e g, int r0, int r1, int oc, int imm, int c0 = 0, int c1 = 0);
    inst_t i;
    i = '0;
    i.op = op; i.gate = g; i.row_first = addr_t'(r0); i.row_last = addr_t'(r1);
    i.out_col = addr_t'(oc); i.imm = 8'(imm); i.in_col[0] = addr_t'(c0); i.in_col[1] = addr_t'(c1);
    return i;
  endfunction

  // input initialisation: preset to '0', then stochastic write
  task automatic init_col(int col, int r0, int r1, int value);
    prog.push_back(mk(I_PRESET, G_BUFF, r0, r1, col, 0));
    prog.push_back(mk(I_SBG, G_BUFF, r0, r1, col, value));
  endtask
  // A chain of gates: the first output cell gets its own preset; every gate
  // presets the output cell of the next gate in the same step (next_g/next_oc,
  // next_oc < 0 for the last gate).
  task automatic logic_step(gate_e g, int oc, int c0, int c1, bit first,
                            gate_e next_g = G_BUFF, int next_oc = -1);
    inst_t i;
    if (first) prog.push_back(mk(I_PRESET, G_BUFF, 0, R - 1, oc, int'(gate_preset(g))));
    i = mk(I_LOGIC, g, 0, R - 1, oc, int'(gate_preset(next_g)), c0, c1);
    if (next_oc >= 0) begin i.pre_en = 1'b1; i.pre_col = addr_t'(next_oc); end
    prog.push_back(i);
    n_logic++;
  endtask

  int res [$];
  always @(posedge clk) if (rst_n && res_valid) res.push_back(int'(res_data));

  task automatic run_program();
    res.delete();
    for (int v = 0; v < 256; v++) begin
      @(negedge clk); host_we = 1; host_sel = 0; host_addr = 16'(v); host_wdata = '0;
      host_wdata.imm = calib(v);
    end
    foreach (prog[i]) begin
      @(negedge clk); host_we = 1; host_sel = 1; host_addr = 16'(i); host_wdata = prog[i];
    end
    @(negedge clk); host_we = 0;
    @(negedge clk); host_start = 1;
    @(negedge clk); host_start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  function automatic bit close(int got, real p);
    real mu, tol;
    mu  = 256.0 * p;
    tol = 5.0 * $sqrt(256.0 * p * (1.0 - p)) + 0.04 * 256.0 + 1.0;
    return (real'(got) >= mu - tol) && (real'(got) <= mu + tol);
  endfunction

  int a_v [R];
  int pr [R][6];

  initial begin
    host_we = 0; host_sel = 0; host_start = 0; host_addr = 0; host_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ------------------------------------------------------ square root
    // columns: 0 = A1, 1 = A2, 2 = C1, 3 = C2, 4 = A1*C1, 5 = +A2, 6 = Y
    prog.delete(); n_logic = 0;
    for (int r = 0; r < R; r++) begin
      a_v[r] = 8 + r * 15;              // a from 0.03 to 0.91
      init_col(0, r, r, a_v[r]);
      init_col(1, r, r, a_v[r]);        // same value, separate generation
    end
    init_col(2, 0, R - 1, 172);         // C1 = 0.67
    init_col(3, 0, R - 1, 46);          // C2 = 0.18
    logic_step(G_AND, 4, 0, 2, 1, G_OR, 5);
    logic_step(G_OR,  5, 4, 1, 0, G_OR, 6);
    logic_step(G_OR,  6, 5, 3, 0);
    for (int r = 0; r < R; r++) prog.push_back(mk(I_ACC, G_BUFF, r, r, 0, 0, 6));
    prog.push_back(mk(I_HALT, G_BUFF, 0, 0, 0, 0));
    checks++; if (n_logic != 3) failures++;
    run_program();
    checks++;
    if (res.size() != R) begin failures++; $display("sqrt: %0d results", res.size()); end
    else for (int r = 0; r < R; r++) begin
      real a, p;
      a = real'(a_v[r]) / 256.0;
      p = 1.0 - (1.0 - (172.0 / 256.0) * a) * (1.0 - a) * (1.0 - 46.0 / 256.0);
      checks++;
      if (!close(res[r], p)) begin failures++; $display("sqrt row %0d: got %0d want %0.1f", r, res[r], 256.0 * p); end
      if (r % 5 == 0)
        $display("sqrt(%0.3f) = %0.3f, circuit value %0.3f, in memory %0.3f", a, $sqrt(a), p, real'(res[r]) / 256.0);
    end

    // ------------------------------------------------- object location
    // columns 10..15 = the six probabilities, 16..20 = AND chain
    prog.delete(); n_logic = 0;
    for (int r = 0; r < R; r++)
      for (int k = 0; k < 6; k++) begin
        pr[r][k] = $urandom_range(150, 255);
        init_col(10 + k, r, r, pr[r][k]);
      end
    logic_step(G_AND, 16, 10, 11, 1, G_AND, 17);
    logic_step(G_AND, 17, 16, 12, 0, G_AND, 18);
    logic_step(G_AND, 18, 17, 13, 0, G_AND, 19);
    logic_step(G_AND, 19, 18, 14, 0, G_AND, 20);
    logic_step(G_AND, 20, 19, 15, 0);
    for (int r = 0; r < R; r++) prog.push_back(mk(I_ACC, G_BUFF, r, r, 0, 0, 20));
    prog.push_back(mk(I_HALT, G_BUFF, 0, 0, 0, 0));
    checks++; if (n_logic != 5) failures++;
    run_program();
    checks++;
    if (res.size() != R) begin failures++; $display("OL: %0d results", res.size()); end
    else for (int r = 0; r < R; r++) begin
      real p;
      p = 1.0;
      for (int k = 0; k < 6; k++) p *= real'(pr[r][k]) / 256.0;
      checks++;
      if (!close(res[r], p)) begin failures++; $display("OL point %0d: got %0d want %0.1f", r, res[r], 256.0 * p); end
      if (r % 5 == 0) $display("object location point %0d: p = %0.3f, in memory %0.3f", r, p, real'(res[r]) / 256.0);
    end
    // 16 x 6 x (preset + write) + 1 preset + 5 logic + 16 x (N+M)
    checks++;
    if (steps != 32'(16 * 6 * 2 + 1 + 5 + 16 * 32)) begin failures++; $display("OL steps %0d", steps); end
    $display("object location batch: %0d in-memory steps", steps);

    // ------------------------------------- pipelined 512-bit multiplication
    prog.delete(); n_logic = 0;
    for (int pass = 0; pass < 2; pass++) begin
      init_col(30, 0, R - 1, 160);      // 0.625
      init_col(31, 0, R - 1, 96);       // 0.375
      logic_step(G_AND, 32, 30, 31, 1);
      for (int r = 0; r < R; r++) prog.push_back(mk(I_ACC, G_BUFF, r, r, 0, 0, 32));
    end
    prog.push_back(mk(I_HALT, G_BUFF, 0, 0, 0, 0));
    run_program();
    checks++;
    if (res.size() != 2 * R) begin failures++; $display("pipeline: %0d results", res.size()); end
    else begin
      int differ;
      differ = 0;
      for (int r = 0; r < R; r++) begin
        int tot;
        real p, mu, tol;
        tot = res[r] + res[R + r];
        if (res[r] != res[R + r]) differ++;
        p = (160.0 / 256.0) * (96.0 / 256.0);
        mu = 512.0 * p;
        tol = 5.0 * $sqrt(512.0 * p * (1.0 - p)) + 0.04 * 512.0;
        checks++;
        if (real'(tot) < mu - tol || real'(tot) > mu + tol) begin
          failures++; $display("pipeline row %0d: %0d of 512, want %0.1f", r, tot, mu);
        end
        if (r == 0) $display("512-bit product 0.625*0.375: %0d + %0d = %0d of 512 (exact %0.1f)", res[r], res[R + r], tot, mu);
      end
      // the second pass draws new bits
      checks++; if (differ < 4) begin failures++; $display("passes not independent"); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
