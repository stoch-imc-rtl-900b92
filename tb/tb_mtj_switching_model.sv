// tb_mtj_switching_model -- statistical check of the MTJ switching model.
//
// For a set of pulse codes, fires the model many times and compares the
// measured fraction of switched cells with P_sw = 1 - exp(-tp/tau),
// tau = tau0 exp(Delta (1 - Vp/Vc0)), evaluated here independently with the
// model's default constants. Also checks the paper's example point
// (310 mV, 4 ns -> 0.7), that code 0 never switches, that the top code always
// switches and that nothing is drawn while fire is low.
module tb_mtj_switching_model;

  localparam int unsigned ROWS = 256;

  logic            clk = 1'b0;
  logic            fire;
  logic [7:0]      code;
  logic [ROWS-1:0] sw;

  int checks = 0, failures = 0;

  mtj_switching_model #(.ROWS(ROWS)) dut (.clk, .fire, .pulse_code(code), .sw_outcome(sw));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_ref(int c);
    real vp, tau;
    if (c == 0) return 0.0;
    vp  = 0.25 + c * 0.0005;
    tau = 1.0 * $exp(40.0 * (1.0 - vp / 0.31959));
    return 1.0 - $exp(-4.0 / tau);
  endfunction

  task automatic measure(int c, int draws, output real frac);
    int ones;
    ones = 0;
    code = 8'(c);
    for (int d = 0; d < draws; d++) begin
      @(posedge clk);
      fire = 1'b1;
      @(posedge clk);   // outcome drawn at the falling edge in between
      fire = 1'b0;
      ones += $countones(sw);
    end
    frac = real'(ones) / real'(draws * ROWS);
  endtask

  initial begin
    real f;
    int codes [8] = '{0, 40, 80, 100, 120, 140, 160, 255};
    fire = 1'b0; code = '0;
    repeat (2) @(posedge clk);

    // paper's example: 310 mV is code 120, 4 ns -> P_sw = 0.7
    checks++;
    if (p_ref(120) < 0.69 || p_ref(120) > 0.71) begin
      failures++; $display("reference law off: %f", p_ref(120));
    end

    foreach (codes[i]) begin
      measure(codes[i], 40, f);   // 10240 cells
      checks++;
      if (f < p_ref(codes[i]) - 0.03 || f > p_ref(codes[i]) + 0.03) begin
        failures++;
        $display("code %0d: measured %f expected %f", codes[i], f, p_ref(codes[i]));
      end
    end
    // code 0: no switching at all; code 255: all cells switch
    measure(0, 4, f);   checks++; if (f != 0.0) failures++;
    measure(255, 4, f); checks++; if (f != 1.0) failures++;

    // nothing changes while fire is low
    begin
      logic [ROWS-1:0] hold;
      code = 8'd120;
      @(posedge clk); hold = sw;
      repeat (5) @(posedge clk);
      checks++; if (sw !== hold) failures++;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
