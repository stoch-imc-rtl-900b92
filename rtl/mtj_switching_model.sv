// mtj_switching_model -- BEHAVIOURAL MODEL (not synthesizable) of the
// intrinsic stochastic switching of the MTJ cells of one subarray.
//
// A preset ('0', parallel) MTJ hit by a write pulse of amplitude Vp and width
// tp switches to '1' with probability
//     P_sw = 1 - exp(-tp / tau),   tau = tau0 * exp(Delta * (1 - Vp / Vc0)),
// the thermally activated switching law the paper uses for stochastic bit
// generation. Every row gets an independent draw, so the cells of a column,
// and the same cell in different subarrays, hold independent bits of a
// stochastic number.
//
// Interface: while `fire` is high (a stochastic write is being applied this
// cycle), the model draws a new outcome vector at the falling clock edge, so
// it is stable when the subarray samples it at the next rising edge.
// pulse_code selects the amplitude Vp = VP_MIN_V + pulse_code * VP_STEP_V;
// code 0 means no pulse (P_sw = 0). The pulse width is fixed at TP_NS.
//
// The switching law is the paper's; Delta, tau0 and Vc0 are not given there
// and are chosen so that the paper's example point (310 mV, 4 ns -> 0.7)
// holds. The code-to-amplitude mapping is this design's choice; the BtoS
// memory is loaded with the inverse of this law (see the bank testbench).
module mtj_switching_model #(
  parameter int unsigned ROWS      = 256,
  parameter real         TP_NS     = 4.0,
  parameter real         DELTA     = 40.0,
  parameter real         TAU0_NS   = 1.0,
  parameter real         VC0_V     = 0.31959,
  parameter real         VP_MIN_V  = 0.25,
  parameter real         VP_STEP_V = 0.0005
) (
  input  logic            clk,
  input  logic            fire,
  input  logic [7:0]      pulse_code,
  output logic [ROWS-1:0] sw_outcome
);

  function automatic real p_switch(logic [7:0] code);
    real vp, tau;
    if (code == 8'd0) return 0.0;
    vp  = VP_MIN_V + real'(code) * VP_STEP_V;
    tau = TAU0_NS * $exp(DELTA * (1.0 - vp / VC0_V));
    return 1.0 - $exp(-TP_NS / tau);
  endfunction

  initial sw_outcome = '0;

  always @(negedge clk) begin
    if (fire) begin
      real p;
      p = p_switch(pulse_code);
      for (int unsigned r = 0; r < ROWS; r++)
        sw_outcome[r] <= (real'($urandom) / 4294967296.0) < p;
    end
  end

endmodule
