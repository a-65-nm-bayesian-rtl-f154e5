`timescale 1ns/1ps
// grng_model: behavioural model of the in-word Gaussian RNG (an analog circuit,
// not synthesizable logic). Two 1 fF capacitors Cp and Cn are charged to VDD
// while PHI is low. A rising edge on EN sets PHI (a D flip-flop with D tied high
// and EN as its clock), and both capacitors then leak slowly to ground. Each
// capacitor node is sharpened by an inverter chain into a digital signal, P for
// Cp and N for Cn, that rises when the node crosses the inverter threshold.
// Thermal noise makes the two crossing times differ, so the pulse
// E = XNOR(P, N) stays low for T_D, the gap between the two crossings, and
// whichever of P and N rose first gives the sample's sign. When E goes high
// again, PHI is reset asynchronously, the capacitors recharge and P and N fall.
//
// The model draws each crossing time as LATENCY_NS plus Gaussian noise of
// standard deviation SIGMA_TD_NS / sqrt(2), so the signed width
// td_ns = t_N - t_P is Gaussian with standard deviation SIGMA_TD_NS. OFFSET_NS
// adds a static mismatch between N1 and N2, the non-zero mean eps0 that
// calibration removes. The defaults are the paper's typical operating point
// (180 mV bias, 1.0 ns standard deviation, 69 ns mean latency); the bias voltage
// itself is not modelled. td_ns is an extra model-only output: it stands for the
// time during which the word's transmission gates conduct, which the sigma-eps
// bitline model integrates. It is 0 from EN's rising edge until the second
// crossing. RECHARGE_NS, the delay from E rising to P/N falling, is this model's
// own choice.
module grng_model #(
  parameter real LATENCY_NS  = 69.0,
  parameter real SIGMA_TD_NS = 1.0,
  parameter real OFFSET_NS   = 0.0,
  parameter real RECHARGE_NS = 0.5
) (
  input  logic en,
  output logic p,
  output logic n,
  output logic e,
  output logic phi,
  output real  td_ns
);

  real t_p, t_n, t_first, t_gap;

  // Standard normal sample (Box-Muller).
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  initial begin
    p     = 1'b0;
    n     = 1'b0;
    phi   = 1'b0;
    td_ns = 0.0;
  end

  assign e = ~(p ^ n);

  always @(posedge en) begin
    if (!phi) begin
      phi   = 1'b1;
      td_ns = 0.0;
      t_p   = LATENCY_NS - OFFSET_NS / 2.0 + gauss() * SIGMA_TD_NS * 0.7071067811865476;
      t_n   = LATENCY_NS + OFFSET_NS / 2.0 + gauss() * SIGMA_TD_NS * 0.7071067811865476;
      if (t_p < 0.01) t_p = 0.01;
      if (t_n < 0.01) t_n = 0.01;
      t_first = (t_p < t_n) ? t_p : t_n;
      t_gap   = (t_p < t_n) ? (t_n - t_p) : (t_p - t_n);
      #(t_first);
      if (t_p < t_n) p = 1'b1; else n = 1'b1;
      #(t_gap);
      p     = 1'b1;
      n     = 1'b1;
      td_ns = t_n - t_p;
      // E is high again: PHI resets and the capacitors recharge.
      phi = 1'b0;
      #(RECHARGE_NS);
      p = 1'b0;
      n = 1'b0;
    end
  end

endmodule
