`timescale 1ns/1ps
// tb_grng_model: fires the GRNG 2500 times (the sample count of the published
// characterisation), one EN pulse per 100 ns (the
// 10 MSa/s per-word rate implied by 512 GRNGs at 5.12 GSa/s), and checks:
// the mean and standard deviation of the signed pulse width against the static
// offset and 1.0 ns; that the measured width of E's low pulse equals |td| and
// the first signal to rise gives the sign; that PHI is reset and P/N return low
// before the next EN; the mean latency to E's return against 69 ns; and the
// normality of the pulse widths: the correlation r of the normal probability
// plot (sorted samples against normal quantiles at Blom positions
// (k - 3/8) / (n + 1/4)) must be at least 0.9967, the value measured on silicon.
module tb_grng_model;
  localparam real OFFS = 0.6;
  logic en = 0, p, n, e, phi;
  real td_ns;
  int checks = 0, failures = 0;
  real t_en, t_fall, t_rise, sum, sum2, lat_sum;
  bit  p_first;
  int  nsamp = 2500;
  real smp [2500];

  // inverse of the standard normal CDF (Acklam's rational approximation)
  function automatic real norm_inv(input real pr);
    real q, r;
    if (pr < 0.02425) begin
      q = $sqrt(-2.0 * $ln(pr));
      return (((((-7.784894002430293e-03 * q - 3.223964580411365e-01) * q - 2.400758277161838e+00) * q
               - 2.549732539343734e+00) * q + 4.374664141464968e+00) * q + 2.938163982698783e+00) /
             ((((7.784695709041462e-03 * q + 3.224671290700398e-01) * q + 2.445134137142996e+00) * q
               + 3.754408661907416e+00) * q + 1.0);
    end
    if (pr > 1.0 - 0.02425) return -norm_inv(1.0 - pr);
    q = pr - 0.5;
    r = q * q;
    return (((((-3.969683028665376e+01 * r + 2.209460984245205e+02) * r - 2.759285104469687e+02) * r
             + 1.383577518672690e+02) * r - 3.066479806614716e+01) * r + 2.506628277459239e+00) * q /
           (((((-5.447609879822406e+01 * r + 1.615858368580409e+02) * r - 1.556989798598866e+02) * r
             + 6.680131188771972e+01) * r - 1.328068155288572e+01) * r + 1.0);
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  grng_model #(.OFFSET_NS(OFFS)) dut (.*);

  initial begin
    #(real'(nsamp) * 100.0 + 10000.0);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge e) begin
    t_fall  = $realtime;
    p_first = p;
  end
  always @(posedge e) t_rise = $realtime;

  initial begin
    sum = 0; sum2 = 0; lat_sum = 0;
    #10;
    for (int k = 0; k < nsamp; k++) begin
      t_en = $realtime;
      en = 1;
      #50 en = 0;
      #50;
      // after 100 ns the sample is complete
      checks++;
      if (phi || p || n || !e) begin
        failures++;
        $display("GRNG not reset: phi=%b p=%b n=%b e=%b", phi, p, n, e);
      end
      // Pulses narrower than the 1 ps time precision leave no edge to measure.
      if (fabs(td_ns) > 0.002) checks++;
      if (fabs(td_ns) > 0.002 && fabs((t_rise - t_fall) - fabs(td_ns)) > 0.01 || (p_first != (td_ns > 0.0))) begin
        failures++;
        if (failures < 10) $display("pulse width %f vs td %f, p_first=%b", t_rise - t_fall, td_ns, p_first);
      end
      sum += td_ns; sum2 += td_ns * td_ns;
      smp[k] = td_ns;
      lat_sum += t_rise - t_en;
    end
    begin
      real mean, sd, lat;
      mean = sum / nsamp;
      sd   = $sqrt(sum2 / nsamp - mean * mean);
      lat  = lat_sum / nsamp;
      $display("mean td = %f ns, sd = %f ns, mean latency = %f ns", mean, sd, lat);
      checks++; if (fabs(mean - OFFS) > 0.1) failures++;
      checks++; if (fabs(sd - 1.0) > 0.08) failures++;
      // E[max(tP, tN)] = 69 - 0.3 + E[max(0, D)], D ~ N(0.6, 1): 69.469 ns
      checks++; if (fabs(lat - 69.469) > 0.2) failures++;
    end
    begin
      real sx, sy, sxx, syy, sxy, r;
      // insertion sort
      for (int i = 1; i < nsamp; i++) begin
        real v;
        int  j;
        v = smp[i];
        j = i - 1;
        while (j >= 0 && smp[j] > v) begin smp[j + 1] = smp[j]; j--; end
        smp[j + 1] = v;
      end
      sx = 0; sy = 0; sxx = 0; syy = 0; sxy = 0;
      for (int i = 0; i < nsamp; i++) begin
        real z;
        z = norm_inv((real'(i + 1) - 0.375) / (real'(nsamp) + 0.25));
        sx += z; sy += smp[i]; sxx += z * z; syy += smp[i] * smp[i]; sxy += z * smp[i];
      end
      r = (sxy - sx * sy / nsamp) / $sqrt((sxx - sx * sx / nsamp) * (syy - sy * sy / nsamp));
      $display("normal probability plot r = %f", r);
      checks++; if (r < 0.9967) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
