// pulse_gen: behavioural source of detector-like ADC samples for testbenches.
// Pulses rise linearly over 'rise' samples and decay exponentially with the
// factor 'decay' per 10 ns (taken when the pulse is added); each 10 ns clock gives two 200 MS/s samples,
// s0 at the start of the clock and s1 half-way. add_pulse() schedules a pulse
// at absolute clock n; 'noise' adds a uniform +/- noise to each sample.
module pulse_gen (
  input  logic               clk,
  output logic signed [13:0] s0,
  output logic signed [13:0] s1
);
  real base = -3000.0, decay = 0.98, noise = 0.0;
  real rise = 4.0;
  real p_t [$], p_a [$], p_d [$];
  longint n = 0;

  function automatic void add_pulse(longint at, real amp);
    p_t.push_back(real'(at)); p_a.push_back(amp); p_d.push_back(decay);
  endfunction

  function automatic real value(real t);
    real v;
    v = base;
    foreach (p_t[i]) begin
      real d;
      d = t - p_t[i];
      if (d >= 0 && d < rise) v += p_a[i] * (d + 0.5) / rise;
      else if (d >= rise) v += p_a[i] * (p_d[i] ** (d - rise + 0.5));
    end
    return v;
  endfunction

  function automatic int smp(real v);
    real r;
    r = v + ((noise > 0) ? (real'($urandom_range(0, 2000)) / 1000.0 - 1.0) * noise : 0.0);
    if (r > 8191.0) r = 8191.0;
    if (r < -8192.0) r = -8192.0;
    return $rtoi(r + ((r >= 0) ? 0.5 : -0.5));
  endfunction

  initial begin
    s0 = 0; s1 = 0;
    forever begin
      @(posedge clk);
      #1;
      // drop pulses long gone to keep the sum short
      while (p_t.size() > 0 && real'(n) - p_t[0] > 3000.0) begin
        void'(p_t.pop_front()); void'(p_a.pop_front()); void'(p_d.pop_front());
      end
      s0 = 14'(smp(value(real'(n))));
      s1 = 14'(smp(value(real'(n) + 0.5)));
      n++;
    end
  end
endmodule
