// tb_pd_adc_model: behavioural stand-in for the photodetector and the 12-bit
// ADC, used only by testbenches.
//
// The interference intensity seen by the photodetector is a sum of many
// Gaussian phase-difference terms, so it is modelled here as a Gaussian
// around mid-scale (MEAN codes, SIGMA codes standard deviation). Consecutive
// samples are correlated with coefficient RHO (a first-order autoregressive
// process) to mimic the finite detector bandwidth. Each Gaussian draw is the
// sum of twelve uniform variables minus six. Codes are clipped to the ADC
// range. These statistics are a plausible model chosen for testing, not
// measured data.
//
// Interface: every clock with enable high, samples[0..LANES-1] is a new beat
// of LANES consecutive samples (lane 0 earliest) and valid is high; outputs
// change on the falling clock edge so that the design samples them stably.
module tb_pd_adc_model #(
  parameter int unsigned ADC_W = 12,
  parameter int unsigned LANES = 8,
  parameter real         MEAN  = 2048.0,
  parameter real         SIGMA = 220.0,
  parameter real         RHO   = 0.6
) (
  input  logic                        clk,
  input  logic                        enable,
  output logic [LANES-1:0][ADC_W-1:0] samples,
  output logic                        valid
);

  real x;   // zero-mean intensity of the previous sample

  function automatic real gauss();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  function automatic logic [ADC_W-1:0] quantise(input real v);
    real c = v + MEAN;
    if (c < 0.0) c = 0.0;
    if (c > real'((1 << ADC_W) - 1)) c = real'((1 << ADC_W) - 1);
    return ADC_W'($rtoi(c));
  endfunction

  initial begin
    x       = 0.0;
    samples = '0;
    valid   = 1'b0;
  end

  always @(negedge clk) begin
    valid <= enable;
    if (enable) begin
      for (int l = 0; l < LANES; l++) begin
        x = RHO * x + $sqrt(1.0 - RHO * RHO) * SIGMA * gauss();
        samples[l] <= quantise(x);
      end
    end
  end

endmodule
