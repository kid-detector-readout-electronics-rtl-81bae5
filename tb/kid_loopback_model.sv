// kid_loopback_model: stand-in for the converters, the cryogenic RF chain and the
// detector array, closing the loop from the DAC output back to the ADC input.
//
// Each clock the model takes one DAC sample, delays it by DELAY clocks, scales it by
// the detector response (1 - depth) and adds a small uniform noise of +-NOISE LSB,
// then saturates to 12 bits for the ADC. A pulse (pulse_trig high for one clock) sets
// depth to DEPTH/32768 of the signal; depth then decays by depth >> TAU_SHIFT each
// clock, an exponential with a time constant of about 2^TAU_SHIFT clocks, the way a
// KID's resonance dip recovers after a photon or cosmic ray hit lowers its
// transmission. All tones see the same pulse in this model. Interface: clk, dac_data
// and pulse_trig in, adc_data out; latency DELAY + 1 clocks. The shape and constants
// are this testbench's choice; the paper only describes the pulses qualitatively.
module kid_loopback_model
  import kid_pkg::*;
#(
  parameter int DELAY     = 37,
  parameter int DEPTH     = 12000,
  parameter int TAU_SHIFT = 9,
  parameter int NOISE     = 2
) (
  input  logic                    clk,
  input  logic signed [DAC_W-1:0] dac_data,
  input  logic                    pulse_trig,
  output logic signed [ADC_W-1:0] adc_data
);
  logic signed [DAC_W-1:0] dly [DELAY];
  int depth = 0;
  initial begin
    foreach (dly[i]) dly[i] = '0;
    adc_data = '0;
  end
  always @(posedge clk) begin
    int v;
    for (int i = DELAY - 1; i > 0; i--) dly[i] <= dly[i-1];
    dly[0] <= dac_data;
    v = (int'(dly[DELAY-1]) * (32768 - depth)) >>> 15;
    v += $urandom_range(0, 2 * NOISE) - NOISE;
    if (v > 2047) v = 2047;
    if (v < -2048) v = -2048;
    adc_data <= ADC_W'(v);
    if (pulse_trig) depth = DEPTH;
    else            depth = depth - (depth >>> TAU_SHIFT);
  end
endmodule
