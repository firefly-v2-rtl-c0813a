// dsp_crossbar: one DSP48E2 slice used as a 2x4 synaptic crossbar (behaviour, not a primitive).
//
// Two 1-bit spikes (two input channels of one time step) select between zero and the four
// 8-bit weights of their input channel (one weight per output channel). The selected weights
// and the 48-bit cascade input PCIN are added in four independent 12-bit SIMD lanes, one lane
// per output channel, and registered in P, as the DSP48E2 FOUR12 SIMD mode does. Carries never
// cross lanes; a lane wraps modulo 2^12. With ACC=0 the slice is a "Mux-Add" stage of the
// cascade chain; with ACC=1 it is the "Mux-Acc" slice at the bottom of a chain, which also adds
// its own P (the running output-stationary sum) unless `restart` starts a new sum.
// Timing: P is valid one clock after the inputs. Sign extension of the 8-bit weights into
// 12-bit lanes is assumed (the paper gives 8-bit weights and 12-bit partial sums).
module dsp_crossbar #(
  parameter bit ACC = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,        // inputs valid this cycle
  input  logic        restart,   // ACC only: drop the old P before adding
  input  logic [1:0]  spk,       // spikes of input channel 0 and 1
  input  logic [31:0] w0,        // 4 x 8-bit weights of input channel 0, lane 0 in bits 7:0
  input  logic [31:0] w1,        // 4 x 8-bit weights of input channel 1
  input  logic [47:0] pcin,      // cascade input, 4 x 12-bit lanes
  output logic [47:0] p          // 4 x 12-bit lanes
);
  logic [47:0] sum;
  always_comb begin
    for (int l = 0; l < 4; l++) begin
      logic [11:0] a, b, c, d;
      a = spk[0] ? {{4{w0[8*l+7]}}, w0[8*l +: 8]} : 12'd0;
      b = spk[1] ? {{4{w1[8*l+7]}}, w1[8*l +: 8]} : 12'd0;
      c = pcin[12*l +: 12];
      d = (ACC && !restart) ? p[12*l +: 12] : 12'd0;
      sum[12*l +: 12] = a + b + c + d;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  p <= '0;
    else if (en) p <= sum;
  end
endmodule
