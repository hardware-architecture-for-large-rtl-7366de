// Behavioural model (not synthesizable logic: an analog oscillator) of one
// current-controlled oscillator (CCO) neuron of the D-ELM chip.
//
// The oscillator frequency follows the column current.  The model is a phase
// accumulator clocked by the system clock: while en (NEU_EN) is high it adds
// gain * i_z each cycle and emits a one-cycle spike whenever the phase passes
// PHASE_FULL.  It can fire at most once per cycle, which stands for the upper
// frequency limit of the real oscillator; excess phase is clamped.  While en
// is low the phase is held at zero and no spikes are produced.
//
// Each instance gets its own gain, log-normal with spread GSIGMA and drawn
// from SEED and NEURON_ID, to model the CCO mismatch that makes some neurons
// fire high or low whatever the input.  gain is in units of 2^-8.
//
// From the paper: current-to-frequency conversion, enable, and that CCO
// mismatch exists.  This model's own choices: phase-accumulator form, the
// saturation rule and the mismatch spread.
module cco_model #(
  parameter longint unsigned PHASE_FULL = 64'd4294967296,
  parameter real             GSIGMA     = 0.3,
  parameter int unsigned     SEED       = 1,
  parameter int unsigned     NEURON_ID  = 0
) (
  input  logic        clk,
  input  logic        en,
  input  logic [31:0] i_z,
  output logic        spike
);

  logic [15:0] gain;
  logic [47:0] phase;
  logic [47:0] nxt;

  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] z;
    z = v + 32'h7F4A_7C15;
    z = (z ^ (z >> 16)) * 32'h85EB_CA6B;
    z = (z ^ (z >> 13)) * 32'hC2B2_AE35;
    return z ^ (z >> 16);
  endfunction

  initial begin
    real u1, u2, g, gr;
    u1 = (real'(mix32((SEED << 20) ^ NEURON_ID)) + 0.5) / 4294967296.0;
    u2 = (real'(mix32((SEED << 20) ^ NEURON_ID ^ 32'hA5A5_0F0F)) + 0.5) / 4294967296.0;
    g  = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    gr = $exp(GSIGMA * g) * 256.0;
    if (gr < 1.0) gr = 1.0;
    if (gr > 65535.0) gr = 65535.0;
    gain = 16'($rtoi(gr + 0.5));
  end

  always_comb nxt = phase + 48'(i_z) * 48'(gain);

  always_ff @(posedge clk) begin
    if (!en) begin
      phase <= '0;
      spike <= 1'b0;
    end else if (nxt >= 48'(PHASE_FULL)) begin
      spike <= 1'b1;
      phase <= (nxt - 48'(PHASE_FULL) >= 48'(PHASE_FULL)) ? 48'(PHASE_FULL - 1) : nxt - 48'(PHASE_FULL);
    end else begin
      spike <= 1'b0;
      phase <= nxt;
    end
  end

endmodule
