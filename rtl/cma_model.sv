// Behavioural model (not synthesizable logic: an analog array) of the current
// mirror array (CMA) of the D-ELM chip.
//
// The array has D_CH rows and N columns.  Row i carries the current of input
// generation circuit (IGC) i, a DAC driven by input register i; the IGC is
// modelled here as an ideal DAC, row current = x_i * I_UNIT, so the model
// takes the register words directly.  The mirror at (i,j) copies the row
// current scaled by a weight w_ij that, on silicon, is
// set by random threshold-voltage mismatch; the column wire sums the mirrored
// currents, so column j delivers I^z_j = sum_i w_ij * I_UNIT * x_i.  That is the
// multiply-accumulate of the first ELM stage, done for all N columns at once.
//
// The weights follow the log-normal model the paper uses for this process:
// w = exp(g), g normal with mean 0 and standard deviation SIGMA = 0.6.  They
// are drawn once at time zero from a fixed SEED (hash of seed, row and column,
// Box-Muller transform) and held in fixed point with WFRAC fraction bits, so
// every simulation sees the same "chip".  The output is combinational and
// re-evaluated whenever an input word changes; i_z is in units of 2^-WFRAC of
// the DAC's least significant current step.
//
// From the paper: array size, the mirror-as-multiplier principle and the
// log-normal statistics.  This model's own choices: fixed point, seed, an
// ideal linear DAC and an exactly linear, noise-free mirror.
module cma_model #(
  parameter int unsigned D_CH  = 128,
  parameter int unsigned N     = 128,
  parameter real         SIGMA = 0.6,
  parameter int unsigned WFRAC = 8,
  parameter int unsigned SEED   = 1,
  parameter int unsigned XW     = 8,
  parameter int unsigned I_UNIT = 4
) (
  input  logic [XW-1:0] x    [D_CH],
  output logic [31:0]   i_z  [N]
);

  // Weight of mirror (row, column), fixed point.
  logic [15:0] w [D_CH][N];

  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] z;
    z = v + 32'h9E37_79B9;
    z = (z ^ (z >> 16)) * 32'h85EB_CA6B;
    z = (z ^ (z >> 13)) * 32'hC2B2_AE35;
    return z ^ (z >> 16);
  endfunction

  // Uniform number in (0,1) from a 32-bit key.
  function automatic real unif(input logic [31:0] key);
    return (real'(mix32(key)) + 0.5) / 4294967296.0;
  endfunction

  initial begin
    for (int i = 0; i < D_CH; i++) begin
      for (int j = 0; j < N; j++) begin
        logic [31:0] key;
        real u1, u2, g, wr;
        key = (SEED * 32'h0100_0193) ^ (32'(i) << 16) ^ 32'(j);
        u1  = unif(key);
        u2  = unif(key ^ 32'h5555_AAAA);
        g   = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
        wr  = $exp(SIGMA * g) * real'(1 << WFRAC);
        if (wr < 1.0) wr = 1.0;
        if (wr > 65535.0) wr = 65535.0;
        w[i][j] = 16'($rtoi(wr + 0.5));
      end
    end
  end

  always_comb begin
    for (int j = 0; j < N; j++) begin
      logic [31:0] acc;
      acc = '0;
      for (int i = 0; i < D_CH; i++) acc += 32'(x[i]) * 32'(I_UNIT) * 32'(w[i][j]);
      i_z[j] = acc;
    end
  end

endmodule
