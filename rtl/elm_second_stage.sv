// ELM output layer: O_k = sum_j beta_kj * H_j over the cognizant hidden
// neurons, then the predicted class is the k with the largest O_k.
//
// Only cognizant neurons have output weights.  Their weight rows are stored
// back to back in a compacted memory (row m belongs to the m-th cognizant
// neuron in index order), so memory size and reads scale with M, not L.  For
// each incoming activation the L-bit cognizance vector is looked up; if the
// neuron is muted nothing is fetched or added, otherwise the next row is read
// and every class accumulator is updated:
//   RLSU     : O_k += beta_kj * H_j       (8-bit H times 6-bit beta)
//   tristate : O_k += beta_kj or -beta_kj or nothing, no multiplier
// Weights are BB = 6 bits, sign and magnitude (bit BB-1 is the sign).
// Accumulators are AW_ACC = 32 bits, two's complement.
//
// Interface: start clears the accumulators and the row pointer before an
// image; the activation stream follows at up to one word per cycle; the word
// flagged last closes the image; class_valid rises two clock edges after the
// edge that takes that word, with
// class_id and scores.  Ties go to the lower class index.  fetches counts the
// weight rows read for the current image.  beta_* and cog_* write the weight
// memory and the cognizance vector (the latter normally from the cognizance
// checker).
//
// From the paper: eq. (1), sign-magnitude 6-bit weights, add/subtract only for
// tristate, 32-bit accumulation, C = 10 classes and the cognizance-vector
// gating of weight fetches.  This design's own choices: the two-stage pipeline,
// tie-breaking and the memory depth M_MAX = L_MAX.
module elm_second_stage
  import elm_pkg::*;
#(
  parameter int unsigned C      = 10,
  parameter int unsigned BB     = 6,
  parameter int unsigned AW_ACC = 32,
  parameter int unsigned L_MAX  = elm_pkg::L_VIRT_MAX,
  parameter int unsigned M_MAX  = L_MAX,
  parameter int unsigned IW     = $clog2(L_MAX),
  parameter int unsigned MW     = $clog2(M_MAX),
  parameter int unsigned KW     = (C > 1) ? $clog2(C) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  nl_mode_e                 mode,
  input  logic                     start,
  input  act_t                     act,
  // weight memory write
  input  logic                     beta_we,
  input  logic [MW-1:0]            beta_addr,
  input  logic [C*BB-1:0]          beta_data,
  // cognizance vector write
  input  logic                     cog_we,
  input  logic [IW-1:0]            cog_idx,
  input  logic                     cog_bit,
  // result
  output logic                     class_valid,
  output logic [KW-1:0]            class_id,
  output logic signed [AW_ACC-1:0] scores [C],
  output logic [MW:0]              fetches
);

  logic [C*BB-1:0] beta_mem [M_MAX];
  logic            cog_mem  [L_MAX];

  logic [MW-1:0]   ptr;
  logic            cog_rd;
  // stage 1
  logic            s1_acc, s1_last;
  logic [C*BB-1:0] s1_row;
  logic [HB-1:0]   s1_mag;
  logic            s1_neg;
  // stage 2
  logic            s2_last;
  logic [KW-1:0]   best;

  always_ff @(posedge clk) begin
    if (beta_we && int'(beta_addr) < M_MAX) beta_mem[beta_addr] <= beta_data;
    if (cog_we && int'(cog_idx) < L_MAX)    cog_mem[cog_idx]    <= cog_bit;
  end

  assign cog_rd = (int'(act.idx) < L_MAX) ? cog_mem[act.idx[IW-1:0]] : 1'b0;

  // Signed contribution of one weight for the activation held in stage 1.
  function automatic logic signed [AW_ACC-1:0] term(input logic [BB-1:0] b,
                                                    input logic [HB-1:0] mag,
                                                    input logic neg,
                                                    input nl_mode_e m);
    logic [AW_ACC-1:0] p;
    if (m == NL_TRISTATE) p = (mag != '0) ? AW_ACC'(b[BB-2:0]) : '0;
    else                  p = AW_ACC'(b[BB-2:0]) * AW_ACC'(mag);
    return (b[BB-1] ^ neg) ? -signed'(p) : signed'(p);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr         <= '0;
      fetches     <= '0;
      s1_acc      <= 1'b0;
      s1_last     <= 1'b0;
      s1_row      <= '0;
      s1_mag      <= '0;
      s1_neg      <= 1'b0;
      s2_last     <= 1'b0;
      class_valid <= 1'b0;
      class_id    <= '0;
      for (int k = 0; k < C; k++) scores[k] <= '0;
    end else begin
      class_valid <= 1'b0;
      // stage 1: cognizance lookup and weight fetch
      s1_acc  <= 1'b0;
      s1_last <= act.valid && act.last;
      if (start) begin
        ptr     <= '0;
        fetches <= '0;
      end else if (act.valid && cog_rd) begin
        s1_acc  <= 1'b1;
        s1_row  <= beta_mem[ptr];
        s1_mag  <= act.mag;
        s1_neg  <= act.neg;
        ptr     <= ptr + 1'b1;
        fetches <= fetches + 1'b1;
      end
      // stage 2: accumulate
      s2_last <= s1_last;
      if (start) begin
        for (int k = 0; k < C; k++) scores[k] <= '0;
      end else if (s1_acc) begin
        for (int k = 0; k < C; k++)
          scores[k] <= scores[k] + term(s1_row[k*BB +: BB], s1_mag, s1_neg, mode);
      end
      // result
      if (s2_last) begin
        class_valid <= 1'b1;
        class_id    <= best;
      end
    end
  end

  always_comb begin
    best = '0;
    for (int k = 1; k < C; k++)
      if (scores[k] > scores[best]) best = KW'(k);
  end

endmodule
