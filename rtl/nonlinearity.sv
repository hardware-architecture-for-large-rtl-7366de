// Hidden-layer activation g(.) of the ELM, applied to the raw spike counts.
//
// First the count is centred, y = h - h_offset (signed), because a spike count
// is never negative.  Then, by mode:
//   RLSU     : g = 0 for y <= 0, y for 0 < y < th, th for y >= th; the result
//              is quantised to HB = 8 bits as min(g >> q_shift, 255).
//   tristate : +1 for y >= th, -1 for y <= -th, 0 in between.  Only the sign
//              matters downstream, so the output layer needs no multiplier.
// The sat field tells which saturation level was hit (RLSU at 0 or th,
// tristate at -1, 0 or +1); the cognizance checker counts these.
//
// Timing: one word per cycle, output registered one cycle after input; idx and
// last pass along with the value.
//
// From the paper: both activation functions, the threshold th, 8-bit RLSU
// output.  The paper's printed tristate case limits contradict each other and
// are read here with the symmetric limits +th and -th.  This design's own
// choices: the single offset subtracted for centring and the shift used for
// quantisation.
module nonlinearity
  import elm_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  nl_mode_e      mode,
  input  logic [CW-1:0] th,
  input  logic [CW-1:0] h_offset,
  input  logic [3:0]    q_shift,
  input  hid_t          in,
  output act_t          out
);

  logic signed [CW:0] y, ths;
  logic        [CW:0] g, gq;
  act_t               nxt;

  always_comb begin
    y    = $signed({1'b0, in.count}) - $signed({1'b0, h_offset});
    ths  = $signed({1'b0, th});
    g    = '0;
    gq   = '0;
    nxt  = '0;
    nxt.valid = in.valid;
    nxt.last  = in.last;
    nxt.idx   = in.idx;
    if (mode == NL_RLSU) begin
      if (y <= 0) begin
        g       = '0;
        nxt.sat = SAT_LOW;
      end else if (y >= ths) begin
        g       = unsigned'(ths);
        nxt.sat = SAT_HIGH;
      end else begin
        g       = unsigned'(y);
        nxt.sat = SAT_NONE;
      end
      gq      = g >> q_shift;
      nxt.mag = (gq > (CW+1)'(2**HB - 1)) ? '1 : gq[HB-1:0];
    end else begin
      if (y >= ths) begin
        nxt.mag = HB'(1);
        nxt.sat = SAT_HIGH;
      end else if (y <= -ths) begin
        nxt.mag = HB'(1);
        nxt.neg = 1'b1;
        nxt.sat = SAT_LOW;
      end else begin
        nxt.sat = SAT_ZERO;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out <= '0;
    else        out <= nxt;
  end

endmodule
