// Cognizance check ("discriminator take all") over a set of training samples.
//
// A hidden neuron whose output sits at the same saturation level for almost
// every sample carries no information about the input and can be muted.  For
// every virtual hidden neuron j this block keeps three counters: how many
// samples put it at the low level (RLSU 0 / tristate -1), at tristate 0, and
// at the high level (RLSU th / tristate +1).  The number of samples S is
// counted from the last flag of the activation stream.
//
// Operation:
//   clear    : zero all counters and S (num_hidden cycles, busy high);
//   stream   : each valid activation increments one counter of its neuron;
//   finalize : for j = 0..num_hidden-1 emit cog_bit = 0 (muted) if any of its
//              counts exceeds theta% of S, else 1, one neuron per cycle on
//              cog_we/cog_idx/cog_bit (busy high meanwhile).
// The test is count*1000 > theta_permille*S, so theta is set in 0.1% steps;
// the paper uses 99.5% (995).  Counters saturate at 2^SW-1.
//
// Timing: one activation per cycle; counter update is a read-modify-write of
// the neuron's entry in the same cycle.  The vector is the L-bit cognizance
// vector that the output layer uses to skip muted neurons.
//
// From the paper: the saturation counts, the theta rule and the cognizance
// vector.  This design's own choices: counter width and the streaming
// clear/finalize sequence.
module cognizance_checker
  import elm_pkg::*;
#(
  parameter int unsigned L_MAX = elm_pkg::L_VIRT_MAX,
  parameter int unsigned SW    = 16,
  parameter int unsigned IW    = $clog2(L_MAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          finalize,
  input  logic [9:0]    theta_permille,
  input  logic [IW:0]   num_hidden,
  input  act_t          act,
  output logic          busy,
  output logic [SW-1:0] samples,
  output logic          cog_we,
  output logic [IW-1:0] cog_idx,
  output logic          cog_bit
);

  typedef struct packed {
    logic [SW-1:0] low;
    logic [SW-1:0] zero;
    logic [SW-1:0] high;
  } cnt_t;

  typedef enum logic [1:0] {C_IDLE, C_CLEAR, C_FINAL} cstate_e;

  cnt_t          mem [L_MAX];
  cstate_e       state;
  logic [IW-1:0] j;
  cnt_t          rd, upd;
  logic [IW-1:0] aidx;
  logic [31:0]   limit;

  function automatic logic [SW-1:0] inc_sat(input logic [SW-1:0] v);
    return (v == '1) ? v : v + 1'b1;
  endfunction

  function automatic logic over(input logic [SW-1:0] cnt, input logic [31:0] lim);
    return (32'(cnt) * 32'd1000) > lim;
  endfunction

  assign aidx  = (state == C_IDLE) ? act.idx[IW-1:0] : j;
  assign rd    = mem[aidx];
  assign limit = 32'(theta_permille) * 32'(samples);
  assign busy  = (state != C_IDLE);

  always_comb begin
    upd = rd;
    unique case (act.sat)
      SAT_LOW:  upd.low  = inc_sat(rd.low);
      SAT_ZERO: upd.zero = inc_sat(rd.zero);
      SAT_HIGH: upd.high = inc_sat(rd.high);
      default:  ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (state == C_CLEAR) mem[j] <= '0;
    else if (state == C_IDLE && act.valid && int'(act.idx) < L_MAX) mem[aidx] <= upd;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= C_IDLE;
      j       <= '0;
      samples <= '0;
      cog_we  <= 1'b0;
      cog_idx <= '0;
      cog_bit <= 1'b0;
    end else begin
      cog_we <= 1'b0;
      unique case (state)
        C_IDLE: begin
          if (clear) begin
            state   <= C_CLEAR;
            j       <= '0;
            samples <= '0;
          end else if (finalize) begin
            state <= C_FINAL;
            j     <= '0;
          end else if (act.valid && act.last && samples != '1) begin
            samples <= samples + 1'b1;
          end
        end
        C_CLEAR: begin
          if ((IW+1)'(j) + 1'b1 >= num_hidden) state <= C_IDLE;
          j <= j + 1'b1;
        end
        C_FINAL: begin
          cog_we  <= 1'b1;
          cog_idx <= j;
          cog_bit <= !(over(rd.low, limit) || over(rd.zero, limit) || over(rd.high, limit));
          if ((IW+1)'(j) + 1'b1 >= num_hidden) state <= C_IDLE;
          j <= j + 1'b1;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
