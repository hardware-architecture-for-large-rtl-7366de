// Image classifier built from an analog random-feature chip and a small
// digital back end: a two-layer Extreme Learning Machine (ELM).
//
//   timing_control --pins--> delm_ic --C<13:0>--> timing_control
//        | hidden counts h_j (j = r*N + n, r = rerun, n = physical neuron)
//        v
//   nonlinearity (centre, RLSU or tristate)
//        |-- train_mode = 1 --> cognizance_checker --vector--> elm_second_stage
//        '-- train_mode = 0 --> elm_second_stage --> class_id, scores
//
// The chip (delm_ic) computes N = 128 random projections of a 128-channel
// input in one conversion.  The controller runs it num_reruns times per
// image, rotating the input by one more position each time, which yields
// L = num_reruns * N virtual hidden neurons (up to 12800).  In training mode
// the activations feed the cognizance checker, which, after cog_finalize,
// writes the cognizance vector straight into the output layer's vector
// memory; in inference mode they feed the output layer, which skips the muted
// neurons and reports the winning class.  Output weights are trained off line
// and written through the beta_* port, compacted to the cognizant neurons.
//
// Host sequence per image: write D pixels (img_*), pulse start, wait for done;
// in inference mode class_valid follows a few cycles after done.  Training
// run: pulse cog_clear, run every training image with train_mode = 1, pulse
// cog_finalize and wait for cog_busy to fall.
//
// From the paper: the chip/FPGA split, the rerun-and-rotate expansion, the
// activations, the cognizance check and the gated output layer.  This
// design's own choices: the mode switch sharing one hidden stream, and all
// register-level timing.
module elm_rfe_system
  import elm_pkg::*;
#(
  parameter int unsigned D      = 126,
  parameter int unsigned D_CH   = 128,
  parameter int unsigned N      = 128,
  parameter int unsigned E_MAX  = 100,
  parameter int unsigned XW     = 8,
  parameter int unsigned C      = 10,
  parameter int unsigned BB     = 6,
  parameter int unsigned L_MAX  = E_MAX * N,
  parameter int unsigned SEED   = 1,
  parameter int unsigned AW     = $clog2(D_CH),
  parameter int unsigned EW     = $clog2(E_MAX + 1),
  parameter int unsigned IW     = $clog2(L_MAX),
  parameter int unsigned KW     = (C > 1) ? $clog2(C) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  nl_mode_e             nl_mode,
  input  logic [CW-1:0]        th,
  input  logic [CW-1:0]        h_offset,
  input  logic [3:0]           q_shift,
  input  logic [EW-1:0]        num_reruns,
  input  logic [15:0]          conv_cycles,
  input  logic [9:0]           theta_permille,
  input  logic                 train_mode,
  // image buffer
  input  logic                 img_we,
  input  logic [AW-1:0]        img_addr,
  input  logic [XW-1:0]        img_data,
  // output weights
  input  logic                 beta_we,
  input  logic [IW-1:0]        beta_addr,
  input  logic [C*BB-1:0]      beta_data,
  // control
  input  logic                 start,
  input  logic                 cog_clear,
  input  logic                 cog_finalize,
  output logic                 busy,
  output logic                 done,
  output logic                 cog_busy,
  output logic [15:0]          cog_samples,
  // result
  output logic                 class_valid,
  output logic [KW-1:0]        class_id,
  output logic signed [31:0]   scores [C],
  output logic [IW:0]          fetches
);

  // chip pins
  logic          rn_in, clk_in, data_in, rn_cnt, neu_en, clk_out;
  logic [AW-1:0] a;
  logic [CW-1:0] c;

  hid_t hid;
  act_t act, act_train, act_infer;

  logic          cog_we, cog_bit;
  logic [IW-1:0] cog_idx;

  timing_control #(.D(D), .D_CH(D_CH), .N(N), .E_MAX(E_MAX), .XW(XW), .AW(AW), .EW(EW)) u_ctrl (
    .clk, .rst_n, .start, .num_reruns, .conv_cycles,
    .img_we, .img_addr, .img_data, .busy, .done,
    .rn_in, .clk_in, .data_in, .a, .rn_cnt, .neu_en, .clk_out, .c, .hid
  );

  delm_ic #(.D_CH(D_CH), .N(N), .XW(XW), .CW(CW), .SEED(SEED), .AW(AW)) u_chip (
    .clk, .rn_in, .clk_in, .data_in, .a, .rn_cnt, .neu_en, .clk_out, .c
  );

  nonlinearity u_nl (
    .clk, .rst_n, .mode(nl_mode), .th, .h_offset, .q_shift, .in(hid), .out(act)
  );

  always_comb begin
    act_train = train_mode ? act : '0;
    act_infer = train_mode ? '0  : act;
  end

  cognizance_checker #(.L_MAX(L_MAX), .SW(16), .IW(IW)) u_cog (
    .clk, .rst_n, .clear(cog_clear), .finalize(cog_finalize), .theta_permille,
    .num_hidden((IW+1)'(num_reruns) * (IW+1)'(N)), .act(act_train),
    .busy(cog_busy), .samples(cog_samples), .cog_we, .cog_idx, .cog_bit
  );

  elm_second_stage #(.C(C), .BB(BB), .AW_ACC(32), .L_MAX(L_MAX), .M_MAX(L_MAX), .IW(IW), .MW(IW), .KW(KW)) u_out (
    .clk, .rst_n, .mode(nl_mode), .start(start && !train_mode), .act(act_infer),
    .beta_we, .beta_addr, .beta_data, .cog_we, .cog_idx, .cog_bit,
    .class_valid, .class_id, .scores, .fetches
  );

endmodule
