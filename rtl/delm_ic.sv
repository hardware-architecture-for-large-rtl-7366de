// The D-ELM chip: a parallel array of N random feature extractors.
//
// Data path, as in the chip block diagram:
//   data_in/a --> input_deserializer (D_CH input registers)
//             --> cma_model (D_CH DACs driving D_CH x N random current
//                 mirrors, column sums)
//             --> cco_model x N (current-controlled oscillators, gated by neu_en)
//             --> neuron_counter x N (spike counts h_j, cleared by rn_cnt)
//             --> column_scanner (one count per clk_out strobe on c)
// The DACs (IGCs), mirror array and oscillators are analog on silicon and are
// behavioural models here; the registers, counters and scanner are logic.
//
// One conversion: load the input words, pulse rn_cnt low, hold neu_en high
// for the conversion window, drop it, then strobe clk_out N times while
// sampling c.  All pins are synchronous to clk; clk_in and clk_out are
// strobes in that clock domain rather than separate clocks.
//
// From the paper: the block structure, the sizes (128 x 128) and the pin
// names.  This design's own choices: the single-clock pin timing and the
// analog models' details (see each model).
module delm_ic #(
  parameter int unsigned D_CH = 128,
  parameter int unsigned N    = 128,
  parameter int unsigned XW   = 8,
  parameter int unsigned CW   = 14,
  parameter int unsigned SEED = 1,
  parameter int unsigned AW   = $clog2(D_CH)
) (
  input  logic          clk,
  input  logic          rn_in,
  input  logic          clk_in,
  input  logic          data_in,
  input  logic [AW-1:0] a,
  input  logic          rn_cnt,
  input  logic          neu_en,
  input  logic          clk_out,
  output logic [CW-1:0] c
);

  logic [XW-1:0] x     [D_CH];
  logic [31:0]   i_col [N];
  logic          spike [N];
  logic [CW-1:0] h     [N];

  input_deserializer #(.D_CH(D_CH), .XW(XW), .AW(AW)) u_deser (
    .clk, .rn_in, .clk_in, .data_in, .a, .x
  );

  cma_model #(.D_CH(D_CH), .N(N), .SEED(SEED), .XW(XW)) u_cma (.x, .i_z(i_col));

  for (genvar j = 0; j < N; j++) begin : g_neuron
    cco_model #(.SEED(SEED), .NEURON_ID(j)) u_cco (
      .clk, .en(neu_en), .i_z(i_col[j]), .spike(spike[j])
    );
    neuron_counter #(.CW(CW)) u_cnt (
      .clk, .rn_cnt, .spike(spike[j]), .count(h[j])
    );
  end

  column_scanner #(.N(N), .CW(CW)) u_scan (.clk, .rn_cnt, .clk_out, .h, .c);

endmodule
