// Column scanner of the D-ELM chip: reads the N neuron counters out over one
// CW-bit bus (C<13:0>).
//
// A column index selects which counter drives c.  Each cycle with the clk_out
// strobe high advances the index by one, wrapping after column N-1; rn_cnt
// (active low) returns it to column 0, so every conversion is read out from
// the first column.  c is a combinational function of the index and the
// counters: the receiver samples c on the same edge that advances the index,
// giving one column per strobed cycle.
//
// From the paper: the scanner, the CLK_out pin and the 14-bit bus.  This
// design's own choices: scan order, wrap-around, and the restart on rn_cnt.
module column_scanner #(
  parameter int unsigned N  = 128,
  parameter int unsigned CW = 14
) (
  input  logic          clk,
  input  logic          rn_cnt,
  input  logic          clk_out,
  input  logic [CW-1:0] h [N],
  output logic [CW-1:0] c
);

  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1;

  logic [SW-1:0] sel;

  always_ff @(posedge clk) begin
    if (!rn_cnt)      sel <= '0;
    else if (clk_out) sel <= (int'(sel) == N - 1) ? '0 : sel + 1'b1;
  end

  assign c = h[sel];

endmodule
