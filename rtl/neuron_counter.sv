// Spike counter of one hidden neuron (CNT_j in the chip block diagram).
//
// Counts the pulses of its CCO during a conversion; the final value is the
// neuron's digital output h_j, read through the column scanner.  rn_cnt
// (active low, synchronous) clears it at the start of each conversion.  The
// count saturates at 2^CW-1 rather than wrapping, so an over-driven neuron
// reads as full scale.  count is registered: a spike in cycle t is counted at
// the clock edge that ends cycle t.
//
// From the paper: one counter per neuron, its reset pin, and the 14-bit output
// bus width.  This design's own choices: saturation, and treating the spike as
// an enable in the system clock domain.
module neuron_counter #(
  parameter int unsigned CW = 14
) (
  input  logic          clk,
  input  logic          rn_cnt,
  input  logic          spike,
  output logic [CW-1:0] count
);

  always_ff @(posedge clk) begin
    if (!rn_cnt)                    count <= '0;
    else if (spike && (count != '1)) count <= count + 1'b1;
  end

endmodule
