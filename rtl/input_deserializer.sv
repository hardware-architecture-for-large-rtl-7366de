// Serial input port and input register file of the D-ELM chip.
//
// Each input word X_i arrives bit-serially on data_in, most significant bit
// first, one bit per cycle in which the clk_in strobe is high.  A bit counter
// frames the words: when the XW-th bit of a word arrives, the assembled word is
// written into the register selected by the address a (the 1-to-D_CH
// demultiplexer of the block diagram).  The address must be stable while the
// last bit of its word is shifted in.  rn_in (active low) clears the registers
// and the framing counter.  The register outputs drive the input generation
// circuits (DACs) continuously.
//
// Timing: a word is visible on x[a] the cycle after its last bit is taken, so
// loading D words costs D*XW strobed cycles.
//
// From the paper: serial input, deserialisation, addressed registers, 128
// channels, a 7-bit address and the pin names.  This design's own choices: the
// word width, MSB-first framing, a strobe instead of a separate input clock,
// and active-low reset.
module input_deserializer #(
  parameter int unsigned D_CH = 128,
  parameter int unsigned XW   = 8,
  parameter int unsigned AW   = $clog2(D_CH)
) (
  input  logic                clk,
  input  logic                rn_in,
  input  logic                clk_in,
  input  logic                data_in,
  input  logic [AW-1:0]       a,
  output logic [XW-1:0]       x [D_CH]
);

  logic [XW-2:0]          shreg;
  logic [$clog2(XW)-1:0]  nbit;
  logic [XW-1:0]          word;

  assign word = {shreg, data_in};

  always_ff @(posedge clk) begin
    if (!rn_in) begin
      shreg <= '0;
      nbit  <= '0;
      for (int i = 0; i < D_CH; i++) x[i] <= '0;
    end else if (clk_in) begin
      shreg <= word[XW-2:0];
      if (nbit == ($clog2(XW))'(XW - 1)) begin
        nbit <= '0;
        if (int'(a) < D_CH) x[a] <= word;
      end else begin
        nbit <= nbit + 1'b1;
      end
    end
  end

endmodule
