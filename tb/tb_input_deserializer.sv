// Self-checking test of input_deserializer at full size (128 x 8 bit).
// Sends random words to random addresses MSB first and compares the register
// file with a reference array after each word; checks that a word appears
// exactly one cycle after its last bit (XW strobed cycles per word), that
// cycles without the strobe do not shift, and that rn_in clears everything.
module tb_input_deserializer;
  localparam int D_CH = 128, XW = 8;
  logic clk = 0, rn_in, clk_in, data_in;
  logic [6:0] a;
  logic [XW-1:0] x [D_CH];
  logic [XW-1:0] ref_x [D_CH];
  int checks = 0, failures = 0;

  input_deserializer #(.D_CH(D_CH), .XW(XW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send(input logic [6:0] addr, input logic [XW-1:0] w, input bit gaps);
    for (int b = XW - 1; b >= 0; b--) begin
      if (gaps && ($urandom % 3 == 0)) begin
        clk_in <= 0; data_in <= ~w[b];
        @(posedge clk);
      end
      clk_in <= 1; data_in <= w[b]; a <= addr;
      @(posedge clk);
      if (b == 1) check(x[addr] == ref_x[addr], "word must not change before its last bit");
    end
    clk_in <= 0; data_in <= 0;
    ref_x[addr] = w;
    #1;
    check(x[addr] == w, $sformatf("word at address %0d: got %0h expected %0h", addr, x[addr], w));
  endtask

  initial begin
    rn_in = 0; clk_in = 0; data_in = 0; a = 0;
    for (int i = 0; i < D_CH; i++) ref_x[i] = 0;
    repeat (2) @(posedge clk);
    rn_in <= 1;
    @(posedge clk); #1;
    for (int i = 0; i < D_CH; i++) check(x[i] == 0, "reset value");
    // every address once, in order
    for (int i = 0; i < D_CH; i++) send(7'(i), XW'($urandom), 0);
    // random addresses with idle gaps between bits
    for (int n = 0; n < 300; n++) send(7'($urandom % D_CH), XW'($urandom), 1);
    for (int i = 0; i < D_CH; i++) check(x[i] == ref_x[i], $sformatf("final register %0d", i));
    rn_in <= 0;
    @(posedge clk); rn_in <= 1; #1;
    for (int i = 0; i < D_CH; i++) check(x[i] == 0, "cleared by rn_in");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
