// Self-checking test of neuron_counter: random spike trains are counted
// exactly, the counter holds at full scale, and rn_cnt clears it.
module tb_neuron_counter;
  localparam int CW = 14;
  logic clk = 0, rn_cnt, spike;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;

  neuron_counter #(.CW(CW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expct;
    rn_cnt = 0; spike = 0;
    @(posedge clk); #1;
    check(count == 0, "reset");
    rn_cnt = 1;
    for (int trial = 0; trial < 20; trial++) begin
      expct = 0;
      for (int k = 0; k < 500; k++) begin
        spike = ($urandom % 4) < (trial % 4);
        @(posedge clk); #1;
        if (spike) expct++;
        check(int'(count) == expct, $sformatf("count %0d expected %0d", count, expct));
      end
      spike = 0; rn_cnt = 0;
      @(posedge clk); #1;
      check(count == 0, "cleared by rn_cnt");
      rn_cnt = 1;
    end
    // saturation
    spike = 1;
    repeat ((1 << CW) + 100) @(posedge clk);
    #1;
    check(count == '1, "holds at full scale");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
