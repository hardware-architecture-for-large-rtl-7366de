// Self-checking test of the CCO neuron model.  With a constant current the
// spike count over a window must match floor(T * i_z * gain / PHASE_FULL)
// (within one), the rate must rise with current, saturate at one spike per
// cycle, and stop when en is low.
module tb_cco_model;
  localparam longint unsigned FULL = 64'd4294967296;
  logic clk = 0, en;
  logic [31:0] i_z;
  logic spike;
  int checks = 0, failures = 0;

  cco_model #(.PHASE_FULL(FULL), .NEURON_ID(5)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int count_window(input int t);
    return 0;
  endfunction

  task automatic run(input logic [31:0] cur, input int t, output int n);
    n = 0;
    en <= 0; i_z <= cur;
    @(posedge clk);
    en <= 1;
    for (int k = 0; k < t; k++) begin
      @(posedge clk);
      if (spike) n++;
    end
    en <= 0;
    @(posedge clk);
    if (spike) n++;
  endtask

  initial begin
    int n, prev, t;
    longint expct;
    en = 0; i_z = 0;
    repeat (3) @(posedge clk);
    check(dut.gain > 0, "gain positive");
    t = 2000;
    prev = -1;
    for (int s = 0; s < 12; s++) begin
      logic [31:0] cur;
      cur = 32'(1000 * (1 << s));
      run(cur, t, n);
      expct = (longint'(t) * longint'(cur) * longint'(dut.gain)) / longint'(FULL);
      if (expct > t) expct = t;
      $display("i_z %0d: %0d spikes, expected %0d", cur, n, expct);
      check(n >= expct - 1 && n <= expct + 1, $sformatf("spike count at current %0d", cur));
      check(n >= prev, "monotonic in current");
      prev = n;
    end
    // saturation: one spike per cycle at most
    run(32'hFFFF_FFFF, 100, n);
    check(n == 100, "saturates at one spike per cycle");
    // disabled: no spikes
    en <= 0; i_z <= 32'h00FF_FFFF;
    n = 0;
    repeat (50) begin @(posedge clk); if (spike) n++; end
    check(n <= 1, "no spikes while en is low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
