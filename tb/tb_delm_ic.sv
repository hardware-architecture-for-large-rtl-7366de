// Self-checking test of the whole D-ELM chip model at full size (128 inputs,
// 128 neurons).  The test bench drives the chip pins directly: it loads a
// random input vector serially, pulses rn_cnt, holds neu_en for T cycles and
// scans the 128 counts out with clk_out.  Each count is compared with the
// count predicted from the chip's own mirror weights and oscillator gains
// (read hierarchically) and the serial input the test bench sent:
// floor(T * (sum_i w_ij * 4 * x_i) * gain_j / 2^32), within one count.  The
// input registers, an all-zero input (no spikes) and a second random input
// are checked too.
module tb_delm_ic;
  localparam int D_CH = 128, N = 128, XW = 8, CW = 14, T = 1000;
  logic clk = 0, rn_in, clk_in, data_in, rn_cnt, neu_en, clk_out;
  logic [6:0] a;
  logic [CW-1:0] c;
  logic [XW-1:0] xv [D_CH];
  logic [15:0] gains [N];
  int checks = 0, failures = 0;

  delm_ic dut (.*);

  for (genvar j = 0; j < N; j++) begin : g_gain
    assign gains[j] = dut.g_neuron[j].u_cco.gain;
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input bit zero);
    for (int i = 0; i < D_CH; i++) begin
      xv[i] = zero ? '0 : XW'($urandom % 64);
      for (int b = XW - 1; b >= 0; b--) begin
        clk_in = 1; data_in = xv[i][b]; a = 7'(i);
        @(negedge clk);
      end
    end
    clk_in = 0;
    for (int i = 0; i < D_CH; i++) check(dut.x[i] == xv[i], $sformatf("input register %0d", i));
  endtask

  task automatic convert_and_check(output int total);
    total = 0;
    rn_cnt = 0; @(negedge clk); rn_cnt = 1;
    neu_en = 1; repeat (T) @(negedge clk); neu_en = 0;
    repeat (2) @(negedge clk);
    for (int j = 0; j < N; j++) begin
      longint iz, expct;
      iz = 0;
      for (int i = 0; i < D_CH; i++) iz += longint'(dut.u_cma.w[i][j]) * 4 * longint'(xv[i]);
      expct = (longint'(T) * iz * longint'(gains[j])) >>> 32;
      if (expct > T) expct = T;
      check(longint'(c) >= expct - 1 && longint'(c) <= expct + 1,
            $sformatf("neuron %0d count %0d expected %0d", j, c, expct));
      total += int'(c);
      clk_out = 1; @(negedge clk); clk_out = 0;
    end
  endtask

  initial begin
    int tot;
    rn_in = 0; clk_in = 0; data_in = 0; a = 0; rn_cnt = 1; neu_en = 0; clk_out = 0;
    repeat (2) @(negedge clk);
    rn_in <= 1;
    @(negedge clk);
    load(0);
    convert_and_check(tot);
    $display("random input 1: mean count %0d", tot / N);
    check(tot > 0, "spikes for a non-zero input");
    load(0);
    convert_and_check(tot);
    $display("random input 2: mean count %0d", tot / N);
    load(1);
    convert_and_check(tot);
    check(tot == 0, "no spikes for a zero input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
