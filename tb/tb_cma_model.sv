// Self-checking test of the DAC and current mirror array model at full size
// (128 x 128).  Checks: (1) the log-normal weight statistics the paper uses,
// mean of ln(w) near 0 and standard deviation near 0.6, all weights positive;
// (2) input 1 on one row reads back I_UNIT times that row's weights on every
// column;
// (3) superposition (DAC and mirrors linear): the output for a sum of two
// random inputs equals the sum
// of the two outputs; (4) columns are not copies of each other.
module tb_cma_model;
  localparam int D_CH = 128, N = 128, WFRAC = 8, XW = 8, I_UNIT = 4;
  logic [XW-1:0] x [D_CH];
  logic [31:0] i_z  [N];
  logic [31:0] za [N], zb [N];
  logic [XW-1:0] xa [D_CH], xb [D_CH];
  int checks = 0, failures = 0;

  cma_model #(.D_CH(D_CH), .N(N), .WFRAC(WFRAC)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real s, s2, lw, mean, sd;
    int same;
    #1;
    // (1) statistics of the fixed-point weights
    s = 0; s2 = 0;
    for (int i = 0; i < D_CH; i++) for (int j = 0; j < N; j++) begin
      lw = $ln(real'(dut.w[i][j]) / real'(1 << WFRAC));
      s += lw; s2 += lw * lw;
      if (dut.w[i][j] == 0) check(0, "zero weight");
    end
    mean = s / (D_CH * N);
    sd   = $sqrt(s2 / (D_CH * N) - mean * mean);
    $display("ln(w): mean %f sd %f", mean, sd);
    check(mean > -0.03 && mean < 0.03, "mean of ln(w) near 0");
    check(sd > 0.57 && sd < 0.63, "sd of ln(w) near 0.6");
    // (2) unit current per row
    for (int r = 0; r < D_CH; r++) begin
      for (int i = 0; i < D_CH; i++) x[i] = (i == r) ? XW'(1) : XW'(0);
      #1;
      for (int j = 0; j < N; j++)
        check(i_z[j] == 32'(dut.w[r][j]) * I_UNIT, $sformatf("row %0d column %0d", r, j));
    end
    // (3) superposition with random currents
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < D_CH; i++) begin xa[i] = XW'($urandom % 128); xb[i] = XW'($urandom % 128); end
      x = xa; #1; za = i_z;
      x = xb; #1; zb = i_z;
      for (int i = 0; i < D_CH; i++) x[i] = xa[i] + xb[i];
      #1;
      for (int j = 0; j < N; j++) check(i_z[j] == za[j] + zb[j], $sformatf("superposition col %0d", j));
    end
    // (4) distinct columns
    same = 0;
    for (int j = 1; j < N; j++) if (za[j] == za[j-1]) same++;
    check(same == 0, "adjacent columns give different sums");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
