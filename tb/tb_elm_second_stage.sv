// Self-checking test of the ELM output layer at its default sizes (C = 10,
// 6-bit sign-magnitude weights, L_MAX = 12800).  A random cognizance vector
// over 600 neurons and the matching compacted weight rows are written, then
// images of random activations are streamed in RLSU and tristate mode, with
// and without idle gaps.  Scores, the winning class (ties to the lower index),
// the number of weight fetches (= number of cognizant neurons) and the
// result latency (class_valid two cycles after the last word) are compared
// with a reference computed in the test bench.  Latency is counted in falling
// edges after the edge that takes the last word.
module tb_elm_second_stage;
  import elm_pkg::*;
  localparam int C = 10, BB = 6, L = 600;
  logic clk = 0, rst_n, start, beta_we, cog_we, cog_bit, class_valid;
  nl_mode_e mode;
  act_t act;
  logic [13:0] beta_addr, cog_idx;
  logic [C*BB-1:0] beta_data;
  logic [3:0] class_id;
  logic signed [31:0] scores [C];
  logic [14:0] fetches;
  bit cog [L];
  logic [C*BB-1:0] rows [L];
  int M;
  int checks = 0, failures = 0;

  elm_second_stage dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int beta_val(input logic [BB-1:0] b);
    int m;
    m = int'(b[BB-2:0]);
    return b[BB-1] ? -m : m;
  endfunction

  task automatic run_image(input nl_mode_e m, input bit gaps, input bit tie);
    longint o [C];
    int mi, best, lat;
    act_t w;
    for (int k = 0; k < C; k++) o[k] = 0;
    @(negedge clk);
    mode <= m; start <= 1;
    @(negedge clk);
    start <= 0;
    mi = 0;
    for (int j = 0; j < L; j++) begin
      int h; bit ng;
      w = '0;
      w.valid = 1; w.idx = IDX_W'(j); w.last = (j == L - 1);
      if (tie) begin h = 0; ng = 0; end
      else if (m == NL_RLSU) begin h = $urandom % 256; ng = 0; end
      else begin h = $urandom % 2; ng = h ? ($urandom % 2) : 0; end
      w.mag = HB'(h); w.neg = ng;
      if (cog[j]) begin
        for (int k = 0; k < C; k++) o[k] += beta_val(rows[mi][k*BB +: BB]) * (ng ? -h : h);
        mi++;
      end
      act <= w;
      @(negedge clk);
      if (gaps && ($urandom % 4 == 0)) begin act <= '0; @(negedge clk); end
    end
    act <= '0;
    lat = 0;
    while (!class_valid) begin @(negedge clk); lat++; if (lat > 10) break; end
    check(lat == 2, $sformatf("result latency %0d", lat));
    best = 0;
    for (int k = 1; k < C; k++) if (o[k] > o[best]) best = k;
    for (int k = 0; k < C; k++) check(longint'(scores[k]) == o[k], $sformatf("score %0d: %0d vs %0d", k, scores[k], o[k]));
    check(int'(class_id) == best, $sformatf("class %0d expected %0d", class_id, best));
    check(int'(fetches) == M, $sformatf("fetches %0d expected %0d", fetches, M));
  endtask

  initial begin
    rst_n = 0; start = 0; beta_we = 0; cog_we = 0; cog_bit = 0; act = '0; mode = NL_RLSU;
    beta_addr = 0; cog_idx = 0; beta_data = 0;
    repeat (2) @(negedge clk);
    rst_n <= 1;
    M = 0;
    for (int j = 0; j < L; j++) begin
      cog[j] = ($urandom % 10) < 7;
      cog_we <= 1; cog_idx <= 14'(j); cog_bit <= cog[j];
      if (cog[j]) begin
        for (int k = 0; k < C; k++) rows[M][k*BB +: BB] = BB'($urandom);
        beta_we <= 1; beta_addr <= 14'(M); beta_data <= rows[M];
        M++;
      end else beta_we <= 0;
      @(negedge clk);
    end
    cog_we <= 0; beta_we <= 0;
    $display("%0d of %0d neurons cognizant", M, L);
    run_image(NL_RLSU, 0, 0);
    run_image(NL_RLSU, 1, 0);
    run_image(NL_TRISTATE, 0, 0);
    run_image(NL_TRISTATE, 1, 0);
    run_image(NL_RLSU, 0, 1);   // all scores zero: tie goes to class 0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
