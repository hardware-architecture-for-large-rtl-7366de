// Self-checking test of the cognizance checker at its default size
// (L_MAX = 12800) with 300 hidden neurons and 400 training samples.
// Neurons are given level patterns of known statistics: always at one level,
// 399 or 398 of 400 at one level (just above / below theta = 99.5%), or
// random.  The test bench keeps its own per-neuron counts and compares the
// emitted cognizance vector with count*1000 > theta*S.  It also checks the
// sample count, that finalize emits exactly one bit per neuron in
// num_hidden consecutive cycles, and that clear wipes the counts (a second
// run with theta = 100% must mark every neuron cognizant).
module tb_cognizance_checker;
  import elm_pkg::*;
  localparam int L = 300, S = 400;
  logic clk = 0, rst_n, clear, finalize, busy, cog_we, cog_bit;
  logic [9:0] theta_permille;
  logic [14:0] num_hidden;
  act_t act;
  logic [15:0] samples;
  logic [13:0] cog_idx;
  int cnt [L][4];
  int kind [L];
  int got [L];
  int checks = 0, failures = 0;
  int n_muted = 0;

  cognizance_checker dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sat_e level_for(input int j, input int s);
    sat_e fixed;
    fixed = sat_e'(1 + (j % 3));
    case (kind[j])
      0: return fixed;                                       // always one level
      1: return (s == 7) ? SAT_NONE : fixed;                 // 399 of 400
      2: return (s == 7 || s == 300) ? SAT_NONE : fixed;     // 398 of 400
      default: return sat_e'($urandom % 4);
    endcase
  endfunction

  always @(posedge clk) if (rst_n && cog_we) begin
    check(int'(cog_idx) < L, "index in range");
    if (int'(cog_idx) < L) got[cog_idx] <= got[cog_idx] + 1 + (cog_bit ? 10 : 0);
  end

  task automatic run(input int theta);
    int t0, t1;
    @(negedge clk);
    theta_permille <= 10'(theta);
    clear <= 1; @(negedge clk); clear <= 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    for (int j = 0; j < L; j++) begin got[j] = 0; for (int v = 0; v < 4; v++) cnt[j][v] = 0; end
    for (int s = 0; s < S; s++) begin
      for (int j = 0; j < L; j++) begin
        act_t w;
        w = '0;
        w.valid = 1; w.idx = IDX_W'(j); w.last = (j == L - 1);
        w.sat = level_for(j, s);
        cnt[j][int'(w.sat)]++;
        act <= w;
        @(negedge clk);
      end
      if (s % 50 == 0) begin act <= '0; @(negedge clk); end
    end
    act <= '0;
    @(negedge clk);
    check(int'(samples) == S, $sformatf("samples %0d", samples));
    finalize <= 1; @(negedge clk); finalize <= 0; t0 = $time / 10;
    @(negedge clk);
    while (busy) @(negedge clk);
    t1 = $time / 10;
    @(negedge clk); @(negedge clk);
    check(t1 - t0 == L, $sformatf("finalize took %0d cycles", t1 - t0));
    for (int j = 0; j < L; j++) begin
      bit muted;
      muted = 0;
      for (int v = 1; v < 4; v++) if (cnt[j][v] * 1000 > theta * S) muted = 1;
      check(got[j] == (muted ? 1 : 11), $sformatf("neuron %0d kind %0d: got code %0d, muted=%0d", j, kind[j], got[j], muted));
      if (muted) n_muted++;
    end
  endtask

  initial begin
    rst_n = 0; clear = 0; finalize = 0; act = '0; theta_permille = 995;
    num_hidden = 15'(L);
    for (int j = 0; j < L; j++) kind[j] = (j < 40) ? j % 3 : 3;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(995);
    $display("muted at 99.5%%: %0d", n_muted);
    check(n_muted == 27, $sformatf("27 neurons expected muted, got %0d", n_muted));
    n_muted = 0;
    run(1000);
    check(n_muted == 0, "no neuron muted at theta = 100%");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
