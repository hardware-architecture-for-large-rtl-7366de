// Full-size end-to-end test: the same sequence as tb_elm_rfe_system, but with
// E = 100 reruns, i.e. the largest expansion, L = 12800 virtual neurons, as in
// the paper's MNIST runs; 3 training images, one RLSU and one tristate image.
//
// Top elm_rfe_system with all
// parameters at their defaults: 126-pixel images, 128 x 128 chip, up to 100
// reruns, 10 classes.  Run-time settings: E = 100 reruns (L = 12800 virtual
// neurons), a 300-cycle conversion window.
//
// 1. Cognizance training: S_TRAIN random sparse images in training mode
//    (RLSU), then finalize.
// 2. Output weights: random 6-bit rows for the neurons the test bench itself
//    finds cognizant, written compacted.
// 3. Inference: images in RLSU mode, then in tristate mode.
// Checks, all against references computed here:
//  - every hidden count equals the count predicted from the rotated image,
//    the chip's mirror weights and oscillator gains (within one count); this
//    checks the input rotation r for every virtual neuron j = r*N + n;
//  - the cognizance vector written into the output layer equals the one
//    computed from the observed counts with the RLSU/tristate definitions
//    and the theta rule;
//  - scores, class and weight fetches of each inference image;
//  - the cycle count of an image, 2 + E*(D*8 + 1 + T + 2 + N), measured from
//    the edge that takes start (the first falling edge after it is one later).
// Mechanisms counted (each must occur): rerun with rotation, RLSU low / linear
// / high, tristate -1 / 0 / +1, muted and kept neurons, skipped fetches, and
// the switch from training to inference mode.
module tb_elm_rfe_system_full;
  import elm_pkg::*;
  localparam int D = 126, N = 128, C = 10, BB = 6;
  localparam int E = 100, T = 300, S_TRAIN = 3, S_RLSU = 1, S_TRI = 1;
  localparam int TH = 40, OFF = 150, THETA = 800;
  localparam int L = E * N;
  localparam int WATCHDOG = 200000 + (S_TRAIN + S_RLSU + S_TRI) * E * (D * 8 + T + 200);

  logic clk = 0, rst_n;
  nl_mode_e nl_mode;
  logic [CW-1:0] th, h_offset;
  logic [3:0] q_shift;
  logic [6:0] num_reruns;
  logic [15:0] conv_cycles;
  logic [9:0] theta_permille;
  logic train_mode, img_we, beta_we, start, cog_clear, cog_finalize;
  logic [6:0] img_addr;
  logic [7:0] img_data;
  logic [13:0] beta_addr;
  logic [C*BB-1:0] beta_data;
  logic busy, done, cog_busy, class_valid;
  logic [15:0] cog_samples;
  logic [3:0] class_id;
  logic signed [31:0] scores [C];
  logic [14:0] fetches;

  elm_rfe_system dut (.*);

  logic [15:0] gains [N];
  for (genvar j = 0; j < N; j++) begin : g_gain
    assign gains[j] = dut.u_chip.g_neuron[j].u_cco.gain;
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_rerun = 0, n_rlsu_low = 0, n_rlsu_lin = 0, n_rlsu_high = 0;
  int n_tri_neg = 0, n_tri_zero = 0, n_tri_pos = 0, n_muted = 0, n_kept = 0;
  int n_skipped = 0, n_mode_switch = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // observed hidden counts of the current image
  int cnt [L];
  int nobs;
  always @(posedge clk) if (rst_n && dut.hid.valid) begin
    if (int'(dut.hid.idx) < L) cnt[dut.hid.idx] <= int'(dut.hid.count);
    nobs <= nobs + 1;
  end

  logic [7:0] img [D];
  bit       cog [L];
  int       lev [L][4];
  logic [C*BB-1:0] rows [L];
  int       M;

  // reference activation: returns value with sign and the level index
  task automatic act_ref(input nl_mode_e m, input int count, output int v, output int level);
    int y;
    y = count - OFF;
    if (m == NL_RLSU) begin
      if (y <= 0)       begin v = 0;  level = 1; end
      else if (y >= TH) begin v = TH; level = 3; end
      else              begin v = y;  level = 0; end
    end else begin
      if (y >= TH)       begin v = 1;  level = 3; end
      else if (y <= -TH) begin v = -1; level = 1; end
      else               begin v = 0;  level = 2; end
    end
  endtask

  task automatic new_image();
    for (int i = 0; i < D; i++) begin
      img[i] = ($urandom % 2) ? 8'($urandom) : 8'd0;
      img_we = 1; img_addr = 7'(i); img_data = img[i];
      @(negedge clk);
    end
    img_we = 0;
  endtask

  task automatic run_image();
    int t0, t1;
    nobs = 0;
    start = 1; @(negedge clk); start = 0; t0 = $time / 10;
    while (!done) @(negedge clk);
    t1 = $time / 10;
    repeat (4) @(negedge clk);
    check(t1 - t0 + 1 == 2 + E * (D * 8 + 1 + T + 2 + N), $sformatf("image took %0d cycles", t1 - t0));
    check(nobs == L, $sformatf("%0d hidden words", nobs));
    n_rerun += E - 1;
    // predicted counts, rotation r: channel k holds pixel (k - r) mod D
    for (int r = 0; r < E; r++) for (int n = 0; n < N; n++) begin
      longint iz, ex;
      iz = 0;
      for (int k = 0; k < D; k++) iz += longint'(dut.u_chip.u_cma.w[k][n]) * 4 * longint'(img[((k - r) % D + D) % D]);
      ex = (longint'(T) * iz * longint'(gains[n])) >>> 32;
      if (ex > T) ex = T;
      check(longint'(cnt[r * N + n]) >= ex - 1 && longint'(cnt[r * N + n]) <= ex + 1,
            $sformatf("rerun %0d neuron %0d: count %0d predicted %0d", r, n, cnt[r * N + n], ex));
    end
  endtask

  task automatic infer(input nl_mode_e m);
    longint o [C];
    int mi, best, v, level;
    nl_mode = m;
    new_image();
    run_image();
    for (int k = 0; k < C; k++) o[k] = 0;
    mi = 0;
    for (int j = 0; j < L; j++) begin
      act_ref(m, cnt[j], v, level);
      if (m == NL_RLSU) begin
        if (level == 1) n_rlsu_low++; else if (level == 3) n_rlsu_high++; else n_rlsu_lin++;
      end else begin
        if (level == 1) n_tri_neg++; else if (level == 3) n_tri_pos++; else n_tri_zero++;
      end
      if (cog[j]) begin
        for (int k = 0; k < C; k++) begin
          int b;
          b = int'(rows[mi][k*BB +: BB-1]);
          if (rows[mi][k*BB + BB-1]) b = -b;
          o[k] += longint'(b) * longint'(v);
        end
        mi++;
      end else n_skipped++;
    end
    best = 0;
    for (int k = 1; k < C; k++) if (o[k] > o[best]) best = k;
    check(class_id == 4'(best), $sformatf("class %0d expected %0d", class_id, best));
    for (int k = 0; k < C; k++) check(longint'(scores[k]) == o[k], $sformatf("score %0d: %0d expected %0d", k, scores[k], o[k]));
    check(int'(fetches) == M, $sformatf("fetches %0d expected %0d", fetches, M));
    $display("inference (%s): class %0d, fetches %0d of %0d", m == NL_RLSU ? "RLSU" : "tristate", class_id, fetches, L);
  endtask

  initial begin
    rst_n = 0; nl_mode = NL_RLSU; th = CW'(TH); h_offset = CW'(OFF); q_shift = 0;
    num_reruns = 7'(E); conv_cycles = 16'(T); theta_permille = 10'(THETA);
    train_mode = 1; img_we = 0; beta_we = 0; start = 0; cog_clear = 0; cog_finalize = 0;
    img_addr = 0; img_data = 0; beta_addr = 0; beta_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1. cognizance training
    cog_clear = 1; @(negedge clk); cog_clear = 0;
    while (cog_busy) @(negedge clk);
    for (int j = 0; j < L; j++) for (int v = 0; v < 4; v++) lev[j][v] = 0;
    for (int s = 0; s < S_TRAIN; s++) begin
      new_image();
      run_image();
      for (int j = 0; j < L; j++) begin
        int v, level;
        act_ref(NL_RLSU, cnt[j], v, level);
        lev[j][level]++;
      end
    end
    check(int'(cog_samples) == S_TRAIN, "training sample count");
    cog_finalize = 1; @(negedge clk); cog_finalize = 0;
    while (cog_busy) @(negedge clk);
    @(negedge clk);
    M = 0;
    for (int j = 0; j < L; j++) begin
      bit muted;
      muted = 0;
      for (int v = 1; v < 4; v++) if (lev[j][v] * 1000 > THETA * S_TRAIN) muted = 1;
      cog[j] = !muted;
      check(dut.u_out.cog_mem[j] == cog[j], $sformatf("cognizance bit %0d", j));
      if (muted) n_muted++; else n_kept++;
      if (!muted) begin
        for (int k = 0; k < C; k++) rows[M][k*BB +: BB] = BB'($urandom);
        beta_we = 1; beta_addr = 14'(M); beta_data = rows[M];
        @(negedge clk);
        M++;
      end
    end
    beta_we = 0;
    $display("cognizance: %0d of %0d neurons kept", M, L);
    // 2. inference
    train_mode = 0; n_mode_switch++;
    for (int s = 0; s < S_RLSU; s++) infer(NL_RLSU);
    for (int s = 0; s < S_TRI; s++) infer(NL_TRISTATE);
    // mechanisms
    $display("reruns %0d, RLSU low/linear/high %0d/%0d/%0d, tristate -1/0/+1 %0d/%0d/%0d, muted %0d kept %0d, skipped fetches %0d, mode switches %0d",
             n_rerun, n_rlsu_low, n_rlsu_lin, n_rlsu_high, n_tri_neg, n_tri_zero, n_tri_pos, n_muted, n_kept, n_skipped, n_mode_switch);
    check(n_rerun > 0, "rotation rerun happened");
    check(n_rlsu_low > 0 && n_rlsu_lin > 0 && n_rlsu_high > 0, "all RLSU regions reached");
    check(n_tri_neg > 0 && n_tri_zero > 0 && n_tri_pos > 0, "all tristate levels reached");
    check(n_muted > 0 && n_kept > 0, "some neurons muted and some kept");
    check(n_skipped > 0, "fetches skipped for muted neurons");
    check(n_mode_switch > 0, "training to inference switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
