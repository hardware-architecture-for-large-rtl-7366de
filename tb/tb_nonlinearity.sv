// Self-checking test of the hidden-layer activation.  Random counts, offsets,
// thresholds and shifts are pushed through both modes, one word per cycle, and
// each output is compared one cycle later with a reference written from the
// RLSU and tristate definitions (integer arithmetic, no shared code).  Edge
// cases y = 0, y = th and y = -th are forced regularly.
module tb_nonlinearity;
  import elm_pkg::*;
  logic clk = 0, rst_n;
  nl_mode_e mode;
  logic [CW-1:0] th, h_offset;
  logic [3:0] q_shift;
  hid_t in;
  act_t out;
  int checks = 0, failures = 0;
  int n_low = 0, n_high = 0, n_mid = 0, n_zero = 0;

  nonlinearity dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_of(input nl_mode_e m, input int cnt, input int off, input int t, input int sh,
                           output int mag, output bit neg, output sat_e sat);
    int y, g;
    y = cnt - off;
    neg = 0;
    if (m == NL_RLSU) begin
      if (y <= 0)      begin g = 0; sat = SAT_LOW;  end
      else if (y >= t) begin g = t; sat = SAT_HIGH; end
      else             begin g = y; sat = SAT_NONE; end
      mag = g >> sh;
      if (mag > 255) mag = 255;
    end else begin
      if (y >= t)       begin mag = 1; sat = SAT_HIGH; end
      else if (y <= -t) begin mag = 1; neg = 1; sat = SAT_LOW; end
      else              begin mag = 0; sat = SAT_ZERO; end
    end
  endtask

  initial begin
    int e_mag, p_mag;
    bit e_neg, p_neg, p_valid;
    sat_e e_sat, p_sat;
    int p_idx;
    rst_n = 0; in = '0; mode = NL_RLSU; th = 0; h_offset = 0; q_shift = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    p_valid = 0;
    for (int k = 0; k < 5000; k++) begin
      hid_t w;
      nl_mode_e m;
      int t, off, sh, cnt;
      m   = nl_mode_e'(k / 2500);
      t   = 1 + $urandom % 4000;
      off = $urandom % 3000;
      sh  = $urandom % 5;
      case ($urandom % 5)
        0: cnt = off;               // y = 0
        1: cnt = off + t;           // y = th
        2: cnt = (off >= t) ? off - t : 0;  // y = -th
        default: cnt = $urandom % 16384;
      endcase
      if (cnt > 16383) cnt = 16383;
      w = '0;
      w.valid = ($urandom % 8) != 0;
      w.last  = ($urandom % 2);
      w.idx   = IDX_W'(k);
      w.count = CW'(cnt);
      mode <= m; th <= CW'(t); h_offset <= CW'(off); q_shift <= 4'(sh); in <= w;
      @(posedge clk); #1;
      // output of this word
      expect_of(m, cnt, off, t, sh, e_mag, e_neg, e_sat);
      checks++;
      if (out.valid != w.valid || out.idx != w.idx || out.last != w.last ||
          int'(out.mag) != e_mag || out.neg != e_neg || out.sat != e_sat) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d mode=%0d cnt=%0d off=%0d th=%0d sh=%0d: got mag=%0d neg=%0d sat=%0d, expected %0d %0d %0d",
          k, m, cnt, off, t, sh, out.mag, out.neg, out.sat, e_mag, e_neg, e_sat);
      end
      case (e_sat)
        SAT_LOW: n_low++; SAT_HIGH: n_high++; SAT_ZERO: n_zero++; default: n_mid++;
      endcase
    end
    checks++;
    if (n_low == 0 || n_high == 0 || n_zero == 0 || n_mid == 0) begin failures++; $display("FAIL: a level never occurred"); end
    $display("levels: low %0d high %0d zero %0d linear %0d", n_low, n_high, n_zero, n_mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
