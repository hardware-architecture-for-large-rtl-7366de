// Self-checking test of timing_control at its default sizes (D = 126 pixels,
// 128 channels, N = 128, 8-bit words) with E = 4 reruns.  The test bench plays
// the chip: it decodes the serial pin traffic into words per (rerun, channel)
// and answers the scan with a known count per (rerun, column).  It checks the
// rotation X[(k - r) mod D] for every channel of every rerun, one rn_cnt pulse
// and exactly conv_cycles of neu_en per rerun, the hidden stream (index
// r*N + n, count, last flag) and the cycle count of the whole image,
// 2 + E*(D*XW + 1 + conv_cycles + 2 + N) (plus one cycle of measurement offset).

module tb_timing_control;
  import elm_pkg::*;
  localparam int D = 126, D_CH = 128, N = 128, XW = 8, E = 4, CONV = 37;
  logic clk = 0, rst_n, start, img_we, busy, done;
  logic [6:0] num_reruns, img_addr, a;
  logic [15:0] conv_cycles;
  logic [XW-1:0] img_data;
  logic rn_in, clk_in, data_in, rn_cnt, neu_en, clk_out;
  logic [CW-1:0] c;
  hid_t hid;
  logic [XW-1:0] img [D];
  int checks = 0, failures = 0;

  timing_control #(.D(D), .D_CH(D_CH), .N(N), .XW(XW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // chip side: decode words, count phases, answer the scan
  int rerun = -1, col = 0, nbits = 0, en_cycles = 0, rst_pulses = 0, rn_in_pulses = 0;
  logic [XW-1:0] sh;
  function automatic logic [CW-1:0] count_of(input int r, input int n);
    return CW'((r * 977 + n * 31 + 5) % 16384);
  endfunction
  assign c = count_of(rerun, col);

  always @(posedge clk) if (rst_n) begin
    if (!rn_in) begin rn_in_pulses++; nbits = 0; end
    if (clk_in) begin
      sh = {sh[XW-2:0], data_in};
      nbits++;
      if (nbits == XW) begin
        int ch, rr;
        nbits = 0;
        ch = int'(a);
        rr = (ch == 0) ? rerun + 1 : rerun;
        rerun <= rr;
        check(ch < D, "address inside image");
        check(sh == img[((ch - rr) % D + D) % D],
              $sformatf("rerun %0d channel %0d got %0h expected %0h", rr, ch, sh, img[((ch - rr) % D + D) % D]));
      end
    end
    if (!rn_cnt) begin rst_pulses++; col <= 0; check(en_cycles == 0, "neu_en low before reset"); end
    if (neu_en) en_cycles++;
    if (clk_out) begin
      if (col == 0) begin check(en_cycles == CONV, $sformatf("neu_en cycles %0d", en_cycles)); en_cycles = 0; end
      col <= (col + 1) % N;
    end
  end

  // hidden stream
  int nhid = 0;
  always @(posedge clk) if (rst_n && hid.valid) begin
    int r, n;
    r = nhid / N; n = nhid % N;
    check(int'(hid.idx) == nhid, $sformatf("hidden index %0d expected %0d", hid.idx, nhid));
    check(hid.count == count_of(r, n), "hidden count");
    check(hid.last == (nhid == E * N - 1), "last flag");
    nhid++;
  end

  initial begin
    int t0, t1;
    rst_n = 0; start = 0; img_we = 0; img_addr = 0; img_data = 0;
    num_reruns = 7'(E); conv_cycles = 16'(CONV);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < D; i++) begin
      img[i] = XW'($urandom);
      img_we <= 1; img_addr <= 7'(i); img_data <= img[i];
      @(posedge clk);
    end
    img_we <= 0;
    @(posedge clk);
    start <= 1; t0 = $time / 10;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
    t1 = $time / 10;
    $display("image took %0d cycles", t1 - t0);
    check(t1 - t0 == 2 + E * (D * XW + 1 + CONV + 2 + N) + 1, $sformatf("cycle count %0d", t1 - t0));
    @(posedge clk);
    check(nhid == E * N, $sformatf("hidden words %0d", nhid));
    check(rst_pulses == E, "one rn_cnt pulse per rerun");
    check(rn_in_pulses == 1, "one rn_in pulse per image");
    check(rerun == E - 1, "E reruns loaded");
    check(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
