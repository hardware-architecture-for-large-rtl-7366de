// Self-checking test of column_scanner at full size (128 columns): after
// rn_cnt the bus shows column 0; each clk_out strobe moves one column on;
// cycles without the strobe hold; the index wraps after the last column.
module tb_column_scanner;
  localparam int N = 128, CW = 14;
  logic clk = 0, rn_cnt, clk_out;
  logic [CW-1:0] h [N];
  logic [CW-1:0] c;
  int checks = 0, failures = 0;

  column_scanner #(.N(N), .CW(CW)) dut (.*);

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

  initial begin
    int col;
    for (int j = 0; j < N; j++) h[j] = CW'($urandom);
    rn_cnt = 0; clk_out = 0;
    @(posedge clk); #1;
    rn_cnt = 1;
    col = 0;
    for (int k = 0; k < 3 * N + 17; k++) begin
      clk_out = ($urandom % 4) != 0;
      #1;
      check(c == h[col], $sformatf("column %0d: got %0h expected %0h", col, c, h[col]));
      @(posedge clk); #1;
      if (clk_out) col = (col + 1) % N;
    end
    rn_cnt = 0; clk_out = 1;
    @(posedge clk); #1;
    rn_cnt = 1; clk_out = 0; #1;
    check(c == h[0], "restart at column 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
