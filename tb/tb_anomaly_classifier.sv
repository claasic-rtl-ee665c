// tb_anomaly_classifier: checks totals, score and latency of the classifier.
//
// Four cores report at different cycles. After the last report the totals must
// be the sums of the reports and the score floor(256*burst/active), delivered
// 25 cycles after the last report; an epoch with no active column scores 0.
module tb_anomaly_classifier;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [N-1:0] rep_valid;
  logic [N-1:0][7:0] rep_active, rep_burst, rep_pred;
  logic score_valid;
  logic [8:0] score;
  logic [15:0] tot_active, tot_burst, tot_pred;
  logic [31:0] epochs;

  anomaly_classifier #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic epoch(input int seed);
    int sa = 0, sb = 0, sp = 0, cyc = 0;
    int a [N], b [N], p [N];
    for (int i = 0; i < N; i++) begin
      a[i] = (seed == 0) ? 0 : int'($urandom % 9);
      b[i] = (a[i] == 0) ? 0 : int'($urandom % (a[i] + 1));
      p[i] = int'($urandom % 9);
      sa += a[i]; sb += b[i]; sp += p[i];
    end
    for (int i = N - 1; i >= 0; i--) begin
      @(negedge clk);
      rep_valid = '0;
      rep_valid[i] = 1'b1;
      rep_active[i] = 8'(a[i]); rep_burst[i] = 8'(b[i]); rep_pred[i] = 8'(p[i]);
      repeat (i) begin @(negedge clk); rep_valid = '0; end
    end
    @(negedge clk);
    rep_valid = '0;
    while (!score_valid && cyc < 100) begin @(negedge clk); cyc++; end
    check(score_valid, "no score");
    check(tot_active == 16'(sa) && tot_burst == 16'(sb) && tot_pred == 16'(sp), "totals");
    check(int'(score) == ((sa == 0) ? 0 : (sb * 256) / sa),
          $sformatf("score %0d for %0d/%0d", score, sb, sa));
    if (sa != 0) check(cyc == 24, $sformatf("latency %0d", cyc + 1));
  endtask

  initial begin
    rep_valid = '0; rep_active = '0; rep_burst = '0; rep_pred = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 20; e++) epoch(e);
    check(epochs == 20, "epoch count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
