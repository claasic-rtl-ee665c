// tb_claasic_top: end-to-end test of the cortex on a small mesh.
//
// A 2x2 mesh of cores with 4 columns each (16 columns), 4 cells per column and
// a 64-bit encoder is fed a repeating sequence of four values. Every epoch must
// produce exactly one score; the active-column count must stay within the
// inhibition limit and the bursting count within the active count. The first
// epoch cannot be predicted (score 256). After the sequence has been shown
// many times it must be predicted: the last passes must reach a low score.
// The test also counts that every mechanism happened: drains, coalesced
// injections, bursts, and correctly predicted columns.
module tb_claasic_top;
  import claasic_pkg::*;

  localparam int X = 2, Y = 2, B = 4, T = 4, SEGS = 4, SYNS = 8;
  localparam int K = 64, W = 4, ENTRIES = 16, D = 8, ACTIVE_K = 2, SEG_TH = 2;
  localparam int EPOCHS = 48;

  logic clk = 1'b0, rst_n = 1'b1;
  logic sample_valid;
  logic [31:0] sample_value;
  logic sample_ready, score_valid, ev_coalesce, ev_drain;
  logic [8:0] score;
  logic [15:0] tot_active, tot_burst, tot_pred;
  logic [31:0] epochs;

  claasic_top #(.X(X), .Y(Y), .B(B), .T(T), .SEGS(SEGS), .SYNS(SYNS), .K(K), .W(W),
                .ENTRIES(ENTRIES), .D(D), .ACTIVE_K(ACTIVE_K), .SEG_TH(SEG_TH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_drain = 0, n_coal = 0, n_burst = 0, n_pred_ok = 0, n_scores = 0;
  int last_scores [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  always @(posedge clk) begin
    if (ev_drain) n_drain++;
    if (ev_coalesce) n_coal++;
    if (rst_n && score_valid) begin
      n_scores++;
      if (tot_burst > 0) n_burst++;
      if (tot_active > tot_burst) n_pred_ok++;
      check(tot_active <= 16'(ACTIVE_K), "active columns above inhibition limit");
      check(tot_burst <= tot_active, "more bursting than active columns");
      check(tot_active == 0 || score == 9'((int'(tot_burst) * 256) / int'(tot_active)),
            "score is not burst/active");
      if (n_scores == 1) check(score == 9'd256 || tot_active == 0, "first epoch predicted");
      last_scores.push_back(int'(score));
    end
  end

  initial begin
    sample_valid = 1'b0;
    sample_value = '0;
    #1 rst_n = 1'b0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < EPOCHS; e++) begin
      sample_value = 32'((e % 4) * 37 + 3);
      @(negedge clk);
      sample_valid = 1'b1;
      do @(negedge clk); while (!sample_ready);
      sample_valid = 1'b0;
      wait (score_valid);
      @(negedge clk);
    end
    repeat (20) @(posedge clk);
    check(n_scores == EPOCHS, $sformatf("scores %0d != epochs %0d", n_scores, EPOCHS));
    check(epochs == 32'(EPOCHS), "epoch counter");
    begin
      int sum = 0;
      for (int i = EPOCHS - 8; i < EPOCHS; i++) sum += last_scores[i];
      $display("mean score of last 8 epochs = %0d/256", sum / 8);
      check(sum / 8 < 128, "sequence not learned");
    end
    $display("drains=%0d coalesced=%0d burst_epochs=%0d predicted_epochs=%0d",
             n_drain, n_coal, n_burst, n_pred_ok);
    check(n_drain >= 3 * EPOCHS, "drain count");
    check(n_coal > 0, "no coalescing happened");
    check(n_burst > 0, "no burst happened");
    check(n_pred_ok > 0, "no correct prediction happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
