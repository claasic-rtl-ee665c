// tb_columnar_core: one columnar core working alone (a 1x1 mesh).
//
// The testbench plays the encoder: every epoch it injects the active bits of
// one of three fixed input codes through the external port and marks the last
// one. The core has 8 columns of 4 cells. Checks: one report per epoch; active
// columns never above the inhibition limit; bursting never above active; the
// first epoch has every active column bursting (nothing can be predicted yet);
// after the repeating sequence has been shown many times the core predicts it,
// so the last epochs have no bursting column; some columns were predicted.
// Also checks that the injection queue coalesced items and the drain ran.
module tb_columnar_core;
  import claasic_pkg::*;

  localparam int B = 8, T = 4, K = 64, ACTIVE_K = 3, NB = 6, EPOCHS = 36;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [4:0] lin_valid, lin_ready, lout_valid, lout_ready;
  pkt_t lin_pkt [5], lout_pkt [5];
  logic ext_valid, ext_ready, ext_last, need_input;
  item_t ext_item;
  rect_t ext_dst;
  logic rep_valid, ev_drain, ev_coalesce;
  logic [7:0] rep_active, rep_burst, rep_pred;

  columnar_core #(.X(1), .Y(1), .B(B), .T(T), .SEGS(4), .SYNS(8), .K(K), .ENTRIES(16),
                  .D(16), .ACTIVE_K(ACTIVE_K), .SEG_TH(2), .DEPTH(4), .Q(4)) dut (
    .clk, .rst_n, .my_x(4'd0), .my_y(4'd0), .lin_valid, .lin_pkt, .lin_ready,
    .lout_valid, .lout_pkt, .lout_ready, .has_ext(1'b1), .ext_valid, .ext_item, .ext_dst,
    .ext_ready, .ext_last, .need_input, .rep_valid, .rep_active, .rep_burst, .rep_pred,
    .ev_drain, .ev_coalesce);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_rep = 0, n_drain = 0, n_coal = 0, n_pred = 0, n_burst_ep = 0;
  int burst_hist [$];
  always @(posedge clk) if (rst_n) begin
    if (ev_drain) n_drain++;
    if (ev_coalesce) n_coal++;
    if (rep_valid) begin
      n_rep++;
      check(rep_active <= 8'(ACTIVE_K), $sformatf("epoch %0d: %0d active", n_rep, rep_active));
      check(rep_burst <= rep_active, "burst above active");
      if (n_rep == 1) check(rep_active > 0 && rep_burst == rep_active, "first epoch must burst");
      if (rep_pred > 0) n_pred++;
      if (rep_burst > 0) n_burst_ep++;
      burst_hist.push_back(int'(rep_burst));
    end
  end

  // three input codes of NB bits spread over the input space
  function automatic int code_bit(input int pat, input int j);
    return (pat * 23 + j * 11) % K;
  endfunction

  task automatic epoch(input int pat);
    int n0 = n_rep;
    wait (need_input);
    for (int j = 0; j < NB; j++) begin
      @(negedge clk);
      ext_valid = 1; ext_item = item_t'(code_bit(pat, j));
      #1;
      while (!ext_ready) begin @(negedge clk); #1; end
      ext_last = (j == NB - 1);
      @(posedge clk);
      #1 ext_valid = 0; ext_last = 0;
    end
    wait (n_rep == n0 + 1);
  endtask

  initial begin
    lin_valid = '0; lout_ready = '0; ext_valid = 0; ext_last = 0; ext_item = '0;
    ext_dst = '{x0: 4'd0, x1: 4'd0, y0: 4'd0, y1: 4'd0};
    for (int i = 0; i < 5; i++) lin_pkt[i] = '0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < EPOCHS; e++) epoch(e % 3);
    repeat (10) @(posedge clk);
    check(n_rep == EPOCHS, $sformatf("%0d reports for %0d epochs", n_rep, EPOCHS));
    for (int e = EPOCHS - 6; e < EPOCHS; e++)
      check(burst_hist[e] == 0, $sformatf("epoch %0d still bursts %0d", e, burst_hist[e]));
    check(n_pred > 0, "no column was ever predicted");
    check(n_burst_ep > 0, "no burst");
    check(n_coal > 0, "no coalescing");
    check(n_drain >= 2 * EPOCHS, $sformatf("only %0d drains", n_drain));
    $display("drains=%0d coalesced=%0d predicted_epochs=%0d burst_epochs=%0d",
             n_drain, n_coal, n_pred, n_burst_ep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
