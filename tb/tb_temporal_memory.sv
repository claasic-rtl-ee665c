// tb_temporal_memory: burst, segment growth, prediction and reinforcement.
//
// Two columns of four cells in a 4-column cortex. Epoch 1: column 0 becomes
// active with no prediction, so it must burst (all cells active, exactly one
// learning cell); the lateral spikes of remote cells A are recorded. Epoch 2:
// column 0 bursts again and grows a segment on its learning cell from the
// sample; with A active again the prediction stage must make exactly that cell
// predictive. Epoch 3: column 0 is active and predicted, so only that cell is
// active, there is no burst, and its segment is reinforced (+1) for the
// synapses whose cells were active. Without the A spikes nothing is predicted.
// The number of cycles of the prediction stage must equal cells + used segments.
module tb_temporal_memory;
  import claasic_pkg::*;
  localparam int B = 2, T = 4, SEGS = 4, SYNS = 4, NCOL = 4, SEG_TH = 2;

  logic clk = 1'b0, rst_n = 1'b1;
  logic lat_valid, lat_learn, clear_map, lc_start, pred_start, busy;
  logic [COL_W-1:0] lat_col;
  logic [CELL_W-1:0] lat_cell;
  logic [B-1:0] col_active, burst, pred_col;
  logic [B-1:0][T-1:0] act_cell, learn_cell;

  temporal_memory #(.B(B), .T(T), .SEGS(SEGS), .SYNS(SYNS), .NCOL(NCOL), .SEG_TH(SEG_TH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic lat(input int col, input int cl, input bit learn);
    @(negedge clk);
    lat_valid = 1; lat_col = COL_W'(col); lat_cell = CELL_W'(cl); lat_learn = learn;
    @(negedge clk);
    lat_valid = 0;
  endtask
  task automatic pulse_lc();
    @(negedge clk); lc_start = 1; @(negedge clk); lc_start = 0;
    while (busy) @(negedge clk);
  endtask
  task automatic pulse_clear();
    @(negedge clk); clear_map = 1; @(negedge clk); clear_map = 0;
  endtask
  task automatic pulse_pred(output int cycles);
    cycles = 0;
    @(negedge clk); pred_start = 1; @(negedge clk); pred_start = 0;
    while (busy) begin @(negedge clk); cycles++; end
  endtask
  task automatic spikes_A();
    lat(2, 1, 1); lat(2, 3, 1); lat(3, 0, 1);
  endtask

  initial begin
    int win, cyc, nsyn;
    lat_valid = 0; lat_learn = 0; lat_col = 0; lat_cell = 0; clear_map = 0;
    lc_start = 0; pred_start = 0; col_active = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // epoch 1
    col_active = 2'b01;
    pulse_lc();
    check(burst == 2'b01, "epoch 1: column 0 must burst");
    check(act_cell[0] == 4'hF && act_cell[1] == 4'h0, "epoch 1: all cells of column 0 active");
    check($countones(learn_cell[0]) == 1, "epoch 1: one learning cell");
    pulse_clear();
    spikes_A();
    pulse_pred(cyc);
    check(pred_col == 2'b00, "epoch 1: nothing predicted yet");
    check(cyc == B * T + 1, $sformatf("epoch 1: prediction took %0d cycles", cyc));
    // epoch 2: grows a segment from the sample (A)
    pulse_lc();
    check(burst == 2'b01, "epoch 2: column 0 bursts again");
    win = -1;
    for (int c = 0; c < T; c++) if (learn_cell[0][c]) win = c;
    check(win >= 0, "epoch 2: learning cell");
    pulse_clear();
    spikes_A();
    pulse_pred(cyc);
    check(pred_col == 2'b01, "epoch 2: column 0 predicted");
    check(dut.pred == 8'(1 << win), $sformatf("epoch 2: only cell %0d predictive, got %b", win, dut.pred));
    check(cyc == B * T + 1 + 1, $sformatf("epoch 2: prediction took %0d cycles", cyc));
    // epoch 3: predicted, no burst, reinforcement
    pulse_lc();
    check(burst == 2'b00, "epoch 3: no burst");
    check(act_cell[0] == 4'(1 << win), "epoch 3: only the predicted cell active");
    check(learn_cell[0] == 4'(1 << win), "epoch 3: predicted cell learns");
    nsyn = 0;
    for (int s = 0; s < SYNS; s++)
      if (dut.seg[win * SEGS][s].valid) begin
        nsyn++;
        check(dut.seg[win * SEGS][s].perm == 4'd9, "reinforced synapse");
      end
    check(nsyn == 3, $sformatf("segment has %0d synapses", nsyn));
    // epoch 3 lateral activity without A: no prediction
    pulse_clear();
    lat(3, 2, 1);
    pulse_pred(cyc);
    check(pred_col == 2'b00, "without A nothing is predicted");
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
