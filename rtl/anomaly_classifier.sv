// anomaly_classifier: anomaly-score classifier at the output of the cortex.
//
// Every columnar core reports once per epoch how many of its columns were
// active, how many of those burst (were not predicted) and how many columns are
// predicted for the next input. The classifier adds the reports of all N cores
// as they come in; once every core has reported it divides the number of
// bursting columns by the number of active ones. The score, the fraction of
// mispredicted columns, is given in units of 1/256 (256 = every active column
// mispredicted; 0 when no column is active).
//
// Interface: rep_* are N parallel report ports with a one-cycle valid each.
// score_valid pulses with score and the epoch totals. Timing: the divider is a
// restoring divider producing one quotient bit per cycle, so the score comes
// out 25 cycles after the last report. The score definition follows the
// paper's anomaly classifier; collecting counts on dedicated report wires
// rather than as packets is this design's choice.
module anomaly_classifier #(
  parameter int N = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        rep_valid,
  input  logic [N-1:0][7:0]   rep_active,
  input  logic [N-1:0][7:0]   rep_burst,
  input  logic [N-1:0][7:0]   rep_pred,
  output logic                score_valid,
  output logic [8:0]          score,
  output logic [15:0]         tot_active,
  output logic [15:0]         tot_burst,
  output logic [15:0]         tot_pred,
  output logic [31:0]         epochs
);
  logic [N-1:0] got;
  logic [15:0]  acc_a, acc_b, acc_p;
  logic [15:0]  add_a, add_b, add_p;

  always_comb begin
    add_a = '0;
    add_b = '0;
    add_p = '0;
    for (int i = 0; i < N; i++) begin
      if (rep_valid[i]) begin
        add_a = add_a + 16'(rep_active[i]);
        add_b = add_b + 16'(rep_burst[i]);
        add_p = add_p + 16'(rep_pred[i]);
      end
    end
  end

  // restoring division (tot_burst * 256) / tot_active
  logic        div_busy;
  logic [4:0]  div_cnt;
  logic [24:0] rem_q;      // partial remainder
  logic [23:0] num;
  logic [8:0]  quo;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got         <= '0;
      acc_a       <= '0;
      acc_b       <= '0;
      acc_p       <= '0;
      div_busy    <= 1'b0;
      div_cnt     <= '0;
      rem_q       <= '0;
      num         <= '0;
      quo         <= '0;
      score_valid <= 1'b0;
      score       <= '0;
      tot_active  <= '0;
      tot_burst   <= '0;
      tot_pred    <= '0;
      epochs      <= '0;
    end else begin
      score_valid <= 1'b0;
      if ((got | rep_valid) == '1) begin
        got        <= '0;
        acc_a      <= '0;
        acc_b      <= '0;
        acc_p      <= '0;
        tot_active <= acc_a + add_a;
        tot_burst  <= acc_b + add_b;
        tot_pred   <= acc_p + add_p;
        num        <= {acc_b + add_b, 8'h00};
        rem_q      <= '0;
        quo        <= '0;
        div_cnt    <= '0;
        div_busy   <= 1'b1;
      end else begin
        got   <= got | rep_valid;
        acc_a <= acc_a + add_a;
        acc_b <= acc_b + add_b;
        acc_p <= acc_p + add_p;
      end
      if (div_busy) begin
        if (tot_active == '0) begin
          div_busy    <= 1'b0;
          score       <= '0;
          score_valid <= 1'b1;
          epochs      <= epochs + 1'b1;
        end else begin
          automatic logic [24:0] sh = {rem_q[23:0], num[23]};
          automatic logic        ge = (sh >= {9'd0, tot_active});
          num     <= {num[22:0], 1'b0};
          rem_q   <= ge ? sh - {9'd0, tot_active} : sh;
          quo     <= {quo[7:0], ge};
          div_cnt <= div_cnt + 1'b1;
          if (div_cnt == 5'd23) begin
            div_busy    <= 1'b0;
            score       <= {quo[7:0], ge};
            score_valid <= 1'b1;
            epochs      <= epochs + 1'b1;
          end
        end
      end
    end
  end
endmodule
