// tb_spatial_pooler: overlap counting, inhibition and proximal learning.
//
// The testbench keeps its own copy of each column's receptive field and
// permanences (same placement rule: D bits centred on column*K/NCOL, initial
// permanence PERM_TH-1 or PERM_TH from the hash of column and bit). It sends
// random active input bits, compares each column's overlap with the count of
// connected synapses in the model, sends inhibition items of imaginary remote
// columns and checks which columns win (fewer than ACTIVE_K stronger columns,
// ties to the smaller id). After learning, a winner's seen synapses must have
// gained one step.
module tb_spatial_pooler;
  import claasic_pkg::*;
  localparam int B = 4, NCOL = 16, K = 64, ENTRIES = 16, D = 8, ACTIVE_K = 2, TH = 8;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [COL_W-1:0] base_col;
  logic clear, in_valid, inh_valid, compute;
  logic [IN_W-1:0] in_bit;
  logic [OVL_W-1:0] inh_ovl;
  logic [COL_W-1:0] inh_col;
  logic [B-1:0][11:0] overlap;
  logic [B-1:0] col_active;

  spatial_pooler #(.B(B), .NCOL(NCOL), .K(K), .ENTRIES(ENTRIES), .D(D), .ACTIVE_K(ACTIVE_K))
    dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int perm [B][K];     // -1: no synapse
  function automatic void model_init(int base);
    for (int b = 0; b < B; b++) begin
      automatic int c = base + b;
      automatic int lo = (c * K) / NCOL - D / 2;
      if (lo < 0) lo = 0;
      if (lo > K - D) lo = K - D;
      for (int i = 0; i < K; i++) perm[b][i] = -1;
      for (int i = lo; i < lo + D; i++) begin
        automatic logic [31:0] h = 32'(c * 40503 + i * 2654435);
        perm[b][i] = TH - 1 + int'(h[7] ^ h[3]);
      end
    end
  endfunction

  task automatic step(input logic iv, input int bitv, input logic hv, input int ov, input int col);
    @(negedge clk);
    in_valid = iv; in_bit = IN_W'(bitv); inh_valid = hv; inh_ovl = OVL_W'(ov); inh_col = COL_W'(col);
    @(negedge clk);
    in_valid = 0; inh_valid = 0;
  endtask

  initial begin
    int exp_ovl [B];
    bit seen [B][K];
    int bits [$];
    clear = 0; in_valid = 0; inh_valid = 0; compute = 0; in_bit = 0; inh_ovl = 0; inh_col = 0;
    base_col = 11'd4;   // this core holds columns 4..7
    model_init(4);
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      bits.delete();
      for (int b = 0; b < B; b++) begin exp_ovl[b] = 0; for (int i = 0; i < K; i++) seen[b][i] = 0; end
      // 10 distinct random bits within the span of these columns
      while (bits.size() < 10) begin
        automatic int v = 8 + int'($urandom % 32);
        if (!(v inside {bits})) bits.push_back(v);
      end
      foreach (bits[j]) begin
        step(1, bits[j], 0, 0, 0);
        for (int b = 0; b < B; b++) if (perm[b][bits[j]] >= 0) begin
          seen[b][bits[j]] = 1;
          if (perm[b][bits[j]] >= TH) exp_ovl[b]++;
        end
      end
      for (int b = 0; b < B; b++)
        check(int'(overlap[b]) == exp_ovl[b], $sformatf("round %0d col %0d overlap %0d exp %0d",
              round, b, overlap[b], exp_ovl[b]));
      // own columns' inhibition items, plus two remote columns
      begin
        int rem_ovl [2];
        int higher [B];
        rem_ovl[0] = int'($urandom % 6); rem_ovl[1] = int'($urandom % 6);
        for (int b = 0; b < B; b++) step(0, 0, 1, exp_ovl[b], 4 + b);
        step(0, 0, 1, rem_ovl[0], 1);    // remote column 1 (smaller id)
        step(0, 0, 1, rem_ovl[1], 12);   // remote column 12 (larger id)
        for (int b = 0; b < B; b++) begin
          higher[b] = 0;
          for (int o = 0; o < B; o++)
            if (o != b && (exp_ovl[o] > exp_ovl[b] || (exp_ovl[o] == exp_ovl[b] && o < b))) higher[b]++;
          if (rem_ovl[0] >= exp_ovl[b]) higher[b]++;
          if (rem_ovl[1] > exp_ovl[b]) higher[b]++;
        end
        @(negedge clk); compute = 1; @(negedge clk); compute = 0;
        for (int b = 0; b < B; b++) begin
          automatic bit act = exp_ovl[b] > 0 && higher[b] < ACTIVE_K;
          check(col_active[b] == act, $sformatf("round %0d col %0d active %b exp %b", round, b, col_active[b], act));
          if (act) for (int i = 0; i < K; i++)
            if (perm[b][i] >= 0 && seen[b][i] && perm[b][i] < 15) perm[b][i]++;
          // unseen synapses may lose a step with low probability: follow the DUT
          for (int i = 0; i < K; i++) if (perm[b][i] >= 0 && !(act && seen[b][i])) begin
            automatic int e = i % ENTRIES;
            automatic int p = int'(dut.tbl[b][e].perm);
            check(p == perm[b][i] || (act && p == perm[b][i] - 1), "unexpected permanence change");
            perm[b][i] = p;
          end
        end
      end
    end
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
