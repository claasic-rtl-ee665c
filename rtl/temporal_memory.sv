// temporal_memory: temporal cells and distal segments of the B columns of one
// columnar core.
//
// Storage. Every column has T cells, every cell up to SEGS distal segments,
// every segment SYNS synapses. A synapse names a presynaptic cell anywhere in
// the cortex ({column, cell}) and holds a PERM_W-bit permanence; it is
// connected when the permanence is at least CONN_TH. The core also keeps the
// list of current activations: a bitmap with one bit per cell of the cortex,
// filled from the lateral (distal) spikes it receives, plus a small sample of
// the learning cells among them, kept by reservoir replacement, used to grow
// new segments.
//
// Operations (the core sequences them once per epoch):
//   lat_valid : a lateral spike {learn, column, cell} arrives; its bit is set in
//               the activation bitmap and learning cells enter the sample.
//   clear_map : start of the distal stage, the bitmap and sample are emptied.
//   lc_start  : lateral-activation stage. For every active column (col_active)
//               the predictive cells become active; a column with no
//               predictive cell bursts, all its cells become active and one,
//               picked pseudo-randomly, is its learning cell. Segments that
//               made a correct prediction are reinforced against the bitmap of
//               the previous epoch (+1 for synapses to cells that were active,
//               -1 for the others). Each bursting column grows a new segment
//               on its learning cell from the sample, overwriting its oldest
//               segment when all SEGS are used. One segment per cycle.
//   pred_start: prediction stage. Every used segment is read, one per cycle,
//               and counts its connected synapses whose cell is in the bitmap;
//               at SEG_TH or more the segment is active and its cell becomes
//               predictive for the next epoch.
// busy is high while lc or pred runs. Segment counts, 4-bit permanences,
// burst behaviour, one learning cell and the activation list follow the paper;
// the scan order, choice of learning cell, new synapses starting connected and
// the thresholds are this design's choices (the paper leaves learning logic to
// future work).
module temporal_memory
  import claasic_pkg::*;
#(
  parameter int B       = 8,
  parameter int T       = 32,
  parameter int SEGS    = 128,
  parameter int SYNS    = 40,
  parameter int NCOL    = 2048,
  parameter int PERM_W  = 4,
  parameter int CONN_TH = 8,
  parameter int SEG_TH  = 13
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lat_valid,
  input  logic                 lat_learn,
  input  logic [COL_W-1:0]     lat_col,
  input  logic [CELL_W-1:0]    lat_cell,
  input  logic                 clear_map,
  input  logic [B-1:0]         col_active,
  input  logic                 lc_start,
  input  logic                 pred_start,
  output logic                 busy,
  output logic [B-1:0][T-1:0]  act_cell,
  output logic [B-1:0][T-1:0]  learn_cell,
  output logic [B-1:0]         burst,
  output logic [B-1:0]         pred_col
);
  localparam int NC   = B * T;                  // local cells
  localparam int NS   = NC * SEGS;              // local segments
  localparam int CIW  = $clog2(NC);
  localparam int SIW  = $clog2(SEGS);
  localparam int SCW  = $clog2(SEGS + 1);
  localparam int SAW  = $clog2(NS);
  localparam int NMAP = NCOL * T;
  localparam int SMW  = $clog2(SYNS + 1);
  localparam int PW   = COL_W + CELL_W;

  typedef struct packed {
    logic              valid;
    logic [PW-1:0]     pre;      // {column, cell}
    logic [PERM_W-1:0] perm;
  } syn_t;

  syn_t              seg [NS][SYNS];
  logic [NS-1:0]     seg_was;                   // segment active at last prediction
  logic [SCW-1:0]    seg_cnt [NC];
  logic [SIW-1:0]    alloc   [NC];
  logic [NMAP-1:0]   amap;
  logic [PW-1:0]     samp    [SYNS];
  logic [SMW-1:0]    samp_n;
  logic [NC-1:0]     pred, nxt;
  logic [CELL_W-1:0] winner  [B];
  logic [15:0]       lfsr;

  typedef enum logic [2:0] {S_IDLE, S_LC_INIT, S_LC_SCAN, S_LC_GROW, S_PRED} st_e;
  st_e            st;
  logic [CIW:0]   ci;       // cell index (one extra bit to detect the end)
  logic [SCW-1:0] si;
  localparam int GBW = $clog2(B) + 1;
  logic [GBW-1:0] gb;

  function automatic int map_idx(input logic [PW-1:0] p);
    return int'(p[PW-1:CELL_W]) * T + int'(p[CELL_W-1:0]);
  endfunction

  // connected-and-active synapse count of the segment under the scan pointer
  logic [CIW-1:0] cur_cell;
  logic [SAW-1:0] cur_addr;
  logic [SMW-1:0] hits;
  assign cur_cell = ci[CIW-1:0];
  assign cur_addr = SAW'(int'(cur_cell) * SEGS + int'(si));
  always_comb begin
    hits = '0;
    for (int s = 0; s < SYNS; s++)
      if (seg[cur_addr][s].valid && seg[cur_addr][s].perm >= PERM_W'(CONN_TH) &&
          amap[map_idx(seg[cur_addr][s].pre)])
        hits = hits + 1'b1;
  end

  // a cell whose segments are reinforced: predicted and in an active column
  logic reinforce_cell;
  assign reinforce_cell = pred[cur_cell] && col_active[int'(cur_cell) / T];

  assign busy = (st != S_IDLE);

  always_comb begin
    for (int b = 0; b < B; b++) pred_col[b] = |pred[b*T +: T];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      ci      <= '0;
      si      <= '0;
      gb      <= '0;
      seg_was <= '0;
      amap    <= '0;
      samp_n  <= '0;
      pred    <= '0;
      nxt     <= '0;
      lfsr    <= 16'h1D2B;
      act_cell   <= '0;
      learn_cell <= '0;
      burst      <= '0;
      for (int c = 0; c < NC; c++) begin
        seg_cnt[c] <= '0;
        alloc[c]   <= '0;
      end
      for (int s = 0; s < SYNS; s++) samp[s] <= '0;
      for (int b = 0; b < B; b++) winner[b] <= '0;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};

      // activation list
      if (clear_map) begin
        amap   <= '0;
        samp_n <= '0;
      end else if (lat_valid) begin
        amap[int'(lat_col) * T + int'(lat_cell)] <= 1'b1;
        if (lat_learn) begin
          if (samp_n < SMW'(SYNS)) begin
            samp[samp_n] <= {lat_col, lat_cell};
            samp_n       <= samp_n + 1'b1;
          end else if (lfsr[0]) begin
            samp[int'(lfsr[15:1]) % SYNS] <= {lat_col, lat_cell};
          end
        end
      end

      case (st)
        S_IDLE: begin
          if (lc_start) st <= S_LC_INIT;
          else if (pred_start) begin
            st  <= S_PRED;
            ci  <= '0;
            si  <= '0;
            nxt <= '0;
          end
        end

        S_LC_INIT: begin
          for (int b = 0; b < B; b++) begin
            automatic logic predicted = |pred[b*T +: T];
            automatic logic [CELL_W-1:0] w = CELL_W'((int'(lfsr) + 7 * b) % T);
            burst[b]  <= col_active[b] && !predicted;
            winner[b] <= w;
            for (int c = 0; c < T; c++) begin
              act_cell[b][c]   <= col_active[b] && (!predicted || pred[b*T + c]);
              learn_cell[b][c] <= col_active[b] && (predicted ? pred[b*T + c] : (CELL_W'(c) == w));
            end
          end
          ci <= '0;
          si <= '0;
          st <= S_LC_SCAN;
        end

        S_LC_SCAN: begin
          if (ci == (CIW+1)'(NC)) begin
            gb <= '0;
            st <= S_LC_GROW;
          end else if (reinforce_cell && si < seg_cnt[cur_cell]) begin
            if (seg_was[cur_addr]) begin
              for (int s = 0; s < SYNS; s++) begin
                if (seg[cur_addr][s].valid) begin
                  if (amap[map_idx(seg[cur_addr][s].pre)]) begin
                    if (seg[cur_addr][s].perm != '1) seg[cur_addr][s].perm <= seg[cur_addr][s].perm + 1'b1;
                  end else if (seg[cur_addr][s].perm != '0) begin
                    seg[cur_addr][s].perm <= seg[cur_addr][s].perm - 1'b1;
                  end
                end
              end
            end
            si <= si + 1'b1;
          end else begin
            ci <= ci + 1'b1;
            si <= '0;
          end
        end

        S_LC_GROW: begin
          if (gb == GBW'(B)) begin
            st <= S_IDLE;
          end else begin
            if (burst[gb[GBW-2:0]] && samp_n != '0) begin
              automatic int cx = int'(gb) * T + int'(winner[gb[GBW-2:0]]);
              automatic int a    = cx * SEGS + int'(alloc[cx]);
              for (int s = 0; s < SYNS; s++) begin
                seg[a][s].valid <= (s < int'(samp_n));
                seg[a][s].pre   <= samp[s];
                seg[a][s].perm  <= PERM_W'(CONN_TH);
              end
              seg_was[a]   <= 1'b0;
              alloc[cx]  <= (int'(alloc[cx]) == SEGS - 1) ? '0 : alloc[cx] + 1'b1;
              if (seg_cnt[cx] != SCW'(SEGS)) seg_cnt[cx] <= seg_cnt[cx] + 1'b1;
            end
            gb <= gb + 1'b1;
          end
        end

        S_PRED: begin
          if (ci == (CIW+1)'(NC)) begin
            pred <= nxt;
            st   <= S_IDLE;
          end else if (si < seg_cnt[cur_cell]) begin
            automatic logic act = (hits >= SMW'(SEG_TH));
            seg_was[cur_addr] <= act;
            if (act) nxt[cur_cell] <= 1'b1;
            si <= si + 1'b1;
          end else begin
            ci <= ci + 1'b1;
            si <= '0;
          end
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  a_start_idle : assert property (@(posedge clk) disable iff (!rst_n)
    (lc_start || pred_start) |-> st == S_IDLE);

endmodule
