// spatial_pooler: proximal segments, overlap and global inhibition for the B
// columns of one columnar core.
//
// Each column keeps its proximal segment as a small direct-mapped cache
// indexed by encoder input bit: set = bit % ENTRIES, tag = bit / ENTRIES, and a
// PERM_W-bit permanence. A synapse is connected when its permanence is at least
// PERM_TH. At reset each column is given a receptive field of D consecutive
// input bits centred on (column * K / NCOL), with permanences just below or at
// the threshold (chosen by a hash of column and bit). With D <= ENTRIES the
// field never conflicts in the cache.
//
// Operation, one item per cycle, all columns in parallel:
//   clear      : overlaps, inhibition counters and active-input marks are reset.
//   in_valid   : an active input bit arrives. Every column that holds it marks
//                the entry as seen and, if connected, increments its overlap
//                (saturating 12-bit counter).
//   inh_valid  : an inhibition item {overlap, column id} of another column
//                arrives. Each column counts how many columns beat it; a column
//                beats another on larger overlap, ties going to the smaller id.
//   compute    : a column is active when its overlap is non-zero and fewer
//                than ACTIVE_K columns beat it. Active columns learn: entries
//                seen this epoch gain one permanence step, the others lose one
//                step with probability 1/16 (pseudo-random).
// The comparator/adder/counter structure, global inhibition with the id as tie
// breaker, the 2 % activity, 4-bit permanences with probabilistic updates and
// the cache organisation follow the paper; the cache mapping, receptive-field
// placement, tie direction, 1/16 forgetting and learning in one cycle are this
// design's choices.
module spatial_pooler
  import claasic_pkg::*;
#(
  parameter int B        = 8,
  parameter int NCOL     = 2048,
  parameter int K        = 2048,
  parameter int ENTRIES  = 64,
  parameter int D        = 32,
  parameter int PERM_W   = 4,
  parameter int PERM_TH  = 8,
  parameter int ACTIVE_K = 40
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [COL_W-1:0]       base_col,     // global id of local column 0
  input  logic                   clear,
  input  logic                   in_valid,
  input  logic [IN_W-1:0]        in_bit,
  input  logic                   inh_valid,
  input  logic [OVL_W-1:0]       inh_ovl,
  input  logic [COL_W-1:0]       inh_col,
  input  logic                   compute,
  output logic [B-1:0][11:0]     overlap,
  output logic [B-1:0]           col_active
);
  localparam int SW = $clog2(ENTRIES);
  localparam int TW = IN_W - SW;
  localparam int HW = $clog2(ACTIVE_K + 1);

  typedef struct packed {
    logic              valid;
    logic [TW-1:0]     tag;
    logic [PERM_W-1:0] perm;
  } pent_t;

  pent_t             tbl  [B][ENTRIES];
  logic [ENTRIES-1:0] seen [B];
  logic [HW-1:0]     higher [B];
  logic [15:0]       lfsr;

  function automatic int field_lo(input int c);
    int ctr, lo;
    ctr = (c * K) / NCOL;
    lo  = ctr - D / 2;
    if (lo < 0) lo = 0;
    if (lo > K - D) lo = K - D;
    return lo;
  endfunction

  logic [SW-1:0] in_set;
  logic [TW-1:0] in_tag;
  assign in_set = in_bit[SW-1:0];
  assign in_tag = in_bit[IN_W-1:SW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 16'hACE1;
      for (int b = 0; b < B; b++) begin
        overlap[b]    <= '0;
        higher[b]     <= '0;
        seen[b]       <= '0;
        col_active[b] <= 1'b0;
        for (int e = 0; e < ENTRIES; e++) begin
          automatic int c   = int'(base_col) + b;
          automatic int lo  = field_lo(c);
          automatic int bit_i = lo + ((e - lo) % ENTRIES + ENTRIES) % ENTRIES;
          automatic logic [31:0] h = 32'(c * 40503 + bit_i * 2654435);
          tbl[b][e].valid <= (bit_i < lo + D) && (bit_i < K);
          tbl[b][e].tag   <= TW'(bit_i / ENTRIES);
          tbl[b][e].perm  <= PERM_W'(PERM_TH - 1 + int'(h[7] ^ h[3]));
        end
      end
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      if (clear) begin
        for (int b = 0; b < B; b++) begin
          overlap[b] <= '0;
          higher[b]  <= '0;
          seen[b]    <= '0;
        end
      end else if (in_valid) begin
        for (int b = 0; b < B; b++) begin
          if (tbl[b][in_set].valid && tbl[b][in_set].tag == in_tag) begin
            seen[b][in_set] <= 1'b1;
            if (tbl[b][in_set].perm >= PERM_W'(PERM_TH) && overlap[b] != 12'hFFF)
              overlap[b] <= overlap[b] + 1'b1;
          end
        end
      end else if (inh_valid) begin
        for (int b = 0; b < B; b++) begin
          automatic logic [COL_W-1:0] me  = base_col + COL_W'(b);
          automatic logic [OVL_W-1:0] mov = (overlap[b] > 12'(2**OVL_W - 1)) ?
                                            {OVL_W{1'b1}} : overlap[b][OVL_W-1:0];
          if (inh_col != me && (inh_ovl > mov || (inh_ovl == mov && inh_col < me)) &&
              higher[b] != HW'(ACTIVE_K))
            higher[b] <= higher[b] + 1'b1;
        end
      end else if (compute) begin
        for (int b = 0; b < B; b++) begin
          automatic logic act = (overlap[b] != '0) && (higher[b] < HW'(ACTIVE_K));
          col_active[b] <= act;
          if (act) begin
            for (int e = 0; e < ENTRIES; e++) begin
              if (tbl[b][e].valid) begin
                if (seen[b][e]) begin
                  if (tbl[b][e].perm != '1) tbl[b][e].perm <= tbl[b][e].perm + 1'b1;
                end else if (tbl[b][e].perm != '0 &&
                             lfsr[(e % 4) * 4 +: 4] == 4'(e % 16)) begin
                  tbl[b][e].perm <= tbl[b][e].perm - 1'b1;
                end
              end
            end
          end
        end
      end
    end
  end
endmodule
