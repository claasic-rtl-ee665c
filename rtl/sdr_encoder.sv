// sdr_encoder: scalar to Sparse Distributed Representation encoder.
//
// A VAL_W-bit non-negative integer L is turned into a K-bit SDR with W active
// bits, using only a pseudo-random generator and two bitmaps, no stored table.
// With q = L div W and r = L mod W, the generator seeded with q produces R1,
// the first W distinct indices modulo K; seeded with q+1 it produces R2, the
// first distinct indices that are not in R1. The SDR takes the last W-r
// indices of R1 and the first r of R2, so that neighbouring values share most
// of their bits, values far apart share almost none, and a value always gets
// the same code. The generator is a 32-bit xorshift whose state is a fixed
// hash of the seed.
//
// Each active bit leaves as one input-spike item, with the rectangle of cores
// that may hold a column whose receptive field (D bits wide, centred on
// column*K/NCOL) contains the bit: the multicast destination of the spike.
//
// Interface: val_valid/val_ready takes a value when idle; out_valid/out_ready
// hands over items in generation order; out_last is high with the last one.
// sdr holds the code of the last value. Timing: one generator draw per cycle;
// a value takes about 2W+r draws plus the cycles the sink stalls.
// The two-seed scheme follows the paper; which part of R1 is kept is this
// design's reading (the paper's literal wording, keeping r bits of R1, does
// not give a smooth code), and the generator and the seed hash are this
// design's choices.
module sdr_encoder
  import claasic_pkg::*;
#(
  parameter int K     = 2048,
  parameter int W     = 40,
  parameter int VAL_W = 32,
  parameter int X     = 16,
  parameter int Y     = 16,
  parameter int B     = 8,
  parameter int D     = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             val_valid,
  output logic             val_ready,
  input  logic [VAL_W-1:0] value,
  output logic             out_valid,
  input  logic             out_ready,
  output item_t            out_item,
  output rect_t            out_dst,
  output logic             out_last,
  output logic [K-1:0]     sdr
);
  localparam int NCOL = X * Y * B;
  localparam int WW   = $clog2(W + 1);
  localparam int KW   = $clog2(K);

  typedef enum logic [1:0] {E_IDLE, E_R1, E_R2} est_e;
  est_e st;

  logic [K-1:0]     r1map;
  logic [31:0]      prng;
  logic [VAL_W-1:0] q;
  logic [WW-1:0]    r, cnt, sent;

  function automatic logic [31:0] seed_hash(input logic [VAL_W-1:0] s);
    logic [31:0] h;
    h = 32'(s) * 32'h9E3779B1 ^ 32'h85EBCA6B;
    return (h == '0) ? 32'h1 : h;
  endfunction

  function automatic logic [31:0] xorshift(input logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v << 13);
    t = t ^ (t >> 17);
    return t ^ (t << 5);
  endfunction

  function automatic rect_t dest_of(input int i);
    int c_lo, c_hi, n_lo, n_hi;
    rect_t rr;
    c_lo = (i < D) ? 0 : ((i - D / 2 - 1) * NCOL) / K - 1;
    c_hi = (i >= K - D) ? NCOL - 1 : ((i + D / 2 + 1) * NCOL) / K + 1;
    if (c_lo < 0) c_lo = 0;
    if (c_hi > NCOL - 1) c_hi = NCOL - 1;
    n_lo  = c_lo / B;
    n_hi  = c_hi / B;
    rr.y0 = COORD_W'(n_lo / X);
    rr.y1 = COORD_W'(n_hi / X);
    if (n_lo / X == n_hi / X) begin
      rr.x0 = COORD_W'(n_lo % X);
      rr.x1 = COORD_W'(n_hi % X);
    end else begin
      rr.x0 = '0;
      rr.x1 = COORD_W'(X - 1);
    end
    return rr;
  endfunction

  logic [KW-1:0] draw;
  assign draw = KW'(prng % 32'(K));

  logic take;     // current draw enters the code and must be sent
  logic advance;  // the current draw is consumed
  always_comb begin
    take = 1'b0;
    if (st == E_R1)      take = !r1map[draw] && (cnt >= r);
    else if (st == E_R2) take = !r1map[draw] && !sdr[draw];
  end
  assign out_valid = take;
  assign out_item  = item_t'(draw);
  assign out_dst   = dest_of(int'(draw));
  assign out_last  = take && (sent == WW'(W - 1));
  assign advance   = !take || out_ready;
  assign val_ready = (st == E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= E_IDLE;
      r1map <= '0;
      sdr   <= '0;
      prng  <= 32'h1;
      q     <= '0;
      r     <= '0;
      cnt   <= '0;
      sent  <= '0;
    end else begin
      case (st)
        E_IDLE: if (val_valid) begin
          q     <= value / VAL_W'(W);
          r     <= WW'(value % VAL_W'(W));
          prng  <= seed_hash(value / VAL_W'(W));
          r1map <= '0;
          sdr   <= '0;
          cnt   <= '0;
          sent  <= '0;
          st    <= E_R1;
        end
        E_R1: if (advance) begin
          prng <= xorshift(prng);
          if (!r1map[draw]) begin
            r1map[draw] <= 1'b1;
            cnt         <= cnt + 1'b1;
            if (take) begin
              sdr[draw] <= 1'b1;
              sent      <= sent + 1'b1;
            end
            if (cnt == WW'(W - 1)) begin
              st   <= (take && sent == WW'(W - 1)) ? E_IDLE : E_R2;
              prng <= seed_hash(q + 1'b1);
            end
          end
        end
        E_R2: if (advance) begin
          prng <= xorshift(prng);
          if (take) begin
            sdr[draw] <= 1'b1;
            sent      <= sent + 1'b1;
            if (sent == WW'(W - 1)) st <= E_IDLE;
          end
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  a_w_bits : assert property (@(posedge clk) disable iff (!rst_n)
    (st == E_IDLE) |-> ($countones(sdr) == 0 || $countones(sdr) == W));

endmodule
