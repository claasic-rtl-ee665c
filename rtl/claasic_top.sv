// claasic_top: the columnar cortex, an X x Y mesh of columnar cores with the
// SDR encoder on one side and the anomaly classifier on the other.
//
// Core n sits at x = n % X, y = n / X and holds global columns n*B .. n*B+B-1.
// Neighbouring routers are joined by one link in each direction (N,E,S,W). The
// encoder feeds its input spikes into the injection queue of core 0; every
// core reports its epoch counts to the classifier on dedicated wires.
//
// Interface: sample_valid/sample_ready takes one 32-bit input value per epoch
// (accepted only when core 0 has entered the input stage of a new epoch);
// score_valid pulses with the anomaly score of that epoch (units of 1/256) and
// the cortex-wide counts of active, bursting and predicted columns.
// ev_coalesce and ev_drain are monitoring pulses (any core merged an item; core
// 0 finished a drain). Default sizes: 16x16 cores of 8 columns (2048 columns),
// 32 cells per column, 128 distal segments of 40 synapses per cell, 2048-bit
// encoder with 40 active bits, receptive fields of 32 bits, 10-flit buffers.
// A mesh is used (as drawn in the paper's figures) rather than the torus
// named in its evaluation setup.
module claasic_top
  import claasic_pkg::*;
#(
  parameter int X        = 16,
  parameter int Y        = 16,
  parameter int B        = 8,
  parameter int T        = 32,
  parameter int SEGS     = 128,
  parameter int SYNS     = 40,
  parameter int K        = 2048,
  parameter int W        = 40,
  parameter int ENTRIES  = 64,
  parameter int D        = 32,
  parameter int ACTIVE_K = 40,
  parameter int SEG_TH   = 13,
  parameter int DEPTH    = 10,
  parameter int Q        = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sample_valid,
  input  logic [31:0] sample_value,
  output logic        sample_ready,
  output logic        score_valid,
  output logic [8:0]  score,
  output logic [15:0] tot_active,
  output logic [15:0] tot_burst,
  output logic [15:0] tot_pred,
  output logic [31:0] epochs,
  output logic        ev_coalesce,
  output logic        ev_drain
);
  localparam int NN = X * Y;

  logic [4:0] lout_valid [NN];
  pkt_t       lout_pkt   [NN][5];
  logic [4:0] lout_ready [NN];
  logic [4:0] lin_valid  [NN];
  pkt_t       lin_pkt    [NN][5];
  logic [4:0] lin_ready  [NN];

  logic [NN-1:0]      rep_valid, ev_co, ev_dr;
  logic [NN-1:0][7:0] rep_active, rep_burst, rep_pred;

  // encoder
  logic  enc_val_ready, enc_out_valid, enc_out_ready, enc_out_last;
  item_t enc_item;
  rect_t enc_dst;
  logic  need_input;
  logic [K-1:0] sdr;

  sdr_encoder #(.K(K), .W(W), .X(X), .Y(Y), .B(B), .D(D)) u_enc (
    .clk, .rst_n,
    .val_valid(sample_valid && need_input), .val_ready(enc_val_ready), .value(sample_value),
    .out_valid(enc_out_valid), .out_ready(enc_out_ready), .out_item(enc_item),
    .out_dst  (enc_dst), .out_last(enc_out_last), .sdr
  );
  assign sample_ready = enc_val_ready && need_input;

  for (genvar n = 0; n < NN; n++) begin : g_cc
    localparam int CX = n % X;
    localparam int CY = n / X;

    // incoming links: from the neighbour's opposite output
    if (CY > 0) begin : g_n
      assign lin_valid[n][P_N]       = lout_valid[n - X][P_S];
      assign lin_pkt[n][P_N]         = lout_pkt[n - X][P_S];
      assign lout_ready[n - X][P_S]  = lin_ready[n][P_N];
    end else begin : g_nn
      assign lin_valid[n][P_N] = 1'b0;
      assign lin_pkt[n][P_N]   = '0;
      assign lout_ready[n][P_N] = 1'b0;
    end
    if (CY < Y - 1) begin : g_s
      assign lin_valid[n][P_S]       = lout_valid[n + X][P_N];
      assign lin_pkt[n][P_S]         = lout_pkt[n + X][P_N];
      assign lout_ready[n + X][P_N]  = lin_ready[n][P_S];
    end else begin : g_ns
      assign lin_valid[n][P_S] = 1'b0;
      assign lin_pkt[n][P_S]   = '0;
      assign lout_ready[n][P_S] = 1'b0;
    end
    if (CX > 0) begin : g_w
      assign lin_valid[n][P_W]       = lout_valid[n - 1][P_E];
      assign lin_pkt[n][P_W]         = lout_pkt[n - 1][P_E];
      assign lout_ready[n - 1][P_E]  = lin_ready[n][P_W];
    end else begin : g_nw
      assign lin_valid[n][P_W] = 1'b0;
      assign lin_pkt[n][P_W]   = '0;
      assign lout_ready[n][P_W] = 1'b0;
    end
    if (CX < X - 1) begin : g_e
      assign lin_valid[n][P_E]       = lout_valid[n + 1][P_W];
      assign lin_pkt[n][P_E]         = lout_pkt[n + 1][P_W];
      assign lout_ready[n + 1][P_W]  = lin_ready[n][P_E];
    end else begin : g_ne
      assign lin_valid[n][P_E] = 1'b0;
      assign lin_pkt[n][P_E]   = '0;
      assign lout_ready[n][P_E] = 1'b0;
    end
    assign lin_valid[n][P_L]  = 1'b0;
    assign lin_pkt[n][P_L]    = '0;
    assign lout_ready[n][P_L] = 1'b0;

    logic ext_ready_n, need_n;

    columnar_core #(.X(X), .Y(Y), .B(B), .T(T), .SEGS(SEGS), .SYNS(SYNS), .K(K),
                    .ENTRIES(ENTRIES), .D(D), .ACTIVE_K(ACTIVE_K), .SEG_TH(SEG_TH),
                    .DEPTH(DEPTH), .Q(Q)) u_cc (
      .clk, .rst_n,
      .my_x      (COORD_W'(CX)),
      .my_y      (COORD_W'(CY)),
      .lin_valid (lin_valid[n]),
      .lin_pkt   (lin_pkt[n]),
      .lin_ready (lin_ready[n]),
      .lout_valid(lout_valid[n]),
      .lout_pkt  (lout_pkt[n]),
      .lout_ready(lout_ready[n]),
      .has_ext   (n == 0),
      .ext_valid (n == 0 ? enc_out_valid : 1'b0),
      .ext_item  (enc_item),
      .ext_dst   (enc_dst),
      .ext_ready (ext_ready_n),
      .ext_last  (n == 0 ? (enc_out_valid && enc_out_ready && enc_out_last) : 1'b0),
      .need_input(need_n),
      .rep_valid (rep_valid[n]),
      .rep_active(rep_active[n]),
      .rep_burst (rep_burst[n]),
      .rep_pred  (rep_pred[n]),
      .ev_drain  (ev_dr[n]),
      .ev_coalesce(ev_co[n])
    );
    if (n == 0) begin : g_ext
      assign enc_out_ready = ext_ready_n;
      assign need_input    = need_n;
    end
  end

  anomaly_classifier #(.N(NN)) u_clf (
    .clk, .rst_n, .rep_valid, .rep_active, .rep_burst, .rep_pred,
    .score_valid, .score, .tot_active, .tot_burst, .tot_pred, .epochs
  );

  assign ev_coalesce = |ev_co;
  assign ev_drain    = ev_dr[0];

endmodule
