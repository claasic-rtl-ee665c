// columnar_core: one Columnar Core (CC) of the cortex: B columns of T cells,
// their spatial-pooling and temporal-memory logic, a coalescing injection
// queue and a mesh router.
//
// An input epoch runs through the nine stages of the algorithm in order. The
// drain stages are barriers: the core leaves them only when its router reports
// that no packet of the stage is left for it anywhere (broom-based drain).
//   S1/S2 ST_PROX      input spikes (type input) arrive and update the
//                      overlaps; on the core that hosts the encoder the stage
//                      is done once the encoder has finished the epoch.
//   S3/S4 ST_INH_SEND  each column with a non-zero overlap broadcasts an
//                      inhibition item {overlap, id}; incoming inhibition items
//                      are compared with the local overlaps.
//   S5    ST_INH_WAIT  drain of the inhibition traffic.
//   S6    ST_LC*       the winners of the inhibition learn (spatial pooler);
//                      active and bursting cells are decided and distal
//                      learning runs (temporal memory).
//   S7    ST_DST_SEND  one lateral item per active cell is broadcast; incoming
//                      lateral items fill the activation list.
//   S8    ST_DST_WAIT  drain of the lateral traffic.
//   S9    ST_PRED*     prediction; then the core reports its counts of active,
//                      bursting and predicted columns to the classifier.
// Interface: four mesh links (index 1..4 = N,E,S,W), an external injection port
// (used by the core the encoder is attached to; has_ext=1), and the report.
// Timing: items are handled one per cycle; a packet of n items occupies the
// core for n cycles. Stage order, drains and the report follow the paper's
// stage list; the overlap of stages (pipelined algorithm) is not built: this
// core runs the stages of one epoch one after another.
module columnar_core
  import claasic_pkg::*;
#(
  parameter int X        = 16,
  parameter int Y        = 16,
  parameter int B        = 8,
  parameter int T        = 32,
  parameter int SEGS     = 128,
  parameter int SYNS     = 40,
  parameter int K        = 2048,
  parameter int ENTRIES  = 64,
  parameter int D        = 32,
  parameter int ACTIVE_K = 40,
  parameter int SEG_TH   = 13,
  parameter int DEPTH    = 10,
  parameter int Q        = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // mesh links
  input  logic [4:0]         lin_valid,
  input  pkt_t               lin_pkt   [5],
  output logic [4:0]         lin_ready,
  output logic [4:0]         lout_valid,
  output pkt_t               lout_pkt  [5],
  input  logic [4:0]         lout_ready,
  // external injection (encoder)
  input  logic               has_ext,
  input  logic               ext_valid,
  input  item_t              ext_item,
  input  rect_t              ext_dst,
  output logic               ext_ready,
  input  logic               ext_last,      // pulse: the encoder finished this epoch
  output logic               need_input,    // in the input stage, waiting for the encoder
  // report to the classifier, one pulse per epoch
  output logic               rep_valid,
  output logic [7:0]         rep_active,
  output logic [7:0]         rep_burst,
  output logic [7:0]         rep_pred,
  // event pulses (for monitoring)
  output logic               ev_drain,
  output logic               ev_coalesce
);
  localparam int NCOL = X * Y * B;
  localparam int CIW  = $clog2(B * T) + 1;

  typedef enum logic [3:0] {
    ST_START, ST_PROX, ST_INH_SEND, ST_INH_WAIT, ST_LC0, ST_LC1, ST_LC2,
    ST_DST_SEND, ST_DST_WAIT, ST_PRED0, ST_PRED1, ST_REPORT
  } st_e;
  st_e st;

  logic [COL_W-1:0] base_col;
  assign base_col = COL_W'((int'(my_y) * X + int'(my_x)) * B);

  rect_t all_dst;
  assign all_dst = '{x0: '0, x1: COORD_W'(X - 1), y0: '0, y1: COORD_W'(Y - 1)};

  // ---------------- router and injector ----------------
  logic   inj_in_valid, inj_in_ready, inj_out_valid, inj_pop, inj_empty;
  ptype_e inj_in_type;
  rect_t  inj_in_dst;
  item_t  inj_in_item;
  pkt_t   inj_out_pkt;
  logic [2:0] ej_valid, ej_ready;
  pkt_t   ej_pkt [3];
  logic   local_done, drain_done;
  logic [1:0] stage_type;

  coalescing_injector #(.Q(Q)) u_inj (
    .clk, .rst_n,
    .in_valid (inj_in_valid), .in_ready(inj_in_ready), .in_type(inj_in_type),
    .in_dst   (inj_in_dst),   .in_item (inj_in_item),
    .out_valid(inj_out_valid), .out_pkt(inj_out_pkt), .out_pop(inj_pop),
    .empty    (inj_empty),    .coalesced(ev_coalesce)
  );

  mesh_router #(.X(X), .Y(Y), .DEPTH(DEPTH)) u_router (
    .clk, .rst_n, .my_x, .my_y,
    .lin_valid, .lin_pkt, .lin_ready, .lout_valid, .lout_pkt, .lout_ready,
    .inj_valid(inj_out_valid), .inj_pkt(inj_out_pkt), .inj_pop(inj_pop), .inj_empty(inj_empty),
    .ej_valid, .ej_pkt, .ej_ready,
    .local_done, .stage_type, .drain_done
  );
  assign ev_drain = drain_done;

  // ---------------- item processing ----------------
  logic               pbusy;
  pkt_t               ppkt;
  logic [CNT_W-1:0]   pidx;
  item_t              pitem;
  logic               acc_en;
  logic [1:0]         acc_type;

  always_comb begin
    acc_en   = 1'b0;
    acc_type = 2'd0;
    case (st)
      ST_PROX:                  begin acc_en = 1'b1; acc_type = 2'd0; end
      ST_INH_SEND, ST_INH_WAIT: begin acc_en = 1'b1; acc_type = 2'd1; end
      ST_DST_SEND, ST_DST_WAIT: begin acc_en = 1'b1; acc_type = 2'd2; end
      default: ;
    endcase
    for (int t = 0; t < 3; t++) ej_ready[t] = acc_en && !pbusy && (acc_type == 2'(t));
  end

  assign pitem = ppkt.items[pidx[$clog2(MAX_ITEMS)-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pbusy <= 1'b0;
      ppkt  <= '0;
      pidx  <= '0;
    end else if (pbusy) begin
      pidx <= pidx + 1'b1;
      if (pidx + 1'b1 >= ppkt.n_items) pbusy <= 1'b0;
    end else if (ej_valid[acc_type] && ej_ready[acc_type]) begin
      pbusy <= 1'b1;
      ppkt  <= ej_pkt[acc_type];
      pidx  <= '0;
    end
  end

  // ---------------- spatial pooler and temporal memory ----------------
  logic            sp_clear, sp_compute;
  logic [B-1:0][11:0] overlap;
  logic [B-1:0]    col_active;
  logic            tm_clear, tm_lc, tm_pred, tm_busy;
  logic [B-1:0][T-1:0] act_cell, learn_cell;
  logic [B-1:0]    burst, pred_col;

  spatial_pooler #(.B(B), .NCOL(NCOL), .K(K), .ENTRIES(ENTRIES), .D(D),
                   .ACTIVE_K(ACTIVE_K)) u_sp (
    .clk, .rst_n, .base_col,
    .clear    (sp_clear),
    .in_valid (pbusy && ppkt.ptype == PK_INPUT),
    .in_bit   (pitem[IN_W-1:0]),
    .inh_valid(pbusy && ppkt.ptype == PK_INHIB),
    .inh_ovl  (pitem[COL_W +: OVL_W]),
    .inh_col  (pitem[COL_W-1:0]),
    .compute  (sp_compute),
    .overlap, .col_active
  );

  temporal_memory #(.B(B), .T(T), .SEGS(SEGS), .SYNS(SYNS), .NCOL(NCOL),
                    .SEG_TH(SEG_TH)) u_tm (
    .clk, .rst_n,
    .lat_valid (pbusy && ppkt.ptype == PK_LATERAL),
    .lat_learn (pitem[COL_W + CELL_W]),
    .lat_col   (pitem[CELL_W +: COL_W]),
    .lat_cell  (pitem[CELL_W-1:0]),
    .clear_map (tm_clear),
    .col_active,
    .lc_start  (tm_lc),
    .pred_start(tm_pred),
    .busy      (tm_busy),
    .act_cell, .learn_cell, .burst, .pred_col
  );

  // ---------------- stage sequencer ----------------
  logic [CIW-1:0] idx;
  logic           ext_flag;
  logic [B-1:0][T-1:0] act_flat;
  assign act_flat = act_cell;

  always_comb begin
    sp_clear   = (st == ST_START);
    sp_compute = (st == ST_LC0);
    tm_lc      = (st == ST_LC1);
    tm_clear   = (st == ST_LC2) && !tm_busy;
    tm_pred    = (st == ST_PRED0);
    stage_type = acc_type;
    case (st)
      ST_PROX:     local_done = (!has_ext || ext_flag) && !pbusy;
      ST_INH_WAIT: local_done = !pbusy;
      ST_DST_WAIT: local_done = !pbusy;
      default:     local_done = 1'b0;
    endcase
    need_input = has_ext && (st == ST_PROX) && !ext_flag;

    inj_in_valid = 1'b0;
    inj_in_type  = PK_INPUT;
    inj_in_dst   = all_dst;
    inj_in_item  = '0;
    ext_ready    = 1'b0;
    if (st == ST_PROX && has_ext) begin
      inj_in_valid = ext_valid;
      inj_in_dst   = ext_dst;
      inj_in_item  = ext_item;
      ext_ready    = inj_in_ready;
    end else if (st == ST_INH_SEND && int'(idx) < B) begin
      inj_in_valid = (overlap[idx[CIW-2:0]] != '0);
      inj_in_type  = PK_INHIB;
      inj_in_item  = mk_inhib((overlap[idx[CIW-2:0]] > 12'(2**OVL_W - 1)) ? {OVL_W{1'b1}}
                              : overlap[idx[CIW-2:0]][OVL_W-1:0],
                              base_col + COL_W'(idx));
    end else if (st == ST_DST_SEND && int'(idx) < B * T) begin
      inj_in_valid = act_flat[int'(idx) / T][int'(idx) % T];
      inj_in_type  = PK_LATERAL;
      inj_in_item  = mk_lateral(learn_cell[int'(idx) / T][int'(idx) % T],
                                base_col + COL_W'(int'(idx) / T), CELL_W'(int'(idx) % T));
    end
  end

  function automatic logic [7:0] popc(input logic [B-1:0] v);
    logic [7:0] n;
    n = '0;
    for (int i = 0; i < B; i++) n = n + 8'(v[i]);
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= ST_START;
      idx        <= '0;
      ext_flag   <= 1'b0;
      rep_valid  <= 1'b0;
      rep_active <= '0;
      rep_burst  <= '0;
      rep_pred   <= '0;
    end else begin
      rep_valid <= 1'b0;
      if (ext_last) ext_flag <= 1'b1;
      case (st)
        ST_START: st <= ST_PROX;
        ST_PROX: if (drain_done) begin
          st       <= ST_INH_SEND;
          idx      <= '0;
          ext_flag <= 1'b0;
        end
        ST_INH_SEND: begin
          if (int'(idx) >= B) st <= ST_INH_WAIT;
          else if (!inj_in_valid || inj_in_ready) idx <= idx + 1'b1;
        end
        ST_INH_WAIT: if (drain_done) st <= ST_LC0;
        ST_LC0: st <= ST_LC1;
        ST_LC1: st <= ST_LC2;
        ST_LC2: if (!tm_busy) begin
          st  <= ST_DST_SEND;
          idx <= '0;
        end
        ST_DST_SEND: begin
          if (int'(idx) >= B * T) st <= ST_DST_WAIT;
          else if (!inj_in_valid || inj_in_ready) idx <= idx + 1'b1;
        end
        ST_DST_WAIT: if (drain_done) st <= ST_PRED0;
        ST_PRED0: st <= ST_PRED1;
        ST_PRED1: if (!tm_busy) st <= ST_REPORT;
        ST_REPORT: begin
          rep_valid  <= 1'b1;
          rep_active <= popc(col_active);
          rep_burst  <= popc(burst);
          rep_pred   <= popc(pred_col);
          st         <= ST_START;
        end
        default: st <= ST_START;
      endcase
    end
  end

  a_drain_only_when_waiting : assert property (@(posedge clk) disable iff (!rst_n)
    drain_done |-> (st == ST_PROX || st == ST_INH_WAIT || st == ST_DST_WAIT));

endmodule
