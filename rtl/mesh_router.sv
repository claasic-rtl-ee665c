// mesh_router: the router of one columnar core, with in-network multicast and
// the broom-packet network drain.
//
// Function. Every packet names a rectangle [x0..x1] x [y0..y1] of cores. The
// router replicates it in dimension order: a packet first spreads along its row
// (east and west), and in every column of the rectangle it turns and spreads
// north and south; every core inside the rectangle ejects one copy. A unicast is
// a 1x1 rectangle, a broadcast the whole mesh. Copies go out of different ports
// independently (asynchronous replication): a packet leaves its input buffer
// once every copy it needs has been sent.
//
// Drain. The algorithm moves to its next stage only when the network holds no
// packet of the current stage. As in the paper, a special broom packet follows
// the traffic and is forwarded only when the local injection queue is empty,
// the local columns have finished the stage (local_done) and the transit
// buffers it comes through are empty. This design applies that rule to each
// output link separately: a broom is sent on an output once a broom has arrived
// on every input whose packets can be routed to that output (E <- W; W <- E;
// S <- W,E,N; N <- W,E,S; the local queue feeds all). Because XY routing makes
// these dependencies acyclic, brooms start at the west/east/north/south edges
// by themselves and the scheme cannot deadlock. Brooms travel inside the
// transit FIFOs, so everything in front of a broom belongs to the old stage and
// everything behind it to the next. Packets behind a broom are not sent on an
// output until that output's broom has gone. The stage is drained at this core
// (drain_done pulse) when brooms have arrived on all inputs, been sent on all
// outputs, and the ejection buffer of the current stage's packet type is empty.
// The paper injects two brooms at the corner cores; the per-link form is this
// design's generalisation of it.
//
// Interface. Link ports 1..4 = N,E,S,W (index 0 unused): lin_* is the incoming
// link into a transit FIFO, lout_* the outgoing link register, both
// valid/ready. Local injection: inj_valid/inj_pkt is the injection queue head,
// inj_pop removes it. Ejection: one register per packet type (input, inhibition,
// lateral), so that early packets of the next stage cannot block late ones of
// the current stage. Timing: two cycles per hop (into the input FIFO, then from
// its head to the output register); the paper's router has a 4-cycle pipeline.
module mesh_router
  import claasic_pkg::*;
#(
  parameter int X     = 16,
  parameter int Y     = 16,
  parameter int DEPTH = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // incoming links (index 1..4 = N,E,S,W)
  input  logic [4:0]         lin_valid,
  input  pkt_t               lin_pkt   [5],
  output logic [4:0]         lin_ready,
  // outgoing links
  output logic [4:0]         lout_valid,
  output pkt_t               lout_pkt  [5],
  input  logic [4:0]         lout_ready,
  // local injection
  input  logic               inj_valid,
  input  pkt_t               inj_pkt,
  output logic               inj_pop,
  input  logic               inj_empty,
  // local ejection, one register per packet type
  output logic [2:0]         ej_valid,
  output pkt_t               ej_pkt    [3],
  input  logic [2:0]         ej_ready,
  // drain control
  input  logic               local_done,
  input  logic [1:0]         stage_type,
  output logic               drain_done
);
  localparam int NO = 7;   // outputs: 0..2 eject per type, 3..6 = N,E,S,W

  // ---------------- input buffers ----------------
  pkt_t       fhead [5];
  logic [4:0] ffull, fempty, fpop;

  for (genvar d = 1; d < 5; d++) begin : g_fifo
    pkt_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .push (lin_valid[d] && !ffull[d]),
      .din  (lin_pkt[d]),
      .pop  (fpop[d]),
      .head (fhead[d]),
      .full (ffull[d]),
      .empty(fempty[d])
    );
    assign lin_ready[d] = !ffull[d];
  end
  assign lin_ready[0] = 1'b0;
  assign fhead[0]     = inj_pkt;
  assign ffull[0]     = 1'b0;
  assign fempty[0]    = !inj_valid;

  // existence of links at the mesh edge
  logic [4:0] ex;
  always_comb begin
    ex      = '0;
    ex[P_N] = (my_y != '0);
    ex[P_S] = (my_y != COORD_W'(Y - 1));
    ex[P_E] = (my_x != COORD_W'(X - 1));
    ex[P_W] = (my_x != '0);
  end

  // ---------------- routing ----------------
  function automatic logic [NO-1:0] route(input int i, input pkt_t p,
                                          input logic [COORD_W-1:0] x,
                                          input logic [COORD_W-1:0] y);
    logic [NO-1:0] m;
    logic inx, iny, xph;
    m   = '0;
    inx = (x >= p.dst.x0) && (x <= p.dst.x1);
    iny = (y >= p.dst.y0) && (y <= p.dst.y1);
    xph = (i == P_L) || (i == P_E) || (i == P_W);
    if ((i == P_L || i == P_W) && x < p.dst.x1) m[P_E + 2] = 1'b1;
    if ((i == P_L || i == P_E) && x > p.dst.x0) m[P_W + 2] = 1'b1;
    if (!xph || inx) begin
      if (i != P_S && y < p.dst.y1) m[P_S + 2] = 1'b1;
      if (i != P_N && y > p.dst.y0) m[P_N + 2] = 1'b1;
      if (iny) m[int'(p.ptype)] = 1'b1;
    end
    return m;
  endfunction

  logic [NO-1:0] need   [5];
  logic [NO-1:0] served [5];
  logic [NO-1:0] rem    [5];
  logic [4:0]    hv, hbroom;
  logic [1:0]    pending [5];   // brooms received and not yet consumed
  logic [4:0]    out_sent;      // broom of the current stage sent on this link

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      hv[i]     = !fempty[i];
      hbroom[i] = hv[i] && (fhead[i].ptype == PK_BROOM) && (i != P_L);
      need[i]   = route(i, fhead[i], my_x, my_y);
      rem[i]    = (hv[i] && !hbroom[i]) ? (need[i] & ~served[i]) : '0;
    end
  end

  // ---------------- broom send condition ----------------
  function automatic logic [4:0] feeders(input int d);
    case (d)
      P_E:     return 5'b1 << P_W;
      P_W:     return 5'b1 << P_E;
      P_S:     return (5'b1 << P_W) | (5'b1 << P_E) | (5'b1 << P_N);
      P_N:     return (5'b1 << P_W) | (5'b1 << P_E) | (5'b1 << P_S);
      default: return '0;
    endcase
  endfunction

  logic [4:0] got;       // input has delivered the broom of the current stage
  logic       inj_idle;
  logic [4:0] bsend;
  logic [4:0] ofree;

  always_comb begin
    for (int i = 0; i < 5; i++) got[i] = !ex[i] || (i == P_L) || (pending[i] != 2'd0);
    inj_idle = inj_empty && !inj_valid && (served[P_L] == '0);
    for (int d = 0; d < 5; d++) begin
      ofree[d] = !lout_valid[d] || lout_ready[d];
      bsend[d] = (d != P_L) && ex[d] && !out_sent[d] && local_done && inj_idle &&
                 ((feeders(d) & ~got) == '0) && ofree[d];
    end
  end

  // ---------------- output arbitration ----------------
  logic [2:0]    rr [NO];
  logic [4:0]    gnt [NO];          // gnt[o][i]
  logic [NO-1:0] gmask [5];         // outputs granted to input i this cycle
  logic [NO-1:0] ofree_o;

  function automatic logic allowed(input int i, input int o, input logic [1:0] pend,
                                   input logic sent);
    if (o < 3) return 1'b1;
    return (pend == 2'd0) || (pend == 2'd1 && sent);
  endfunction

  always_comb begin
    for (int o = 0; o < NO; o++) begin
      if (o < 3) ofree_o[o] = !ej_valid[o] || ej_ready[o];
      else       ofree_o[o] = ofree[o - 2] && !bsend[o - 2];
    end
    for (int i = 0; i < 5; i++) gmask[i] = '0;
    for (int o = 0; o < NO; o++) begin
      gnt[o] = '0;
      if (ofree_o[o]) begin
        for (int k = 0; k < 5; k++) begin
          automatic int i = (int'(rr[o]) + k) % 5;
          if (gnt[o] == '0 && rem[i][o] &&
              allowed(i, o, (i == P_L) ? 2'd0 : pending[i], (o >= 3) ? out_sent[o - 2] : 1'b0))
            gnt[o][i] = 1'b1;
        end
      end
      for (int i = 0; i < 5; i++) if (gnt[o][i]) gmask[i][o] = 1'b1;
    end
  end

  // input pops: brooms immediately, data once every copy has been sent
  logic [4:0] done_in;
  always_comb begin
    for (int i = 0; i < 5; i++) begin
      done_in[i] = hbroom[i] || (hv[i] && !hbroom[i] && ((rem[i] & ~gmask[i]) == '0));
      fpop[i]    = done_in[i];
    end
  end
  assign inj_pop = done_in[P_L];

  assign drain_done = local_done && inj_idle && ((ex & ~got) == '0) &&
                      ((ex & ~out_sent) == '0) && !ej_valid[stage_type];

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        served[i]  <= '0;
        pending[i] <= '0;
        lout_pkt[i] <= '0;
      end
      for (int o = 0; o < NO; o++) rr[o] <= '0;
      for (int t = 0; t < 3; t++) ej_pkt[t] <= '0;
      lout_valid <= '0;
      ej_valid   <= '0;
      out_sent   <= '0;
    end else begin
      for (int i = 0; i < 5; i++) begin
        served[i] <= done_in[i] ? '0 : (served[i] | gmask[i]);
        pending[i] <= pending[i] + 2'(hbroom[i]) - 2'(drain_done && ex[i] && i != P_L);
      end
      for (int d = 1; d < 5; d++) begin
        if (lout_valid[d] && lout_ready[d]) lout_valid[d] <= 1'b0;
        if (bsend[d]) begin
          lout_valid[d]        <= 1'b1;
          lout_pkt[d]          <= '0;
          lout_pkt[d].ptype    <= PK_BROOM;
        end
      end
      for (int t = 0; t < 3; t++) if (ej_valid[t] && ej_ready[t]) ej_valid[t] <= 1'b0;
      for (int o = 0; o < NO; o++) begin
        for (int i = 0; i < 5; i++) begin
          if (gnt[o][i]) begin
            rr[o] <= 3'((i + 1) % 5);
            if (o < 3) begin
              ej_valid[o] <= 1'b1;
              ej_pkt[o]   <= fhead[i];
            end else begin
              lout_valid[o - 2] <= 1'b1;
              lout_pkt[o - 2]   <= fhead[i];
            end
          end
        end
      end
      out_sent <= drain_done ? '0 : (out_sent | bsend);
    end
  end

  // Rules of the drain protocol.
  a_pending_bound : assert property (@(posedge clk) disable iff (!rst_n)
    pending[P_N] != 2'd3 && pending[P_E] != 2'd3 && pending[P_S] != 2'd3 && pending[P_W] != 2'd3);
  a_no_broom_eject : assert property (@(posedge clk) disable iff (!rst_n)
    ej_valid[0] |-> ej_pkt[0].ptype == PK_INPUT);

endmodule
