// coalescing_injector: the injection queue of one columnar core.
//
// The core hands over one item at a time, each with a packet type and a
// destination rectangle. Before a new packet is queued, the waiting packets are
// searched. If one has the same type and destination and still has room for an
// item, the new item is appended to it and no new packet is made. This follows
// the coalescing injection queue described for the accelerator. The packet at
// the head of the queue is excluded from the search because the router may
// already be copying it; only packets still waiting are extended.
//
// Interface: in_valid/in_ready handshake for items; out_valid/out_pkt is the
// head packet, removed when out_pop is high. empty is high when nothing is
// queued. Timing: an item is accepted in the cycle in_valid && in_ready and is
// visible in the queue on the next cycle. Queue depth Q (8) is this design's
// choice; the paper gives no depth.
module coalescing_injector
  import claasic_pkg::*;
#(
  parameter int Q = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  ptype_e in_type,
  input  rect_t  in_dst,
  input  item_t  in_item,
  output logic   out_valid,
  output pkt_t   out_pkt,
  input  logic   out_pop,
  output logic   empty,
  output logic   coalesced     // pulses when an item was appended to a waiting packet
);
  localparam int PW = (Q > 1) ? $clog2(Q) : 1;

  pkt_t          ent [Q];
  logic [Q-1:0]  vld;
  logic [PW-1:0] rd_ptr, wr_ptr;

  logic          match_found;
  logic [PW-1:0] match_idx;

  always_comb begin
    match_found = 1'b0;
    match_idx   = '0;
    for (int i = 0; i < Q; i++) begin
      if (!match_found && vld[i] && (PW'(i) != rd_ptr) &&
          ent[i].ptype == in_type && ent[i].dst == in_dst &&
          ent[i].n_items < CNT_W'(MAX_ITEMS)) begin
        match_found = 1'b1;
        match_idx   = PW'(i);
      end
    end
  end

  assign in_ready  = match_found || !vld[wr_ptr];
  assign out_valid = vld[rd_ptr];
  assign out_pkt   = ent[rd_ptr];
  assign empty     = (vld == '0);
  assign coalesced = in_valid && match_found;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(Q - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld    <= '0;
      rd_ptr <= '0;
      wr_ptr <= '0;
      for (int i = 0; i < Q; i++) ent[i] <= '0;
    end else begin
      if (out_pop && vld[rd_ptr]) begin
        vld[rd_ptr] <= 1'b0;
        rd_ptr      <= inc(rd_ptr);
      end
      if (in_valid && in_ready) begin
        if (match_found) begin
          ent[match_idx].items[ent[match_idx].n_items[$clog2(MAX_ITEMS)-1:0]] <= in_item;
          ent[match_idx].n_items <= ent[match_idx].n_items + 1'b1;
        end else begin
          ent[wr_ptr].ptype    <= in_type;
          ent[wr_ptr].dst      <= in_dst;
          ent[wr_ptr].n_items  <= CNT_W'(1);
          ent[wr_ptr].items    <= '0;
          ent[wr_ptr].items[0] <= in_item;
          vld[wr_ptr]          <= 1'b1;
          wr_ptr               <= inc(wr_ptr);
        end
      end
    end
  end

  // A packet never holds more items than fit in one flit.
  a_items_bound : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> (out_pkt.n_items >= 1 && out_pkt.n_items <= CNT_W'(MAX_ITEMS)));

endmodule
