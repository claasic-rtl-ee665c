// pkt_fifo: a synchronous first-in first-out buffer of network packets.
//
// Used as the transit buffer of each router input port. DEPTH entries of one
// flit each; the default of 10 flits of 16 bytes matches a 160-byte buffer per
// port. push is ignored when full, pop when empty. head is valid when !empty.
// A pushed packet can be popped on the next cycle.
module pkt_fifo
  import claasic_pkg::*;
#(
  parameter int DEPTH = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  pkt_t din,
  input  logic pop,
  output pkt_t head,
  output logic full,
  output logic empty
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH + 1);

  pkt_t          mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [CW-1:0] cnt;

  assign full  = (cnt == CW'(DEPTH));
  assign empty = (cnt == '0);
  assign head  = mem[rd];

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd  <= '0;
      wr  <= '0;
      cnt <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (do_push) begin
        mem[wr] <= din;
        wr      <= (wr == AW'(DEPTH - 1)) ? '0 : wr + 1'b1;
      end
      if (do_pop) rd <= (rd == AW'(DEPTH - 1)) ? '0 : rd + 1'b1;
      cnt <= cnt + CW'(do_push) - CW'(do_pop);
    end
  end
endmodule
