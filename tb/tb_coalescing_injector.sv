// tb_coalescing_injector: checks merging in the injection queue.
//
// While the head is not popped, items with the same type and destination must
// be merged into waiting packets of up to MAX_ITEMS items in arrival order;
// the head packet itself is never extended; a different destination or type
// starts a new packet; a full queue refuses new items. The packets popped are
// compared with a model built by the same rules in the testbench.
module tb_coalescing_injector;
  import claasic_pkg::*;
  localparam int Q = 4;

  logic clk = 1'b0, rst_n = 1'b1;
  logic in_valid, in_ready, out_valid, out_pop, empty, coalesced;
  ptype_e in_type;
  rect_t in_dst;
  item_t in_item;
  pkt_t out_pkt;

  coalescing_injector #(.Q(Q)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_coal = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  always @(posedge clk) if (coalesced) n_coal++;

  rect_t dA = '{x0: 0, x1: 3, y0: 0, y1: 3};
  rect_t dB = '{x0: 1, x1: 1, y0: 2, y1: 2};

  task automatic push(input ptype_e t, input rect_t d, input item_t it, input bit expect_ok);
    @(negedge clk);
    in_valid = 1; in_type = t; in_dst = d; in_item = it;
    #1 check(in_ready == expect_ok, $sformatf("in_ready=%b for item %0d", in_ready, it));
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic pop_expect(input ptype_e t, input rect_t d, input int n, input int first);
    @(negedge clk);
    check(out_valid, "no packet");
    check(out_pkt.ptype == t && out_pkt.dst == d, "type/destination");
    check(int'(out_pkt.n_items) == n, $sformatf("n_items %0d expected %0d", out_pkt.n_items, n));
    for (int i = 0; i < n; i++)
      check(int'(out_pkt.items[i]) == first + i, $sformatf("item %0d = %0d", i, out_pkt.items[i]));
    out_pop = 1;
    @(negedge clk);
    out_pop = 0;
  endtask

  initial begin
    in_valid = 0; out_pop = 0; in_type = PK_INHIB; in_dst = dA; in_item = 0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(empty && !out_valid, "empty after reset");
    push(PK_INHIB, dA, 10, 1);           // head packet: 10
    push(PK_INHIB, dA, 20, 1);           // new packet (head is not extended)
    push(PK_INHIB, dA, 21, 1);
    push(PK_INHIB, dA, 22, 1);
    push(PK_INHIB, dA, 23, 1);           // 20..23 full
    push(PK_INHIB, dA, 30, 1);           // new packet 30
    push(PK_LATERAL, dA, 40, 1);         // other type: new packet
    push(PK_INHIB, dB, 50, 0);           // queue full (4 packets), no match: refused
    push(PK_INHIB, dA, 31, 1);           // merges into 30
    push(PK_LATERAL, dA, 41, 1);         // merges into 40
    check(n_coal == 5, $sformatf("coalesced %0d", n_coal));
    pop_expect(PK_INHIB, dA, 1, 10);
    pop_expect(PK_INHIB, dA, 4, 20);
    push(PK_INHIB, dB, 50, 1);           // room again
    pop_expect(PK_INHIB, dA, 2, 30);
    pop_expect(PK_LATERAL, dA, 2, 40);
    pop_expect(PK_INHIB, dB, 1, 50);
    check(empty, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
