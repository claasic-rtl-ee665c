// tb_mesh_router: multicast routing and the broom drain of one router.
//
// The router sits at (1,1) of a 3x3 mesh; the testbench plays its four
// neighbours and its core. It checks where copies of packets go for several
// destination rectangles and arrival ports (expected ports worked out by hand
// from dimension-order replication), that a broom is sent on an output only
// after brooms arrived on every input feeding it, that a packet arriving
// behind a broom leaves after the broom, and that drain_done pulses once,
// only after all four input brooms and all four output brooms. Also checks the
// two-cycle hop latency (input FIFO, then output register).
module tb_mesh_router;
  import claasic_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [4:0] lin_valid, lin_ready, lout_valid, lout_ready;
  pkt_t lin_pkt [5], lout_pkt [5];
  logic inj_valid, inj_pop, inj_empty, local_done, drain_done;
  pkt_t inj_pkt;
  logic [2:0] ej_valid, ej_ready;
  pkt_t ej_pkt [3];
  logic [1:0] stage_type;
  logic [COORD_W-1:0] my_x = 1, my_y = 1;

  mesh_router #(.X(3), .Y(3), .DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_drain = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // what left on each port: ports 1..4 links, 5+type ejection; value = tag or -1 for broom
  int seen [8][$];
  always @(posedge clk) if (rst_n) begin
    for (int d = 1; d < 5; d++) if (lout_valid[d] && lout_ready[d])
      seen[d].push_back(lout_pkt[d].ptype == PK_BROOM ? -1 : int'(lout_pkt[d].items[0]));
    for (int t = 0; t < 3; t++) if (ej_valid[t] && ej_ready[t]) seen[5 + t].push_back(int'(ej_pkt[t].items[0]));
    if (drain_done) n_drain++;
  end

  function automatic pkt_t mk(input ptype_e t, input int x0, input int x1, input int y0,
                              input int y1, input int tag);
    pkt_t p = '0;
    p.ptype = t; p.dst = '{x0: 4'(x0), x1: 4'(x1), y0: 4'(y0), y1: 4'(y1)};
    p.n_items = 1; p.items[0] = item_t'(tag);
    return p;
  endfunction

  task automatic send_link(input int d, input pkt_t p);
    @(negedge clk);
    lin_valid[d] = 1; lin_pkt[d] = p;
    do @(negedge clk); while (!lin_ready[d] && 0);
    lin_valid[d] = 0;
  endtask
  task automatic send_inj(input pkt_t p);
    @(negedge clk);
    inj_valid = 1; inj_pkt = p; inj_empty = 0;
    #1;
    while (!inj_pop) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 inj_valid = 0; inj_empty = 1;
  endtask
  task automatic clear_seen();
    for (int i = 0; i < 8; i++) seen[i].delete();
  endtask
  // ports: 1 N, 2 E, 3 S, 4 W, 5 eject input, 6 eject inhibition, 7 eject lateral
  task automatic expect_ports(input logic [7:0] m, input int tag, input string what);
    repeat (4) @(negedge clk);
    for (int i = 1; i < 8; i++)
      check((seen[i].size() == 1 && seen[i][0] == tag) == m[i] && seen[i].size() <= 1,
            $sformatf("%s: port %0d saw %0d packets", what, i, seen[i].size()));
    clear_seen();
  endtask

  initial begin
    lin_valid = '0; lout_ready = '1; inj_valid = 0; inj_empty = 1; ej_ready = '1;
    local_done = 0; stage_type = 2'd1; inj_pkt = '0;
    for (int i = 0; i < 5; i++) lin_pkt[i] = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // broadcast from the local core: all four links and local ejection
    send_inj(mk(PK_INHIB, 0, 2, 0, 2, 11));
    expect_ports(8'b0101_1110, 11, "broadcast from core");
    // from the west, rectangle x 1..2, y 0..1: east, north and local
    send_link(P_W, mk(PK_LATERAL, 1, 2, 0, 1, 12));
    expect_ports(8'b1000_0110, 12, "from west");
    // from the north, full mesh (y-phase): south and local only
    send_link(P_N, mk(PK_INPUT, 0, 2, 0, 2, 13));
    expect_ports(8'b0010_1000, 13, "from north");
    // unicast from the core to (2,2): east only
    send_inj(mk(PK_INPUT, 2, 2, 2, 2, 14));
    expect_ports(8'b0000_0100, 14, "unicast to (2,2)");
    // from the east, column 0 only, rows 1..2: west only
    send_link(P_E, mk(PK_INHIB, 0, 0, 1, 2, 15));
    expect_ports(8'b0001_0000, 15, "from east to column 0");
    // hop latency: a packet accepted at edge t is handed over at edge t+2
    @(negedge clk);
    lin_valid[P_W] = 1; lin_pkt[P_W] = mk(PK_INHIB, 2, 2, 1, 1, 16);
    @(negedge clk);
    lin_valid[P_W] = 0;
    check(seen[P_E].size() == 0, "not out in the accepting cycle");
    @(negedge clk);
    check(seen[P_E].size() == 0, "not out one cycle later");
    @(negedge clk);
    check(seen[P_E].size() == 1, "two-cycle hop");
    clear_seen();

    // ---- drain ----
    local_done = 1;
    repeat (3) @(negedge clk);
    check(seen[1].size() + seen[2].size() + seen[3].size() + seen[4].size() == 0,
          "no broom before any input broom");
    send_link(P_W, mk(PK_BROOM, 0, 0, 0, 0, 0));
    // a next-stage packet right behind the west broom, heading east
    send_link(P_W, mk(PK_INHIB, 2, 2, 1, 1, 21));
    repeat (3) @(negedge clk);
    check(seen[P_E].size() == 2 && seen[P_E][0] == -1 && seen[P_E][1] == 21,
          "east: broom then the packet behind it");
    check(seen[P_S].size() == 0 && seen[P_N].size() == 0 && seen[P_W].size() == 0,
          "other outputs still wait");
    send_link(P_E, mk(PK_BROOM, 0, 0, 0, 0, 0));
    repeat (3) @(negedge clk);
    check(seen[P_W].size() == 1 && seen[P_W][0] == -1, "west broom after east input broom");
    check(seen[P_S].size() == 0 && seen[P_N].size() == 0, "north/south still wait");
    send_link(P_N, mk(PK_BROOM, 0, 0, 0, 0, 0));
    repeat (3) @(negedge clk);
    check(seen[P_S].size() == 1 && seen[P_N].size() == 0, "south broom after W,E,N");
    check(n_drain == 0, "no drain before the last input broom");
    send_link(P_S, mk(PK_BROOM, 0, 0, 0, 0, 0));
    repeat (3) @(negedge clk);
    check(seen[P_N].size() == 1 && seen[P_N][0] == -1, "north broom after W,E,S");
    check(n_drain == 1, $sformatf("drain_done pulses %0d", n_drain));
    repeat (5) @(negedge clk);
    check(n_drain == 1, "drain_done only once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
