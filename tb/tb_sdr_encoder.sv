// tb_sdr_encoder: checks the scalar encoder against a reference model.
//
// The reference rebuilds R1 and R2 from the same seed hash and xorshift
// generator in plain procedural code and forms the expected set of W bits.
// For a series of values the test checks the set of emitted bit indices and
// the sdr vector, that exactly W items come out with out_last on the last,
// that every destination rectangle is well formed and contains the core of
// some column whose field holds the bit, that neighbouring values share at
// least W-2 bits and that the same value gives the same code again.
module tb_sdr_encoder;
  import claasic_pkg::*;

  localparam int K = 64, W = 4, X = 2, Y = 2, B = 4, D = 8;
  localparam int NCOL = X * Y * B;

  logic clk = 1'b0, rst_n = 1'b1;
  logic val_valid, val_ready, out_valid, out_ready, out_last;
  logic [31:0] value;
  item_t out_item;
  rect_t out_dst;
  logic [K-1:0] sdr;

  sdr_encoder #(.K(K), .W(W), .X(X), .Y(Y), .B(B), .D(D)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] ref_hash(input logic [31:0] s);
    logic [31:0] h;
    h = s * 32'h9E3779B1 ^ 32'h85EBCA6B;
    return (h == 0) ? 32'h1 : h;
  endfunction
  function automatic logic [31:0] ref_xs(input logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v << 13); t = t ^ (t >> 17); return t ^ (t << 5);
  endfunction
  function automatic logic [K-1:0] ref_code(input logic [31:0] L);
    logic [K-1:0] r1, s;
    int q, r, n;
    logic [31:0] p;
    q = int'(L / W); r = int'(L % W);
    r1 = '0; s = '0; n = 0; p = ref_hash(32'(q));
    while (n < W) begin
      int i = int'(p % K);
      if (!r1[i]) begin r1[i] = 1'b1; if (n >= r) s[i] = 1'b1; n++; end
      p = ref_xs(p);
    end
    n = 0; p = ref_hash(32'(q + 1));
    while (n < r) begin
      int i = int'(p % K);
      if (!r1[i] && !s[i]) begin s[i] = 1'b1; n++; end
      p = ref_xs(p);
    end
    return s;
  endfunction

  logic [K-1:0] got;
  int n_items, n_last;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      automatic int i = int'(out_item);
      got[i] = 1'b1;
      n_items++;
      if (out_last) n_last++;
      check(out_dst.x0 <= out_dst.x1 && out_dst.y0 <= out_dst.y1, "bad rectangle");
      // the core holding column c with field [lo, lo+D) must be inside the rectangle
      for (int c = 0; c < NCOL; c++) begin
        automatic int lo = (c * K) / NCOL - D / 2;
        if (lo < 0) lo = 0;
        if (lo > K - D) lo = K - D;
        if (i >= lo && i < lo + D) begin
          automatic int n = c / B;
          if (!(n % X >= out_dst.x0 && n % X <= out_dst.x1 && n / X >= out_dst.y0 && n / X <= out_dst.y1))
            begin failures++; $display("FAIL: column %0d of bit %0d outside rectangle", c, i); end
        end
      end
    end
  end

  logic [K-1:0] codes [int];

  task automatic encode(input logic [31:0] v);
    got = '0; n_items = 0; n_last = 0;
    @(negedge clk);
    value = v; val_valid = 1'b1;
    do @(negedge clk); while (!val_ready && 0);
    val_valid = 1'b0;
    wait (val_ready);
    @(negedge clk);
    check(got == ref_code(v), $sformatf("code of %0d differs from reference", v));
    check(sdr == ref_code(v), $sformatf("sdr of %0d differs", v));
    check(n_items == W && n_last == 1, $sformatf("value %0d: %0d items %0d last", v, n_items, n_last));
    codes[int'(v)] = sdr;
  endtask

  initial begin
    val_valid = 0; value = 0; out_ready = 1;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < 14; v++) encode(32'(v));
    // stalls from the sink must not change the code
    fork
      forever begin @(negedge clk); out_ready = ($urandom % 3) != 0; end
    join_none
    encode(32'd1000);
    encode(32'd1001);
    encode(32'd5);
    check(codes[5] == ref_code(5), "same value, same code");
    for (int v = 0; v < 13; v++)
      check($countones(codes[v] & codes[v + 1]) >= W - 2, $sformatf("values %0d,%0d too far apart", v, v + 1));
    check($countones(codes[1000] & codes[1001]) >= W - 2, "1000/1001 overlap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
