// fp32_add: IEEE-754 single-precision adder, one combinational stage.
//
// This is the FP32 adder that sits in every GOBO processing element (where
// it adds an input activation into a per-index register-file entry) and in
// the shared processing unit (where it accumulates products into the
// output register file). The paper names the unit and gives its area only;
// the algorithm below is the textbook one and is this design's choice:
//   1. order the operands by magnitude and align the smaller one, keeping a
//      guard, a round and a sticky bit;
//   2. add or subtract the significands;
//   3. renormalise (one right shift after an add carry, a leading-zero shift
//      after a cancellation);
//   4. round to nearest, ties to even.
// Subnormal inputs are read as zero and subnormal results are flushed to a
// signed zero; an exact cancellation gives +0. Infinities follow IEEE rules
// and any NaN or inf-inf gives the quiet NaN 32'h7fc00000.
// Interface: a, b in, y = a + b out, no clock; the result is valid in the
// same cycle.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  function automatic logic [4:0] lzc28(input logic [27:0] v);
    logic [4:0] n;
    logic       found;
    n     = 5'd28;
    found = 1'b0;
    for (int i = 27; i >= 0; i--) begin
      if (!found && v[i]) begin
        n     = 5'(27 - i);
        found = 1'b1;
      end
    end
    return n;
  endfunction

  always_comb begin
    logic        sa, sb, sx, sy_s;
    logic [7:0]  ea, eb, ex, ey;
    logic [23:0] ma, mb, mx, my;
    logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero, sub;
    logic [7:0]  d;
    logic [26:0] xe, ye;     // significand with guard, round, sticky
    logic [27:0] s;          // sum or difference
    logic [4:0]  lz;
    logic signed [9:0] e;
    logic [23:0] m;
    logic        g, r, st, up;
    logic [24:0] mr;

    sa = a[31]; ea = a[30:23];
    sb = b[31]; eb = b[30:23];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_nan  = (ea == 8'hff) && (a[22:0] != 23'd0);
    b_nan  = (eb == 8'hff) && (b[22:0] != 23'd0);
    a_inf  = (ea == 8'hff) && (a[22:0] == 23'd0);
    b_inf  = (eb == 8'hff) && (b[22:0] == 23'd0);
    ma = a_zero ? 24'd0 : {1'b1, a[22:0]};
    mb = b_zero ? 24'd0 : {1'b1, b[22:0]};

    // x is the operand of larger magnitude
    if ({ea, a[22:0]} >= {eb, b[22:0]}) begin
      sx = sa; ex = ea; mx = ma; sy_s = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy_s = sa; ey = ea; my = ma;
    end
    sub = sx ^ sy_s;

    // align
    d  = ex - ey;
    xe = {mx, 3'b000};
    if (d >= 8'd27) begin
      ye = {26'd0, (my != 24'd0)};
    end else begin
      ye = {my, 3'b000} >> d;
      // sticky: any bit of my shifted out below the guard/round positions
      if (d > 8'd2) ye[0] = ye[0] | (({my, 3'b000} & ((27'd1 << d) - 27'd1)) != 27'd0);
    end

    e  = {2'b00, ex};
    lz = '0;
    if (sub) s = {1'b0, xe} - {1'b0, ye};
    else     s = {1'b0, xe} + {1'b0, ye};

    if (s[27]) begin
      // carry out of an addition: shift right by one, keep sticky
      s = {1'b0, s[27:2], s[1] | s[0]};
      e = e + 10'sd1;
    end else if (s != 28'd0) begin
      lz = lzc28(s) - 5'd1;       // leading one goes to bit 26
      s  = s << lz;
      e  = e - 10'(lz);
    end

    m  = s[26:3];
    g  = s[2];
    r  = s[1];
    st = s[0];
    up = g & (r | st | m[0]);
    mr = {1'b0, m} + {24'd0, up};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = QNAN;
    end else if (a_inf) begin
      y = {sa, 8'hff, 23'd0};
    end else if (b_inf) begin
      y = {sb, 8'hff, 23'd0};
    end else if (s == 28'd0) begin
      y = (a_zero && b_zero) ? {sa & sb, 31'd0} : 32'd0;
    end else if (e >= 10'sd255) begin
      y = {sx, 8'hff, 23'd0};
    end else if (e <= 10'sd0) begin
      y = {sx, 31'd0};            // flush to zero
    end else begin
      y = {sx, e[7:0], mr[22:0]};
    end
  end

endmodule
