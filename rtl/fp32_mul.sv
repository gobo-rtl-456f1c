// fp32_mul: IEEE-754 single-precision multiplier, one combinational stage.
//
// This is the single FP32 multiplier of a GOBO tile's shared processing
// unit. It multiplies a per-index activation sum by its centroid (phase 2)
// or a bypassed activation by an outlier weight (phase 1). The paper names
// the unit and gives its area only; the algorithm is the textbook one and
// is this design's choice: a 24x24-bit significand product, a one-bit
// normalisation, round to nearest with ties to even. Subnormal inputs are
// read as zero and subnormal results are flushed to a signed zero. Overflow
// gives infinity; NaN inputs and 0 x inf give the quiet NaN 32'h7fc00000.
// Interface: a, b in, y = a * b out, no clock; valid in the same cycle.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  always_comb begin
    logic        s;
    logic [7:0]  ea, eb;
    logic        a_zero, b_zero, a_nan, b_nan, a_inf, b_inf;
    logic [47:0] p;
    logic signed [10:0] e;
    logic [23:0] m;
    logic        g, st, up;
    logic [24:0] mr;

    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_nan  = (ea == 8'hff) && (a[22:0] != 23'd0);
    b_nan  = (eb == 8'hff) && (b[22:0] != 23'd0);
    a_inf  = (ea == 8'hff) && (a[22:0] == 23'd0);
    b_inf  = (eb == 8'hff) && (b[22:0] == 23'd0);

    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = (p[22:0] != 23'd0);
      e  = e + 11'sd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = (p[21:0] != 22'd0);
    end
    up = g & (st | m[0]);
    mr = {1'b0, m} + {24'd0, up};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = QNAN;
    end else if (a_inf || b_inf) begin
      y = {s, 8'hff, 23'd0};
    end else if (a_zero || b_zero) begin
      y = {s, 31'd0};
    end else if (e >= 11'sd255) begin
      y = {s, 8'hff, 23'd0};
    end else if (e <= 11'sd0) begin
      y = {s, 31'd0};             // flush to zero
    end else begin
      y = {s, e[7:0], mr[22:0]};
    end
  end

endmodule
