// fp32_mul: IEEE-754 single-precision multiplier, round to nearest-even.
//
// One of the two F32 multipliers of the dequantisation step (Figs. 3, 4).
// Subnormal inputs are read as zero and results below the normal range are
// flushed to zero (this design's choice: the scales involved are normal
// numbers). Overflow gives infinity; NaN inputs and inf x 0 give the quiet
// NaN 0x7fc00000. Combinational.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  always_comb begin
    logic        s, g, st;
    logic [7:0]  ea, eb;
    logic [47:0] p, n;
    logic [24:0] m;
    logic signed [10:0] e;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    p  = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e  = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      n = p;
      e = e + 11'sd1;
    end else begin
      n = p << 1;
    end
    m  = {1'b0, n[47:24]};
    g  = n[23];
    st = |n[22:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 11'sd1;
    end
    if ((ea == 8'hff && a[22:0] != 0) || (eb == 8'hff && b[22:0] != 0))
      y = 32'h7fc0_0000;
    else if (ea == 8'hff || eb == 8'hff)
      y = (ea == 8'd0 || eb == 8'd0) ? 32'h7fc0_0000 : {s, 8'hff, 23'd0};
    else if (ea == 8'd0 || eb == 8'd0)
      y = {s, 31'd0};
    else if (e >= 11'sd255)
      y = {s, 8'hff, 23'd0};
    else if (e <= 11'sd0)
      y = {s, 31'd0};
    else
      y = {s, e[7:0], m[22:0]};
  end
endmodule
