// fp32_add: IEEE-754 single-precision adder, round to nearest-even.
//
// The F32 adder of the dequantisation step, which also closes the UPDATE
// accumulation loop (Figs. 3, 4). The smaller operand is aligned with guard,
// round and sticky bits, the significands are added or subtracted, the result
// is renormalised and rounded. Subnormal inputs are read as zero and results
// below the normal range flush to zero (this design's choice). inf - inf and
// NaN inputs give the quiet NaN 0x7fc00000. Combinational.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  always_comb begin
    logic [31:0] big, sml;
    logic        s, g, st, az, bz;
    logic [7:0]  d8;
    logic [26:0] mb, ms, sh;
    logic [27:0] sum;
    logic [24:0] m;
    logic signed [10:0] e;
    int          lz, d;
    az  = (a[30:23] == 8'd0);
    bz  = (b[30:23] == 8'd0);
    if (a[30:0] >= b[30:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    s   = big[31];
    d8  = big[30:23] - sml[30:23];
    d   = int'(d8);
    mb  = {1'b1, big[22:0], 3'b000};
    ms  = {(sml[30:23] != 8'd0), sml[22:0], 3'b000};
    if (d >= 27) begin
      sh = {26'd0, |ms};
    end else begin
      sh = ms >> d;
      // sticky: any bit shifted out
      if ((ms & ((27'd1 << d) - 27'd1)) != 27'd0) sh[0] = 1'b1;
    end
    e   = 11'(big[30:23]);
    lz  = 0;
    if (big[31] == sml[31]) sum = {1'b0, mb} + {1'b0, sh};
    else                    sum = {1'b0, mb} - {1'b0, sh};
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 11'sd1;
    end else begin
      for (int k = 0; k < 27; k++) if (sum[k]) lz = 26 - k;
      sum = sum << lz;
      e   = e - 11'(lz);
    end
    m  = {1'b0, sum[26:3]};
    g  = sum[2];
    st = sum[1] | sum[0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 11'sd1;
    end
    if ((a[30:23] == 8'hff && a[22:0] != 0) || (b[30:23] == 8'hff && b[22:0] != 0))
      y = 32'h7fc0_0000;
    else if (a[30:23] == 8'hff && b[30:23] == 8'hff)
      y = (a[31] == b[31]) ? a : 32'h7fc0_0000;
    else if (a[30:23] == 8'hff)
      y = a;
    else if (b[30:23] == 8'hff)
      y = b;
    else if (az && bz)
      y = {a[31] & b[31], 31'd0};
    else if (az)
      y = b;
    else if (bz)
      y = a;
    else if (sum[26:0] == 27'd0)
      y = 32'd0;
    else if (e >= 11'sd255)
      y = {s, 8'hff, 23'd0};
    else if (e <= 11'sd0)
      y = {s, 31'd0};
    else
      y = {s, e[7:0], m[22:0]};
  end
endmodule
