// int_to_f32: signed 32-bit integer to IEEE-754 single precision, rounded to
// nearest-even.
//
// The integer-to-F32 box of the dequantisation step. Fig. 3 prints this box
// as "I16=>F32" while it draws a 24-bit (I24) input; this design converts the
// full integer, so any value below 2^24 in magnitude (all Q8_0 and Q3_K block
// sums) is converted exactly. Combinational.
module int_to_f32 (
  input  logic signed [31:0] i,
  output logic        [31:0] f
);
  always_comb begin
    logic        s;
    logic [31:0] mag, norm;
    logic [24:0] m;
    logic [7:0]  e;
    logic        g, st;
    int          p;
    s    = i[31];
    mag  = s ? 32'(-i) : 32'(i);
    p    = 0;
    for (int k = 0; k < 32; k++) if (mag[k]) p = k;
    norm = mag << (31 - p);
    g    = norm[7];
    st   = |norm[6:0];
    m    = {1'b0, norm[31:8]};
    e    = 8'(127 + p);
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 8'd1;
    end
    if (mag == 32'd0) f = 32'd0;
    else              f = {s, e, m[22:0]};
  end
endmodule
