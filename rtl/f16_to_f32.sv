// f16_to_f32: IEEE-754 half precision to single precision conversion.
//
// The "F16=>F32" box of the dequantisation step (Figs. 3 and 4): the block
// scales of Q8_0/Q3_K data are stored as F16 and widened before the F32
// arithmetic. Every F16 value, subnormals included, is exactly representable
// in F32, so the conversion never rounds. Infinities and NaNs keep their
// class. Combinational. The figure names the conversion; the handling of
// special values is the usual IEEE one.
module f16_to_f32 (
  input  logic [15:0] h,
  output logic [31:0] f
);
  always_comb begin
    logic       s;
    logic [4:0] e;
    logic [9:0] m;
    int         p;
    s = h[15];
    e = h[14:10];
    m = h[9:0];
    p = 0;
    if (e == 5'd31) begin
      f = {s, 8'hff, m, 13'd0};
    end else if (e != 5'd0) begin
      f = {s, 8'(e) + 8'd112, m, 13'd0};
    end else if (m == 10'd0) begin
      f = {s, 31'd0};
    end else begin
      // subnormal: value = m * 2^-24, renormalise
      for (int i = 0; i < 10; i++) if (m[i]) p = i;
      f = {s, 8'(p + 103), 23'(({13'd0, m} << (23 - p)))};
    end
  end
endmodule
