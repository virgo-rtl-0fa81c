// fp_mac: fused FP16 x FP16 + FP32 multiply-add, the arithmetic of one PE.
//
// The product of two FP16 numbers has at most 22 significant bits and an
// exponent well inside the FP32 range, so it is formed exactly as an FP32
// value (subnormal FP16 inputs included) and then added to the FP32 addend
// with a single round-to-nearest-even step in fp32_add.  The result is thus a
// true fused multiply-add.  Purely combinational; the PE registers the result,
// which gives the one-operation-per-cycle, fully pipelined MAC the paper
// describes.  Infinite or NaN FP16 inputs give infinite or NaN products.
// Lint notes: the top bits of the product exponent 'ep' are left unused on
// purpose (the product exponent of two FP16 values always fits in 8 bits
// after biasing); the sign bit of the unpacked operand is handled
// separately from its magnitude.
module fp_mac (
  input  logic [15:0] a,
  input  logic [15:0] b,
  input  logic [31:0] c,
  output logic [31:0] y
);
  logic [31:0] prod;

  // unpack an FP16 value into its significand and unbiased exponent
  function automatic void unpack16(input logic [15:0] h, output logic [10:0] m,
                                   output logic signed [7:0] e);
    if (h[14:10] == 5'd0) begin
      m = {1'b0, h[9:0]};
      e = -8'sd14;
    end else begin
      m = {1'b1, h[9:0]};
      e = 8'($signed({3'b000, h[14:10]}) - 8'sd15);
    end
  endfunction

  always_comb begin
    logic [10:0] ma, mb;
    logic signed [7:0] ea, eb;
    logic [21:0] p;
    logic signed [9:0] ep;
    logic [4:0] lead;
    logic [22:0] frac;
    logic s;
    unpack16(a, ma, ea);
    unpack16(b, mb, eb);
    s    = a[15] ^ b[15];
    p    = ma * mb;                       // value = p * 2^(ea+eb-20)
    lead = 5'd0;
    for (int i = 0; i < 22; i++) if (p[i]) lead = 5'(i);
    ep   = 10'(ea) + 10'(eb) - 10'sd20 + 10'($signed({5'd0, lead})) + 10'sd127;
    frac = 23'({1'b0, p} << (23 - lead));  // bits below the leading one
    if (a[14:10] == 5'h1F || b[14:10] == 5'h1F) begin
      // inf or NaN operand; inf * 0 is NaN
      if ((a[14:10] == 5'h1F && a[9:0] != 10'd0) || (b[14:10] == 5'h1F && b[9:0] != 10'd0) ||
          (a[14:0] == 15'd0) || (b[14:0] == 15'd0))
        prod = 32'h7FC0_0000;
      else
        prod = {s, 8'hFF, 23'd0};
    end else if (p == 22'd0) begin
      prod = {s, 31'd0};
    end else begin
      prod = {s, ep[7:0], frac};
    end
  end

  fp32_add u_add (.a(prod), .b(c), .y(y));
endmodule
