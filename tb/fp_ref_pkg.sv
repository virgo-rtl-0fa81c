// fp_ref_pkg: reference floating-point conversions for the testbenches.
// Values are converted through the simulator's double-precision reals; the
// rounding to FP32 (round-to-nearest-even, flush-to-zero below the normal
// range) is written out here, independently of the RTL adders.
package fp_ref_pkg;
  function automatic real fp16_to_real(input logic [15:0] h);
    real m;
    if (h[14:10] == 0) begin
      // subnormal: h[9:0] * 2^-24
      m = real'(h[9:0]) / 16777216.0;
      return h[15] ? -m : m;
    end
    return $bitstoreal({h[15], 11'(int'(h[14:10]) - 15 + 1023), h[9:0], 42'd0});
  endfunction

  function automatic real fp32_to_real(input logic [31:0] f);
    if (f[30:23] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0] d; logic [52:0] m; int e; logic [23:0] mr; logic g, st;
    d = $realtobits(r);
    if (d[62:52] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023;
    m = {1'b1, d[51:0]};
    mr = m[52:29];
    g = m[28];
    st = (m[27:0] != 0);
    if (g && (st || mr[0])) begin
      mr = mr + 1;
      if (mr == 0) begin mr = 24'h800000; e = e + 1; end
    end
    if (e + 127 <= 0) return {d[63], 31'd0};
    if (e + 127 >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e + 127), mr[22:0]};
  endfunction

  // random FP16 value with an exponent in a moderate range
  function automatic logic [15:0] rand_fp16();
    logic [15:0] h;
    h = 16'($urandom);
    h[14:10] = 5'(8 + ($urandom % 14));
    return h;
  endfunction

  function automatic logic [15:0] real_to_fp16_int(input int v);
    // small integers |v| < 2048 are exact in FP16
    logic [15:0] h; int a, e;
    if (v == 0) return 16'd0;
    a = (v < 0) ? -v : v;
    e = 0;
    while ((a >> (e + 1)) != 0) e++;
    h[15] = (v < 0);
    h[14:10] = 5'(e + 15);
    h[9:0] = 10'((a << (10 - e)) & 32'h3FF);
    return h;
  endfunction
endpackage
