// fp32_add: combinational IEEE-754 single-precision adder.
//
// Adds two FP32 numbers with round-to-nearest-even.  The smaller operand is
// aligned with guard, round and sticky bits, the sum or difference is
// normalised with a leading-zero count and rounded once.  Subnormal inputs are
// read as zero and results below the normal range are flushed to zero;
// infinities and NaNs propagate (inf - inf gives the canonical quiet NaN).
// Used by every systolic-array PE (through fp_mac) and by the accumulator
// memory's accumulate path.  The paper builds its MACs from existing
// floating-point units; the flush-to-zero policy is this design's choice.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sx, sy_;
  logic [7:0]  ea, eb, ex, ey;
  logic [23:0] ma, mb, mx, my;
  logic [26:0] mxe, mye, mys;
  logic [27:0] sum;
  logic [26:0] nrm;
  logic [9:0]  e_res;
  logic [4:0]  lz;
  logic [8:0]  d;
  logic        found, sticky, rnd_up, a_nan, b_nan, a_inf, b_inf;
  logic [24:0] mr;

  always_comb begin
    sa = a[31]; ea = a[30:23]; ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    a_nan = (ea == 8'hFF) && (a[22:0] != 23'd0);
    b_nan = (eb == 8'hFF) && (b[22:0] != 23'd0);
    a_inf = (ea == 8'hFF) && (a[22:0] == 23'd0);
    b_inf = (eb == 8'hFF) && (b[22:0] == 23'd0);
    // order by magnitude: x is the larger
    if ({ea, ma} >= {eb, mb}) begin
      sx = sa; ex = ea; mx = ma; sy_ = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy_ = sa; ey = ea; my = ma;
    end
    d   = {1'b0, ex} - {1'b0, ey};
    mxe = {mx, 3'b000};
    mye = {my, 3'b000};
    // align with sticky
    if (d >= 9'd27) begin
      mys    = 27'd0;
      sticky = (my != 24'd0);
    end else begin
      mys    = mye >> d;
      sticky = ((mye & ((27'd1 << d) - 27'd1)) != 27'd0);
    end
    mys[0] = mys[0] | sticky;
    lz    = 5'd0;
    found = 1'b0;
    e_res = {2'b00, ex};
    nrm   = 27'd0;
    if (sx == sy_) begin
      sum = {1'b0, mxe} + {1'b0, mys};
      if (sum[27]) begin
        nrm   = sum[27:1] | {26'd0, sum[0]};
        e_res = e_res + 10'd1;
      end else begin
        nrm = sum[26:0];
      end
    end else begin
      sum = {1'b0, mxe} - {1'b0, mys};
      found = 1'b0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i] && !found) begin
          lz    = 5'(26 - i);
          found = 1'b1;
        end
      end
      nrm   = sum[26:0] << lz;
      e_res = e_res - {5'd0, lz};
    end
    // round to nearest even on guard / round / sticky
    rnd_up = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
    mr     = {1'b0, nrm[26:3]} + {24'd0, rnd_up};
    if (mr[24]) begin
      mr    = mr >> 1;
      e_res = e_res + 10'd1;
    end
    // pack
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = 32'h7FC0_0000;
    end else if (a_inf || b_inf) begin
      y = a_inf ? {sa, 8'hFF, 23'd0} : {sb, 8'hFF, 23'd0};
    end else if (mx == 24'd0) begin
      y = {sa & sb, 31'd0};                       // both zero
    end else if (sum == 28'd0) begin
      y = 32'd0;                                  // exact cancellation
    end else if ($signed(e_res) <= 0 || mr[23] == 1'b0) begin
      y = {sx, 31'd0};                            // underflow: flush
    end else if (e_res >= 10'd255) begin
      y = {sx, 8'hFF, 23'd0};                     // overflow
    end else begin
      y = {sx, e_res[7:0], mr[22:0]};
    end
  end
endmodule
