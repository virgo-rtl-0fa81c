// mesh_pe: one processing element of the weight-stationary systolic array.
//
// Each PE holds an active weight and a shadow weight.  Operands (FP16) enter
// from the left and leave to the right one cycle later; partial sums (FP32)
// enter from the top, get a*w added with one fused multiply-add (fp_mac), and
// leave downwards registered, so the array performs one MAC per PE per cycle.
// New weights are shifted down each column into the shadow registers while
// the array still computes with the active ones.  The first operand of a new
// block carries a 'swap' flag: as it passes a PE, the shadow weight becomes
// the active one and is used for that operand.  This double buffering follows
// the preload/propagate scheme of the Gemmini array that the paper builds on;
// the paper itself names the PE array but not the PE's insides.
//
// Timing: a_out/valid_out/swap_out and psum_out are registered (1 cycle).
module mesh_pe (
  input  logic        clk,
  input  logic        rst_n,
  // operand path (left -> right)
  input  logic        valid_in,
  input  logic        swap_in,
  input  logic [15:0] a_in,
  output logic        valid_out,
  output logic        swap_out,
  output logic [15:0] a_out,
  // partial-sum path (top -> bottom)
  input  logic [31:0] psum_in,
  output logic [31:0] psum_out,
  // weight preload chain (top -> bottom)
  input  logic        w_shift,
  input  logic [15:0] w_in,
  output logic [15:0] w_out
);
  logic [15:0] w_act, w_shadow, w_use;
  logic [31:0] mac;

  assign w_use = swap_in ? w_shadow : w_act;
  assign w_out = w_shadow;

  fp_mac u_mac (.a(a_in), .b(w_use), .c(psum_in), .y(mac));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      swap_out  <= 1'b0;
      a_out     <= '0;
      psum_out  <= '0;
      w_act     <= '0;
      w_shadow  <= '0;
    end else begin
      valid_out <= valid_in;
      swap_out  <= valid_in & swap_in;
      a_out     <= a_in;
      if (valid_in) psum_out <= mac;
      if (valid_in && swap_in) w_act <= w_shadow;
      if (w_shift) w_shadow <= w_in;
    end
  end
endmodule
