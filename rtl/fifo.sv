// fifo: small synchronous FIFO used for the command queues.
// Valid/ready on both sides; push when in_valid && in_ready, pop when
// out_valid && out_ready.  DEPTH entries, data available the cycle after it
// was pushed.  'count' gives the number of stored entries.
module fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] rp, wp;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (in_valid && in_ready) begin
        mem[wp] <= in_data;
        wp <= inc(wp);
      end
      if (out_valid && out_ready) rp <= inc(rp);
      count <= count + $bits(count)'(in_valid && in_ready) - $bits(count)'(out_valid && out_ready);
    end
  end
endmodule
