// smem_subbank: one word-wide shared-memory subbank, ROWS x 32 bits, with
// one read port (data one cycle after the request) and one write port, so a
// read and a write from different requesters proceed in the same cycle.
// Stands for an SRAM macro; written here as a plain array.
module smem_subbank #(
  parameter int unsigned ROWS = virgo_pkg::SB_ROWS
) (
  input  logic                    clk,
  input  logic                    rd_en,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  output logic [31:0]             rd_data,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [31:0]             wr_data
);
  logic [31:0] mem [ROWS];
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_row];
    if (wr_en) mem[wr_row] <= wr_data;
  end
endmodule
