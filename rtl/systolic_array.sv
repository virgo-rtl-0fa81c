// systolic_array: DIM x DIM weight-stationary systolic array (16x16 FP16 in
// the evaluated configuration) with input skew and output de-skew.
//
// PE(k,n) holds weight B[k][n].  One operand row a[0..DIM-1] (FP16) may enter
// per cycle: element k is delayed k cycles before entering array row k, flows
// right through the row, and the partial sums flow down the columns, so the
// bottom of column n produces sum_k a[k]*B[k][n] in FP32.  Column n's result
// is delayed DIM-1-n cycles so that a whole output row leaves together,
// LATENCY = 2*DIM-1 cycles after its operand row entered, together with the
// caller's tag.  Weights for the next block are shifted in from the top, one
// row per w_shift cycle (last row of the block first), into the PEs' shadow
// registers; in_swap on the first operand row of a block switches to them.
// The shadow chain may be shifted again once that row has left the array,
// i.e. LATENCY cycles after it entered.  The paper gives the array size and
// the systolic organisation; skew, tag and preload details are this design's.
module systolic_array #(
  parameter int unsigned DIM   = virgo_pkg::DIM,
  parameter int unsigned TAG_W = 17
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_swap,
  input  logic [DIM-1:0][15:0]  in_a,
  input  logic [TAG_W-1:0]      in_tag,
  input  logic                  w_shift,
  input  logic [DIM-1:0][15:0]  w_row,
  output logic                  out_valid,
  output logic [DIM-1:0][31:0]  out_row,
  output logic [TAG_W-1:0]      out_tag
);
  localparam int unsigned LATENCY = 2 * DIM - 1;

  // operand wires: a_h[k][n] is the input of PE(k,n); column DIM is the exit
  logic [15:0] a_h [DIM][DIM+1];
  logic        v_h [DIM][DIM+1];
  logic        s_h [DIM][DIM+1];
  logic [31:0] p_v [DIM+1][DIM];
  logic [15:0] w_v [DIM+1][DIM];

  // ---------------- input skew ----------------
  for (genvar k = 0; k < DIM; k++) begin : g_skew
    if (k == 0) begin : g_direct
      assign a_h[0][0] = in_a[0];
      assign v_h[0][0] = in_valid;
      assign s_h[0][0] = in_swap;
    end else begin : g_delay
      logic [15:0] a_d [k];
      logic        v_d [k];
      logic        s_d [k];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < int'(k); i++) begin
            a_d[i] <= '0; v_d[i] <= 1'b0; s_d[i] <= 1'b0;
          end
        end else begin
          a_d[0] <= in_a[k]; v_d[0] <= in_valid; s_d[0] <= in_swap;
          for (int i = 1; i < int'(k); i++) begin
            a_d[i] <= a_d[i-1]; v_d[i] <= v_d[i-1]; s_d[i] <= s_d[i-1];
          end
        end
      end
      assign a_h[k][0] = a_d[k-1];
      assign v_h[k][0] = v_d[k-1];
      assign s_h[k][0] = s_d[k-1];
    end
  end

  // ---------------- PE mesh ----------------
  for (genvar n = 0; n < DIM; n++) begin : g_top
    assign p_v[0][n] = 32'd0;          // +0.0
    assign w_v[0][n] = w_row[n];
  end

  for (genvar k = 0; k < DIM; k++) begin : g_row
    for (genvar n = 0; n < DIM; n++) begin : g_col
      mesh_pe u_pe (
        .clk, .rst_n,
        .valid_in (v_h[k][n]),   .swap_in (s_h[k][n]),   .a_in (a_h[k][n]),
        .valid_out(v_h[k][n+1]), .swap_out(s_h[k][n+1]), .a_out(a_h[k][n+1]),
        .psum_in  (p_v[k][n]),   .psum_out(p_v[k+1][n]),
        .w_shift  (w_shift),     .w_in    (w_v[k][n]),   .w_out(w_v[k+1][n])
      );
    end
  end

  // ---------------- output de-skew ----------------
  for (genvar n = 0; n < DIM; n++) begin : g_deskew
    localparam int unsigned D = DIM - 1 - n;
    if (D == 0) begin : g_direct
      assign out_row[n] = p_v[DIM][n];
    end else begin : g_delay
      logic [31:0] d [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < int'(D); i++) d[i] <= '0;
        end else begin
          d[0] <= p_v[DIM][n];
          for (int i = 1; i < int'(D); i++) d[i] <= d[i-1];
        end
      end
      assign out_row[n] = d[D-1];
    end
  end

  // valid and tag travel in a plain delay line of LATENCY stages
  logic             vd [LATENCY];
  logic [TAG_W-1:0] td [LATENCY];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LATENCY); i++) begin vd[i] <= 1'b0; td[i] <= '0; end
    end else begin
      vd[0] <= in_valid; td[0] <= in_tag;
      for (int i = 1; i < int'(LATENCY); i++) begin vd[i] <= vd[i-1]; td[i] <= td[i-1]; end
    end
  end
  assign out_valid = vd[LATENCY-1];
  assign out_tag   = td[LATENCY-1];

  // the exit column of the operand path and the bottom weight chain are unused
  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int k = 0; k < int'(DIM); k++) unused = unused ^ v_h[k][DIM] ^ s_h[k][DIM] ^ (^a_h[k][DIM]);
    for (int n = 0; n < int'(DIM); n++) unused = unused ^ (^w_v[DIM][n]);
  end
endmodule
