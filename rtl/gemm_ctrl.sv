// gemm_ctrl: the matrix unit's coarse-grain FSM.  One command computes
// C[M x N] (+)= A[M x K] * B[K x N] with M, N, K multiples of DIM, up to the
// 128 x 64 x 128 tile of one operation, without further help from the cores.
//
// Operands live in shared memory in row-major order with a byte row stride.
// A shared-memory line is 4*DIM bytes, i.e. 2*DIM FP16 values, so one line
// read yields a DIM-wide slice of a row and the FSM keeps the half it needs.
// The loop order is n-block (outer), k-block (inner).  For each (nb, kb):
//   PRELOAD  DIM reads of B rows kb*DIM+DIM-1 down to kb*DIM (columns of
//            block nb); each response is shifted into the array's shadow
//            weights.
//   STREAM   M reads of A rows 0..M-1 (columns of block kb); each response
//            enters the array, the first one with the swap flag.  The row's
//            tag is the accumulator row c_row + m*(N/DIM) + nb and an
//            overwrite bit for the first k block of a non-accumulating command.
// The next PRELOAD may start only when the swap row has left the array (the
// LAT cycles after it entered), so weights are never shifted under it.  The
// command completes ('done' pulse) once every streamed row has been retired
// by the accumulator memory.
//
// Shared-memory read port: valid/ready request; the response comes exactly
// one cycle after acceptance (the matrix unit has top priority, so in practice
// every request is accepted).  The paper states that a hardware FSM iterates
// over i, j and k, fetches operands from shared memory, runs the array and
// writes results to the accumulator memory; the loop order, data layout and
// timing rules are this design's.
module gemm_ctrl
  import virgo_pkg::*;
#(
  parameter int unsigned LAT = 2 * DIM - 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  cmd_valid,
  input  mu_cmd_t               cmd,
  output logic                  cmd_ready,   // pulses with 'done': command popped
  output logic                  busy,
  output logic                  done,
  // shared-memory line reads
  output logic                  rd_valid,
  output logic [31:0]           rd_addr,
  input  logic                  rd_ready,
  input  logic                  rsp_valid,
  input  logic [LINE_BITS-1:0]  rsp_data,
  // systolic array
  output logic                  sa_valid,
  output logic                  sa_swap,
  output logic [DIM-1:0][15:0]  sa_a,
  output logic [16:0]           sa_tag,
  output logic                  sa_wshift,
  output logic [DIM-1:0][15:0]  sa_wrow,
  // accumulator retire pulses
  input  logic                  retire
);
  typedef enum logic [1:0] {S_IDLE, S_PRELOAD, S_STREAM, S_DRAIN} state_e;
  state_e state;

  logic [7:0]  nb, kb, nbs, kbs;     // block counters and block counts
  logic [7:0]  cnt;                  // row within phase
  logic [15:0] since_swap;
  logic [15:0] outstanding;
  logic        swapped_once;

  // request metadata, registered to line up with the 1-cycle response
  logic        m_valid, m_pre, m_half, m_swap;
  logic [16:0] m_tag;

  logic [31:0] a_line, b_line;
  logic        issue;

  assign nbs = cmd.n / 8'(DIM);
  assign kbs = cmd.k / 8'(DIM);
  assign busy = (state != S_IDLE);

  always_comb begin
    // B row k = kb*DIM + (DIM-1-cnt), columns nb*DIM.. : line holds 2 blocks
    b_line = cmd.b_addr + (32'(kb) * 32'(DIM) + 32'(DIM - 1) - 32'(cnt)) * 32'(cmd.b_stride)
           + 32'(nb >> 1) * 32'(LINE_BYTES);
    a_line = cmd.a_addr + 32'(cnt) * 32'(cmd.a_stride) + 32'(kb >> 1) * 32'(LINE_BYTES);
    rd_valid = 1'b0;
    rd_addr  = '0;
    if (state == S_PRELOAD && (!swapped_once || since_swap >= 16'(LAT))) begin
      rd_valid = 1'b1; rd_addr = b_line;
    end else if (state == S_STREAM) begin
      rd_valid = 1'b1; rd_addr = a_line;
    end
  end
  assign issue = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; nb <= '0; kb <= '0; cnt <= '0; since_swap <= '0;
      swapped_once <= 1'b0; done <= 1'b0;
      m_valid <= 1'b0; m_pre <= 1'b0; m_half <= 1'b0; m_swap <= 1'b0; m_tag <= '0;
    end else begin
      done    <= 1'b0;
      m_valid <= issue;
      m_pre   <= (state == S_PRELOAD);
      m_half  <= (state == S_PRELOAD) ? nb[0] : kb[0];
      m_swap  <= (state == S_STREAM) && (cnt == 8'd0);
      m_tag   <= {(kb == 8'd0) && !cmd.accumulate,
                  cmd.c_row + 16'(cnt) * 16'(nbs) + 16'(nb)};
      if (since_swap != 16'hFFFF) since_swap <= since_swap + 1'b1;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          state <= S_PRELOAD; nb <= '0; kb <= '0; cnt <= '0; swapped_once <= 1'b0;
        end
        S_PRELOAD: if (issue) begin
          if (cnt == 8'(DIM - 1)) begin state <= S_STREAM; cnt <= '0; end
          else cnt <= cnt + 1'b1;
        end
        S_STREAM: if (issue) begin
          if (cnt == 8'd0) begin since_swap <= 16'd1; swapped_once <= 1'b1; end
          if (cnt == cmd.m - 8'd1) begin
            cnt <= '0;
            if (kb == kbs - 8'd1) begin
              kb <= '0;
              if (nb == nbs - 8'd1) state <= S_DRAIN;
              else begin nb <= nb + 1'b1; state <= S_PRELOAD; end
            end else begin
              kb <= kb + 1'b1; state <= S_PRELOAD;
            end
          end else cnt <= cnt + 1'b1;
        end
        S_DRAIN: if (outstanding == 16'd0 && !m_valid) begin
          state <= S_IDLE; done <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // rows streamed but not yet written into the accumulator memory
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) outstanding <= '0;
    else outstanding <= outstanding + ((issue && state == S_STREAM) ? 16'd1 : 16'd0)
                                    - (retire ? 16'd1 : 16'd0);
  end

  assign cmd_ready = (state == S_DRAIN) && (outstanding == 16'd0) && !m_valid;

  // response -> array
  always_comb begin
    logic [DIM*16-1:0] half;
    half      = m_half ? rsp_data[LINE_BITS-1 -: DIM*16] : rsp_data[DIM*16-1:0];
    sa_valid  = m_valid && !m_pre && rsp_valid;
    sa_swap   = m_swap;
    sa_a      = half;
    sa_tag    = m_tag;
    sa_wshift = m_valid && m_pre && rsp_valid;
    sa_wrow   = half;
  end

  // the response arrives exactly one cycle after the request was accepted
  assert property (@(posedge clk) disable iff (!rst_n) rsp_valid == m_valid);
endmodule
