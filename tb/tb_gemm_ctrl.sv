// tb_gemm_ctrl: the matrix unit's sequencer on its own.  A behavioural
// shared-memory port (random stalls, data that encodes its own address) and a
// delay line standing in for the array and accumulator memory (retire after a
// fixed latency) surround the FSM.  For random commands it checks, request by
// request, the shared-memory address sequence (16 B rows per block, bottom row
// first, then the M rows of A), the half-line selected for each response, the
// swap flag on the first row of every block, the accumulator-row tag and the
// overwrite bit, that no preload for a new block starts earlier than LAT
// cycles after the previous swap row, that the command finishes only after
// every row retired, and one 'done' per command.
module tb_gemm_ctrl;
  import virgo_pkg::*;
  localparam int LAT = 2 * DIM - 1;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done;
  mu_cmd_t cmd;
  logic rd_valid, rd_ready, rsp_valid, retire;
  logic [31:0] rd_addr;
  logic [LINE_BITS-1:0] rsp_data;
  logic sa_valid, sa_swap, sa_wshift;
  logic [DIM-1:0][15:0] sa_a, sa_wrow;
  logic [16:0] sa_tag;

  gemm_ctrl dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, dones = 0, retires = 0, gated = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic pre; logic [31:0] addr; logic half; logic swap; logic [16:0] tag; } exp_t;
  exp_t expq [$];
  exp_t cur;
  logic cur_v = 0;
  int last_swap = -1000, first_of_cmd = 0;
  int pipe [$];

  function automatic logic [15:0] word_of(logic [31:0] a, int j);
    return {a[6 +: 11], 5'(j)};
  endfunction

  always @(posedge clk) begin
    cycle++;
    // memory: random ready, data one cycle after acceptance
    rsp_valid <= rd_valid && rd_ready;
    for (int j = 0; j < 2 * DIM; j++) rsp_data[j*16 +: 16] <= word_of(rd_addr, j);
    rd_ready <= ($urandom % 5) != 0;
    // check the previous cycle's response as it reaches the array
    if (cur_v) begin
      checks++;
      if (cur.pre) begin
        if (!sa_wshift || sa_valid || sa_wrow[3] !== word_of(cur.addr, int'(cur.half) * DIM + 3)) begin
          failures++; if (failures < 10) $display("FAIL preload output at %h", cur.addr);
        end
      end else if (!sa_valid || sa_wshift || sa_swap !== cur.swap || sa_tag !== cur.tag
                   || sa_a[DIM-1] !== word_of(cur.addr, int'(cur.half) * DIM + DIM - 1)) begin
        failures++; if (failures < 10) $display("FAIL stream output at %h tag %h exp %h swap %0d", cur.addr, sa_tag, cur.tag, sa_swap);
      end
    end else if (rst_n && (sa_valid || sa_wshift)) begin
      failures++; $display("FAIL array driven without a response");
    end
    cur_v = 0;
    if (rst_n && rd_valid && rd_ready) begin
      checks++;
      if (expq.size() == 0 || rd_addr !== expq[0].addr) begin
        failures++; if (failures < 10) $display("FAIL address %h exp %h", rd_addr, expq.size() ? expq[0].addr : 0);
        expq.delete();
      end else begin
        cur = expq.pop_front(); cur_v = 1;
        if (cur.pre && !first_of_cmd) begin
          checks++; gated++;
          if (cycle - last_swap < LAT) begin failures++; $display("FAIL preload %0d cycles after swap", cycle - last_swap); end
        end
        if (cur.pre) first_of_cmd = 0;
        if (cur.swap) last_swap = cycle;
      end
    end
    // array + accumulator stand-in
    retire <= 1'b0;
    for (int i = 0; i < pipe.size(); i++) pipe[i] = pipe[i] - 1;
    if (pipe.size() > 0 && pipe[0] <= 0) begin void'(pipe.pop_front()); retire <= 1'b1; retires++; end
    if (rst_n && sa_valid) pipe.push_back(LAT + 2);
    if (rst_n && done) dones++;
  end

  initial begin
    cmd_valid = 0; cmd = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int M, N, K, astr, bstr, r0, ret0;
      logic acc;
      mu_cmd_t c;
      M = 16 * (1 + int'($urandom % 8)); N = 16 * (1 + int'($urandom % 4)); K = 16 * (1 + int'($urandom % 8));
      if (t % 7 == 0) M = 16 * (1 + int'($urandom % 2));       // short blocks: preload gate active
      astr = 64 * (1 + int'($urandom % 4)) + ((K * 2 + 63) / 64) * 64;
      bstr = 64 * int'($urandom % 2) + ((N * 2 + 63) / 64) * 64;
      acc = $urandom % 2 == 1;
      r0 = int'($urandom % 64);
      c = '{a_addr: 32'(($urandom % 256) * 64), b_addr: 32'h10000 + 32'(($urandom % 64) * 64), c_row: 16'(r0),
            a_stride: 16'(astr), b_stride: 16'(bstr), m: 8'(M), n: 8'(N), k: 8'(K), accumulate: acc};
      for (int nb = 0; nb < N / DIM; nb++)
        for (int kb = 0; kb < K / DIM; kb++) begin
          for (int i = 0; i < DIM; i++)
            expq.push_back('{pre: 1'b1, addr: c.b_addr + 32'((kb * DIM + DIM - 1 - i) * bstr + (nb / 2) * 64),
                             half: 1'(nb % 2), swap: 1'b0, tag: '0});
          for (int m = 0; m < M; m++)
            expq.push_back('{pre: 1'b0, addr: c.a_addr + 32'(m * astr + (kb / 2) * 64), half: 1'(kb % 2),
                             swap: m == 0, tag: {kb == 0 && !acc, 16'(r0 + m * (N / DIM) + nb)}});
        end
      first_of_cmd = 1;
      ret0 = retires;
      @(negedge clk); cmd_valid = 1; cmd = c;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      checks++;
      if (retires - ret0 != M * (N / DIM) * (K / DIM) || expq.size() != 0) begin
        failures++; $display("FAIL command ended with %0d retires, %0d requests missing", retires - ret0, expq.size());
      end
      @(negedge clk); cmd_valid = 0;
      repeat ($urandom % 4) @(negedge clk);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (dones != 30 || gated == 0) begin failures++; $display("FAIL dones %0d gated preloads %0d", dones, gated); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
