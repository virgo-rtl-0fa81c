// tb_synchronizer: cores arrive at barriers in random order and at random
// times, on several barrier ids at once; a release must come exactly one
// cycle after the last core of that id arrived, never earlier, and the
// barrier must then be reusable.
module tb_synchronizer;
  import virgo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [NUM_CORES-1:0] bar_valid;
  logic [NUM_CORES-1:0][$clog2(NUM_BARRIERS)-1:0] bar_id;
  logic [NUM_BARRIERS-1:0] release_o;
  int checks = 0, failures = 0, releases = 0;
  int arrived [NUM_BARRIERS];
  int expect_rel [NUM_BARRIERS];

  synchronizer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: count arrivals per id
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < NUM_BARRIERS; b++) begin
      checks++;
      if (release_o[b] != (expect_rel[b] == 1)) begin
        failures++; $display("FAIL barrier %0d release %0d expected %0d", b, release_o[b], expect_rel[b]);
      end
      if (release_o[b]) releases++;
      expect_rel[b] = 0;
    end
    for (int c = 0; c < NUM_CORES; c++) if (bar_valid[c]) begin arrived[bar_id[c]]++; end
    for (int b = 0; b < NUM_BARRIERS; b++)
      if (arrived[b] == NUM_CORES) begin arrived[b] = 0; expect_rel[b] = 1; end
  end

  initial begin
    bar_valid = '0; bar_id = '0;
    for (int b = 0; b < NUM_BARRIERS; b++) begin arrived[b] = 0; expect_rel[b] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 100; round++) begin
      // every core joins two barrier ids once each, all arrivals shuffled
      int ev[$];
      ev.delete();
      for (int c = 0; c < NUM_CORES; c++) begin
        ev.push_back(c * 2);
        ev.push_back(c * 2 + 1);
      end
      ev.shuffle();
      foreach (ev[i]) begin
        int c, b;
        c = ev[i] / 2;
        b = (round + ev[i] % 2) % NUM_BARRIERS;
        @(negedge clk);
        bar_valid = '0;
        bar_valid[c] = 1'b1; bar_id[c] = 2'(b);
        repeat ($urandom % 3) begin @(negedge clk); bar_valid = '0; end
      end
      @(negedge clk); bar_valid = '0;
      repeat (2) @(posedge clk);
    end
    repeat (4) @(posedge clk);
    checks++;
    if (releases != 200) begin failures++; $display("FAIL only %0d releases", releases); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
