// Testbench of the STA FIFO and its tile filler.
// A DRAM model with a fixed latency (in-order responses, request port ready
// at random) holds random words. Several tiles of random base and length (up
// to four times the FIFO depth, so the filler must wait for free space) are
// loaded; the consumer pops at random. Every popped element must equal the
// DRAM word at base+i, in order, exactly `count` of them, and the filler must
// report not busy at the end. The assertion inside the FIFO catches an
// overflow.
module tb_sta_fifo;
  import flexagon_pkg::*;

  localparam int LAT = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, dram_req_valid, dram_req_ready, dram_resp_valid, head_valid, pop;
  logic [31:0] base = '0, count = '0, dram_req_addr, dram_resp_data;
  elem_t head;

  sta_fifo dut (.*);

  logic [31:0] mem [4096];
  logic        pv [LAT];
  logic [31:0] pa [LAT];
  assign dram_resp_valid = pv[LAT-1];
  assign dram_resp_data  = mem[pa[LAT-1][11:0]];
  always_ff @(posedge clk) begin
    pv[0] <= dram_req_valid && dram_req_ready;
    pa[0] <= dram_req_addr;
    for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pa[i] <= pa[i-1]; end
  end
  always @(negedge clk) dram_req_ready <= ($urandom_range(3) != 0);

  int checks = 0, failures = 0;
  int n_pop;
  logic pop_en;
  assign pop = head_valid && pop_en;
  always @(negedge clk) pop_en <= ($urandom_range(2) != 0);
  always_ff @(posedge clk) if (pop) begin
    checks++;
    if (head != word_to_elem(mem[(base + n_pop) % 4096]) || n_pop >= count) begin
      failures++;
      $display("pop %0d: %p expected %p", n_pop, head, word_to_elem(mem[(base + n_pop) % 4096]));
    end
    n_pop <= n_pop + 1;
  end

  initial begin
    for (int i = 0; i < 4096; i++) mem[i] = $urandom;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pa[i] = '0; end
    n_pop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 12; t++) begin
      int w;
      @(negedge clk);
      base  = $urandom_range(3000);
      count = (t == 0) ? 1 : $urandom_range(256);
      n_pop = 0;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      w = 0;
      while (n_pop < count && w < 20000) begin @(negedge clk); w++; end
      repeat (20) @(negedge clk);
      checks++;
      if (n_pop != count || busy || head_valid) begin
        failures++;
        $display("tile %0d: %0d of %0d popped, busy %0d", t, n_pop, count, busy);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
