// Testbench of the STR cache and its tile filler.
// Runs a reduced cache (2 KiB, 128-byte lines, 2 ways, so 8 sets) against a
// fixed-latency DRAM model holding random words. Random reads, mostly near
// the previous one, must return the DRAM word at base+offset. Every read that
// follows a read of the same line must hit and answer in the next cycle
// (1-cycle L1 latency); the number of misses must lie between the number of
// distinct lines touched and the number of reads. A flush with a new base
// must make the cache return the new matrix's words.
module tb_str_cache;
  import flexagon_pkg::*;

  localparam int LAT = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] base = 32'd0;
  logic flush = 1'b0, rd_valid = 1'b0, rd_ready, resp_valid, miss_pulse;
  logic [23:0] rd_off = '0;
  logic [31:0] resp_data;
  logic dram_req_valid, dram_req_ready, dram_resp_valid;
  logic [31:0] dram_req_addr, dram_resp_data;

  str_cache #(.SIZE_BYTES(2048), .WAYS(2)) dut (.*);

  logic [31:0] mem [16384];
  logic        pv [LAT];
  logic [31:0] pa [LAT];
  assign dram_req_ready  = 1'b1;
  assign dram_resp_valid = pv[LAT-1];
  assign dram_resp_data  = mem[pa[LAT-1][13:0]];
  always_ff @(posedge clk) begin
    pv[0] <= dram_req_valid && dram_req_ready;
    pa[0] <= dram_req_addr;
    for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pa[i] <= pa[i-1]; end
  end

  int checks = 0, failures = 0, n_miss = 0;
  always_ff @(posedge clk) if (miss_pulse) n_miss <= n_miss + 1;

  // one read; returns the latency in cycles
  task automatic read(input int off, output int lat);
    int l;
    @(negedge clk);
    rd_valid = 1'b1;
    rd_off = 24'(off);
    while (!rd_ready) @(negedge clk);
    @(negedge clk);
    rd_valid = 1'b0;
    l = 1;
    while (!resp_valid) begin @(negedge clk); l++; end
    checks++;
    if (resp_data != mem[(base + off) % 16384]) begin
      failures++;
      $display("off %0d: %h expected %h", off, resp_data, mem[(base + off) % 16384]);
    end
    lat = l;
  endtask

  initial begin
    int off, prev_line, lat, n_reads, n_hits_exp;
    bit lines [int];
    for (int i = 0; i < 16384; i++) mem[i] = $urandom;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pa[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    off = 0;
    prev_line = -1;
    n_reads = 0;
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(9) == 0) off = $urandom_range(4000);
      else off = (off + $urandom_range(5)) % 4000;
      read(off, lat);
      n_reads++;
      lines[off / 32] = 1'b1;
      if (off / 32 == prev_line) begin
        checks++;
        if (lat != 1) begin failures++; $display("repeat-line read took %0d cycles", lat); end
      end
      prev_line = off / 32;
    end
    checks++;
    if (n_miss < lines.num() || n_miss >= n_reads) begin
      failures++;
      $display("misses %0d lines %0d reads %0d", n_miss, lines.num(), n_reads);
    end
    // new streaming matrix
    @(negedge clk);
    base = 32'd5000;
    flush = 1'b1;
    @(negedge clk);
    flush = 1'b0;
    for (int i = 0; i < 200; i++) read($urandom_range(300), lat);
    $display("misses %0d, distinct lines %0d", n_miss, lines.num());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
