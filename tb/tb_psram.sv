// Testbench of the PSRAM.
// Reduced size: 4 sets, 4 blocks of 8 words. Phase 1 writes, interleaved at
// random, partial fibers (row,k) of random length, some longer than a block
// so that they spill into further blocks, never more blocks per set than
// exist. Phase 2 consumes the fibers in a random order and interleaving:
// each consume must return the fiber's next element (found=1) one cycle
// after the request, and one more consume must return found=0. After all
// fibers are consumed every block must be free again, which phase 3 checks by
// filling a set completely; one write more must raise `overflow`.
module tb_psram;
  import flexagon_pkg::*;

  localparam int ROWS = 4, BLOCKS = 4, BE = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic pw_valid = 1'b0, pw_ready, overflow, cs_valid = 1'b0, cs_rvalid, cs_found;
  logic [15:0] pw_row = '0, pw_k = '0, cs_row = '0, cs_k = '0;
  elem_t pw_elem = '0, cs_elem;

  psram #(.ROWS(ROWS), .BLOCKS(BLOCKS), .BLOCK_ELEMS(BE)) dut (.*);

  int checks = 0, failures = 0, n_spill = 0;

  // fibers: f -> (row, k, length)
  localparam int NF = 8;
  int f_row[NF], f_k[NF], f_len[NF], f_wr[NF], f_rd[NF];
  elem_t f_data[NF][64];

  task automatic write(input int f);
    @(negedge clk);
    pw_valid = 1'b1; pw_row = 16'(f_row[f]); pw_k = 16'(f_k[f]); pw_elem = f_data[f][f_wr[f]];
    while (!pw_ready) @(negedge clk);
    if (dut.t_hit && !dut.tail_room) n_spill++;
    @(negedge clk);
    pw_valid = 1'b0;
    checks++;
    if (overflow) begin failures++; $display("unexpected overflow"); end
    f_wr[f]++;
  endtask

  task automatic consume(input int f, input bit expect_found);
    @(negedge clk);
    cs_valid = 1'b1; cs_row = 16'(f_row[f]); cs_k = 16'(f_k[f]);
    @(negedge clk);
    cs_valid = 1'b0;
    checks++;
    if (!cs_rvalid || cs_found != expect_found
        || (expect_found && cs_elem != f_data[f][f_rd[f]])) begin
      failures++;
      $display("consume fiber %0d elem %0d: rvalid %0d found %0d %p expected %p", f, f_rd[f], cs_rvalid, cs_found,
               cs_elem, f_data[f][f_rd[f]]);
    end
    if (expect_found) f_rd[f]++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 20; rep++) begin
      int left, used_blocks[ROWS];
      for (int s = 0; s < ROWS; s++) used_blocks[s] = 0;
      // fibers 2i and 2i+1 share row (i % 2) * ROWS + i / 2 ... keep the per-set block budget
      for (int f = 0; f < NF; f++) begin
        int need;
        f_row[f] = (f % ROWS) + ROWS * $urandom_range(3);
        f_k[f] = f;
        f_len[f] = $urandom_range(20) + 1;
        need = (f_len[f] + BE - 1) / BE;
        if (used_blocks[f % ROWS] + need > BLOCKS) begin f_len[f] = BE; need = 1; end
        if (used_blocks[f % ROWS] + need > BLOCKS) begin f_len[f] = 0; need = 0; end
        used_blocks[f % ROWS] += need;
        f_wr[f] = 0; f_rd[f] = 0;
        for (int j = 0; j < f_len[f]; j++) f_data[f][j] = '{eof: 1'b0, coord: 16'(j * 3 + f), val: 16'($urandom)};
      end
      left = 0;
      for (int f = 0; f < NF; f++) left += f_len[f];
      while (left > 0) begin
        int f;
        f = $urandom_range(NF-1);
        if (f_wr[f] < f_len[f]) begin write(f); left--; end
      end
      for (int f = 0; f < NF; f++) left += f_len[f] + 1;
      while (left > 0) begin
        int f;
        f = $urandom_range(NF-1);
        if (f_rd[f] < f_len[f]) begin consume(f, 1'b1); left--; end
        else if (f_rd[f] == f_len[f]) begin consume(f, 1'b0); f_rd[f]++; left--; end
      end
    end
    // fill set 1 completely, then one more fiber must overflow
    for (int b = 0; b < BLOCKS; b++) begin
      f_row[0] = 1; f_k[0] = 100 + b; f_wr[0] = 0;
      for (int j = 0; j < BE; j++) write(0);
    end
    @(negedge clk);
    pw_valid = 1'b1; pw_row = 16'd5; pw_k = 16'd7; pw_elem = '0;
    @(negedge clk);
    pw_valid = 1'b0;
    checks++;
    if (!overflow) begin failures++; $display("no overflow on a full set"); end
    checks++;
    if (n_spill == 0) begin failures++; $display("no fiber spilled into a second block"); end
    $display("spills: %0d", n_spill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
