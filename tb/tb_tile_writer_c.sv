// Testbench of tile writer C.
// Streams random elements into the writer: final outputs of increasing rows
// (some zero, some negative), end-of-fiber tokens and partial sums, with the
// PSRAM and the DRAM write port ready at random and ReLU enabled. Checks:
//   * partial sums reach the PSRAM port unchanged, in order, with row and k;
//   * final outputs are written as {col,value} at c_data_base + j, j counting
//     the stored non-zeros, with ReLU applied and zeros dropped;
//   * when a row starts, p_C[row] = j is written at c_ptr_base + row;
//   * seen_elem / seen_eof count every accepted element and end token;
//   * a second start resets the element counter to 0.
module tb_tile_writer_c;
  import flexagon_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, relu_en = 1'b1;
  logic [31:0] c_data_base = 32'h1000, c_ptr_base = 32'h2000;
  logic in_valid, in_ready, in_partial, seen_elem, seen_eof, pw_valid, pw_ready, wr_valid, wr_ready;
  logic out_valid, idle;
  logic [15:0] in_row, in_k, pw_row, pw_k, out_row, out_col, out_val;
  elem_t in_elem, pw_elem;
  logic [31:0] wr_addr, wr_data;

  tile_writer_c dut (.*);

  typedef struct packed { logic partial; logic [15:0] row, k; elem_t e; } item_t;
  item_t inq[$];
  int ii;
  logic go = 1'b0;
  assign in_valid   = go && ii < inq.size();
  assign in_row     = in_valid ? inq[ii].row : '0;
  assign in_k       = in_valid ? inq[ii].k : '0;
  assign in_partial = in_valid ? inq[ii].partial : '0;
  assign in_elem    = in_valid ? inq[ii].e : '0;

  int checks = 0, failures = 0, n_seen_e, n_seen_eof;
  item_t exp_pw[$];
  logic [31:0] exp_wr [int];     // address -> data
  logic [31:0] got_wr [int];
  int n_wr;

  always @(negedge clk) begin
    pw_ready <= ($urandom_range(3) != 0);
    wr_ready <= ($urandom_range(2) != 0);
  end
  always_ff @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) ii <= ii + 1;
    if (seen_elem) n_seen_e <= n_seen_e + 1;
    if (seen_eof) n_seen_eof <= n_seen_eof + 1;
    if (pw_valid && pw_ready) begin
      checks++;
      if (exp_pw.size() == 0 || pw_row != exp_pw[0].row || pw_k != exp_pw[0].k || pw_elem != exp_pw[0].e) begin
        failures++;
        $display("partial write row %0d k %0d %p unexpected", pw_row, pw_k, pw_elem);
      end
      if (exp_pw.size()) void'(exp_pw.pop_front());
    end
    if (wr_valid && wr_ready) begin
      got_wr[int'(wr_addr)] = wr_data;
      n_wr++;
    end
  end

  task automatic run(input int nrows, input int first_row);
    int j, ne, neof, row, last;
    go = 1'b0;
    inq.delete(); exp_pw.delete(); exp_wr.delete(); got_wr.delete();
    j = 0; ne = 0; neof = 0; last = -1; row = first_row;
    for (int r = 0; r < nrows; r++) begin
      row += $urandom_range(2) + 1;
      for (int c = 0; c < 12; c++) begin
        item_t it;
        if ($urandom_range(2) == 0) begin
          it = '{partial: 1'b1, row: 16'($urandom_range(63)), k: 16'($urandom), e: '{eof: 1'b0, coord: 16'($urandom), val: 16'($urandom)}};
          inq.push_back(it); exp_pw.push_back(it); ne++;
        end
        if ($urandom_range(1) == 0) begin
          logic [15:0] v;
          v = ($urandom_range(4) == 0) ? 16'd0 : 16'($urandom);
          it = '{partial: 1'b0, row: 16'(row), k: '0, e: '{eof: 1'b0, coord: 16'(c), val: v}};
          inq.push_back(it); ne++;
          if (v != 0 && !v[15]) begin
            if (row != last) begin exp_wr[int'(c_ptr_base) + row] = j; last = row; end
            exp_wr[int'(c_data_base) + j] = {16'(c), v};
            j++;
          end
        end
        if ($urandom_range(5) == 0) begin
          it = '{partial: 1'($urandom), row: 16'(row), k: '0, e: '{eof: 1'b1, coord: '0, val: '0}};
          inq.push_back(it); neof++;
        end
      end
    end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    n_seen_e = 0; n_seen_eof = 0; n_wr = 0; ii = 0;
    go = 1'b1;
    while (ii < inq.size() || !idle) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (exp_pw.size() != 0) begin failures++; $display("%0d partial writes missing", exp_pw.size()); end
    checks++;
    if (n_seen_e != ne || n_seen_eof != neof) begin failures++; $display("seen %0d/%0d expected %0d/%0d", n_seen_e, n_seen_eof, ne, neof); end
    checks++;
    if (n_wr != exp_wr.num()) begin failures++; $display("%0d DRAM writes, expected %0d", n_wr, exp_wr.num()); end
    foreach (exp_wr[a]) begin
      checks++;
      if (!got_wr.exists(a) || got_wr[a] != exp_wr[a]) begin
        failures++;
        $display("DRAM[%h] = %h expected %h", a, got_wr.exists(a) ? got_wr[a] : 0, exp_wr[a]);
      end
    end
  endtask

  initial begin
    ii = 0; n_wr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 10; t++) run(8, t * 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
