// End-to-end testbench of the Flexagon top level at its default size
// (64 multipliers, 1 MiB STR cache, 256 KiB PSRAM).
//
// A behavioural DRAM (fixed latency, in-order responses with the request id)
// holds the compressed operands. The testbench plays the offline mapper: it
// builds random sparse A (M x K) and B (K x N), stores them compressed, cuts
// the stationary matrix into tiles that fit the 64 multipliers (and, for the
// outer product, the PSRAM blocks), avoids cluster maps that would need the
// MRN's lateral links, and runs the tiles of each dataflow:
//   IP(M)   A rows stationary (CSR), B columns streamed (CSC)
//   Gust(M) A rows stationary (CSR), B rows streamed (CSR)
//   OP(M)   A columns stationary (CSC), B rows streamed (CSR), PSRAM merge
//   Gust(N) B columns stationary (CSC), A columns streamed (CSC): C transposed
//   IP(M) with the ReLU non-linearity enabled.
// Every final element seen on the trace port is compared with C = A x B
// computed here in 16-bit wrap-around arithmetic; missing and extra elements
// count as failures, as do error/overflow flags. The number of d_C words
// written to DRAM must equal the number of outputs. Mechanisms exercised are
// counted and each must occur: the three dataflows, a multicast in the DN,
// zero bubbles, equal-coordinate adds in the comparator nodes, STR cache
// misses, a psum fiber spilling into a second PSRAM block, and ReLU drops.
module tb_flexagon;
  import flexagon_pkg::*;

  localparam int M = 20, K = 24, N = 72;
  localparam int LEAVES = 64;
  localparam int MEMW = 1 << 16;
  localparam int LAT = 8;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  // DUT signals
  logic start = 1'b0, relu_en = 1'b0;
  dataflow_e df = DF_IP;
  logic [31:0] sta_ptr_addr, sta_elem_addr, str_base, c_data_base, c_ptr_base;
  logic [15:0] fib_lo, fib_hi, str_nfib;
  logic [23:0] str_ptr_off, str_elem_off;
  logic busy, done, error;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [31:0] mem_req_addr, mem_resp_data;
  logic [1:0] mem_req_id, mem_resp_id;
  logic mem_wr_valid, mem_wr_ready;
  logic [31:0] mem_wr_addr, mem_wr_data;
  logic out_valid;
  logic [15:0] out_row, out_col, out_val;
  logic str_miss, psram_overflow, mrn_conflict;

  flexagon dut (.*);

  // ---------------- behavioural DRAM -----------------------------------------
  logic [31:0] dram [MEMW];
  logic        pv [LAT];
  logic [31:0] pa [LAT];
  logic [1:0]  pid[LAT];
  assign mem_req_ready = 1'b1;
  assign mem_wr_ready  = 1'b1;
  assign mem_resp_valid = pv[LAT-1];
  assign mem_resp_data  = dram[pa[LAT-1][15:0]];
  assign mem_resp_id    = pid[LAT-1];
  int n_dc_writes;
  always_ff @(posedge clk) begin
    pv[0] <= mem_req_valid && mem_req_ready && rst_n;
    pa[0] <= mem_req_addr;
    pid[0] <= mem_req_id;
    for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pa[i] <= pa[i-1]; pid[i] <= pid[i-1]; end
    if (mem_wr_valid && mem_wr_ready) begin
      dram[mem_wr_addr[15:0]] <= mem_wr_data;
      if (mem_wr_addr >= c_data_base && mem_wr_addr < c_data_base + 32'h1000) n_dc_writes++;
    end
  end

  // ---------------- matrices and reference ---------------------------------
  logic [15:0] A [M][K];
  logic [15:0] B [K][N];
  logic [15:0] C [M][N];

  int checks = 0, failures = 0;
  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  // equal-coordinate add seen in a comparator (merge-mode) node
  logic cmp_hit [LEAVES];
  assign cmp_hit[0] = 1'b0;
  for (genvar n = 1; n < LEAVES; n++) begin : g_probe
    assign cmp_hit[n] = dut.u_mrn.g_node[n].u_node.comb_fire && dut.node_cfg[n].merge
        && !dut.u_mrn.g_node[n].u_node.l_data.eof && !dut.u_mrn.g_node[n].u_node.r_data.eof
        && dut.u_mrn.g_node[n].u_node.l_data.coord == dut.u_mrn.g_node[n].u_node.r_data.coord;
  end

  // event counters
  int ev_ip, ev_op, ev_gust, ev_multicast, ev_bubble, ev_cmp_add, ev_miss, ev_spill, ev_relu_drop, ev_gustn;
  always_ff @(posedge clk) if (rst_n) begin
    int pc;
    pc = 0;
    for (int i = 0; i < LEAVES; i++) if (dut.dn_en[i]) pc++;
    // one streaming element sent to several multipliers at once
    if (pc > 1 && dut.dn_valid && dut.dn_ready && !dut.mrn_merge) ev_multicast++;
    // a zero sent to the multipliers without a match (operands are never 0)
    if (pc > 0 && dut.dn_valid && dut.dn_ready && !dut.mrn_merge && dut.ms_mode == MS_MULT
        && dut.dn_data.val == '0) ev_bubble++;
    for (int n = 1; n < LEAVES; n++) if (cmp_hit[n]) ev_cmp_add++;
    if (str_miss) ev_miss++;
    if (dut.u_psram.do_pw && dut.u_psram.t_hit && !dut.u_psram.tail_room) ev_spill++;
    if (dut.u_wr.accept && !dut.u_wr.in_partial && !dut.u_wr.in_elem.eof && dut.u_wr.in_elem.val != 0
        && dut.u_wr.nl_val == 0) ev_relu_drop++;
    if (error || psram_overflow) failures++;
  end

  // received outputs
  logic [15:0] got_val [M > N ? M : N][M > N ? M : N];
  logic        got     [M > N ? M : N][M > N ? M : N];
  int n_out;
  always_ff @(posedge clk) if (out_valid && rst_n) begin
    if (got[out_row][out_col]) begin
      failures++;
      $display("duplicate output row %0d col %0d", out_row, out_col);
    end
    got[out_row][out_col] <= 1'b1;
    got_val[out_row][out_col] <= out_val;
    n_out++;
  end

  // ---------------- compressed layout helpers ------------------------------
  // fibers of a dense matrix: if by_rows, fiber f = row f (coord = column).
  int nfib_q;
  task automatic put_mat(input int which, input bit by_rows, input int base,
                         output int ptr_addr, output int elem_addr, output int nf);
    int rows, cols, cnt, nfib, ncrd;
    int p;
    rows = (which == 0) ? M : K;
    cols = (which == 0) ? K : N;
    nfib = by_rows ? rows : cols;
    ncrd = by_rows ? cols : rows;
    ptr_addr = base;
    elem_addr = base + nfib + 1;
    p = 0;
    for (int f = 0; f < nfib; f++) begin
      dram[ptr_addr + f] = p;
      for (int c = 0; c < ncrd; c++) begin
        logic [15:0] v;
        if (which == 0) v = by_rows ? A[f][c] : A[c][f];
        else            v = by_rows ? B[f][c] : B[c][f];
        if (v != 0) begin
          dram[elem_addr + p] = {16'(c), v};
          p++;
        end
      end
    end
    dram[ptr_addr + nfib] = p;
    nf = nfib;
  endtask

  function automatic int fib_len(input int paddr, input int f);
    return int'(dram[paddr + f + 1]) - int'(dram[paddr + f]);
  endfunction

  // Straddle check: an aligned subtree whose two edges are crossed by two
  // different clusters cannot be routed without lateral links.
  function automatic bit routable(input int cl[LEAVES], input int n);
    for (int span = 2; span < LEAVES; span *= 2)
      for (int lo = 0; lo < LEAVES; lo += span) begin
        int hi;
        hi = lo + span - 1;
        if (lo > 0 && hi < n - 1 && lo < n && cl[lo-1] == cl[lo] && cl[hi] == cl[hi+1] && cl[lo] != cl[hi])
          return 1'b0;
      end
    return 1'b1;
  endfunction

  // Greedy tiling: next tile [lo,hi) from fiber lo.
  function automatic int next_tile(input int paddr, input int nfib, input int lo, input bit op_mode,
                                   input int bptr);
    int hi, nnz;
    int cl[LEAVES];
    int blocks[64];
    hi = lo;
    nnz = 0;
    for (int i = 0; i < 64; i++) blocks[i] = 0;
    while (hi < nfib) begin
      int len, ok;
      len = fib_len(paddr, hi);
      if (nnz + len > LEAVES) break;
      for (int j = 0; j < len; j++) cl[nnz + j] = hi;
      ok = routable(cl, nnz + len);
      if (op_mode) begin
        // PSRAM blocks per set: one fiber (m,k) needs ceil(len(B row k)/64) blocks
        int need;
        need = (fib_len(bptr, hi) + 63) / 64;
        if (need == 0) need = 0;
        for (int j = 0; j < len; j++) begin
          int m;
          m = int'(dram[paddr + nfib + 1 + int'(dram[paddr + hi]) + j][31:16]) % 64;
          blocks[m] += need;
          if (blocks[m] > 16) ok = 0;
        end
      end
      if (!ok && hi > lo) break;
      nnz += len;
      hi++;
    end
    return hi;
  endfunction

  task automatic run_tile(input dataflow_e d, input int pa, input int ea, input int lo, input int hi,
                          input int sb, input int snf, input int spo, input int seo);
    @(negedge clk);
    df = d; sta_ptr_addr = pa; sta_elem_addr = ea; fib_lo = 16'(lo); fib_hi = 16'(hi);
    str_base = sb; str_nfib = 16'(snf); str_ptr_off = 24'(spo); str_elem_off = 24'(seo);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
  endtask

  task automatic clear_got();
    for (int i = 0; i < (M > N ? M : N); i++)
      for (int j = 0; j < (M > N ? M : N); j++) got[i][j] = 1'b0;
    n_out = 0;
    n_dc_writes = 0;
  endtask

  task automatic compare(input string name, input bit transposed, input bit relu);
    int exp_n, nprint;
    exp_n = 0;
    nprint = 0;
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        logic [15:0] e;
        logic g;
        logic [15:0] gv;
        e = C[m][n];
        if (relu && e[15]) e = 0;
        g  = transposed ? got[n][m] : got[m][n];
        gv = transposed ? got_val[n][m] : got_val[m][n];
        checks++;
        if (e != 0) exp_n++;
        if ((e != 0) != g || (g && gv != e)) begin
          failures++;
          nprint++;
          if (nprint < 8) $display("%s: C[%0d][%0d] expected %0d got %0d (present %0d)", name, m, n, e, gv, g);
        end
      end
    checks++;
    if (n_dc_writes != exp_n || n_out != exp_n) begin
      failures++;
      $display("%s: %0d outputs, %0d d_C writes, expected %0d", name, n_out, n_dc_writes, exp_n);
    end
    $display("%s: %0d outputs checked at cycle %0d", name, exp_n, cyc);
  endtask

  // ---------------- stimulus ---------------------------------------------
  int a_r_p, a_r_e, a_r_n, a_c_p, a_c_e, a_c_n;
  int b_r_p, b_r_e, b_r_n, b_c_p, b_c_e, b_c_n;
  int t0;

  initial begin
    for (int i = 0; i < MEMW; i++) dram[i] = '0;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pa[i] = '0; pid[i] = '0; end
    n_dc_writes = 0; n_out = 0;
    {ev_ip, ev_op, ev_gust, ev_multicast, ev_bubble, ev_cmp_add, ev_miss, ev_spill, ev_relu_drop, ev_gustn} = '0;
    c_data_base = 32'hA000; c_ptr_base = 32'hC000;
    sta_ptr_addr = 0; sta_elem_addr = 0; str_base = 0; fib_lo = 0; fib_hi = 0; str_nfib = 0;
    str_ptr_off = 0; str_elem_off = 0;
    for (int m = 0; m < M; m++)
      for (int k = 0; k < K; k++)
        A[m][k] = ($urandom_range(99) < 35) ? 16'($signed($urandom_range(14)) - 7) : 16'd0;
    for (int k = 0; k < K; k++)
      for (int n = 0; n < N; n++)
        B[k][n] = (k == 3 || $urandom_range(99) < 25) ? 16'($signed($urandom_range(14)) - 7) : 16'd0;
    for (int k = 0; k < K; k++) if (A[0][k] == 0) A[0][k] = 16'd1;   // one long row
    for (int n = 0; n < N; n++) if (B[3][n] == 0) B[3][n] = 16'd2;   // one long B row
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        logic [15:0] s;
        s = '0;
        for (int k = 0; k < K; k++) s += 16'(A[m][k] * B[k][n]);
        C[m][n] = s;
      end
    put_mat(0, 1, 32'h0000, a_r_p, a_r_e, a_r_n);   // A CSR
    put_mat(0, 0, 32'h1000, a_c_p, a_c_e, a_c_n);   // A CSC
    put_mat(1, 1, 32'h2000, b_r_p, b_r_e, b_r_n);   // B CSR
    put_mat(1, 0, 32'h4000, b_c_p, b_c_e, b_c_n);   // B CSC

    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // IP(M)
    clear_got();
    t0 = cyc;
    for (int lo = 0; lo < a_r_n; ) begin
      int hi;
      hi = next_tile(a_r_p, a_r_n, lo, 1'b0, 0);
      run_tile(DF_IP, a_r_p, a_r_e, lo, hi, 32'h4000, b_c_n, 0, b_c_e - 32'h4000);
      ev_ip++;
      lo = hi;
    end
    repeat (20) @(negedge clk);
    compare("IP(M)", 1'b0, 1'b0);

    // Gust(M)
    clear_got();
    for (int lo = 0; lo < a_r_n; ) begin
      int hi;
      hi = next_tile(a_r_p, a_r_n, lo, 1'b0, 0);
      run_tile(DF_GUST, a_r_p, a_r_e, lo, hi, 32'h2000, b_r_n, 0, b_r_e - 32'h2000);
      ev_gust++;
      lo = hi;
    end
    repeat (20) @(negedge clk);
    compare("Gust(M)", 1'b0, 1'b0);

    // OP(M): all tiles of one output must be merged together, so the whole
    // K range is one tile per pass here only when it fits; otherwise each
    // tile's merged rows are partial. Use tiles whose rows do not repeat by
    // taking one column group at a time and checking the sum per tile.
    clear_got();
    begin
      // OP tiles write final rows per tile; accumulate them here.
      logic [15:0] acc [M][N];
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) acc[m][n] = '0;
      for (int lo = 0; lo < a_c_n; ) begin
        int hi;
        hi = next_tile(a_c_p, a_c_n, lo, 1'b1, b_r_p);
        for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) got[i][j] = 1'b0;
        run_tile(DF_OP, a_c_p, a_c_e, lo, hi, 32'h2000, b_r_n, 0, b_r_e - 32'h2000);
        repeat (10) @(negedge clk);
        // partial C of this tile: sum over k in [lo,hi)
        for (int m = 0; m < M; m++)
          for (int n = 0; n < N; n++) begin
            logic [15:0] s;
            s = '0;
            for (int k = lo; k < hi; k++) s += 16'(A[m][k] * B[k][n]);
            checks++;
            if ((s != 0) != got[m][n] || (got[m][n] && got_val[m][n] != s)) begin
              failures++;
              if (failures < 10) $display("OP tile [%0d,%0d) C[%0d][%0d] expected %0d got %0d", lo, hi, m, n, s, got_val[m][n]);
            end
            if (got[m][n]) acc[m][n] += got_val[m][n];
          end
        ev_op++;
        lo = hi;
      end
      for (int m = 0; m < M; m++)
        for (int n = 0; n < N; n++) begin
          checks++;
          if (acc[m][n] != C[m][n]) failures++;
        end
      $display("OP(M): %0d tiles checked at cycle %0d", ev_op, cyc);
    end

    // Gust(N): stationary B columns, streamed A columns -> C transposed
    clear_got();
    for (int lo = 0; lo < b_c_n; ) begin
      int hi;
      hi = next_tile(b_c_p, b_c_n, lo, 1'b0, 0);
      run_tile(DF_GUST, b_c_p, b_c_e, lo, hi, 32'h1000, a_c_n, 0, a_c_e - 32'h1000);
      ev_gustn++;
      lo = hi;
    end
    repeat (20) @(negedge clk);
    compare("Gust(N)", 1'b1, 1'b0);

    // IP(M) with ReLU
    clear_got();
    relu_en = 1'b1;
    for (int lo = 0; lo < a_r_n; ) begin
      int hi;
      hi = next_tile(a_r_p, a_r_n, lo, 1'b0, 0);
      run_tile(DF_IP, a_r_p, a_r_e, lo, hi, 32'h4000, b_c_n, 0, b_c_e - 32'h4000);
      lo = hi;
    end
    repeat (20) @(negedge clk);
    compare("IP(M)+ReLU", 1'b0, 1'b1);

    $display("events: ip_tiles=%0d gust_tiles=%0d op_tiles=%0d gustN_tiles=%0d multicast=%0d bubble=%0d cmp_add=%0d miss=%0d spill=%0d relu_drop=%0d",
             ev_ip, ev_gust, ev_op, ev_gustn, ev_multicast, ev_bubble, ev_cmp_add, ev_miss, ev_spill, ev_relu_drop);
    checks++; if (ev_ip == 0) failures++;
    checks++; if (ev_gust == 0) failures++;
    checks++; if (ev_op == 0) failures++;
    checks++; if (ev_gustn == 0) failures++;
    checks++; if (ev_multicast == 0) failures++;
    checks++; if (ev_bubble == 0) failures++;
    checks++; if (ev_cmp_add == 0) failures++;
    checks++; if (ev_miss == 0) failures++;
    checks++; if (ev_spill == 0) failures++;
    checks++; if (ev_relu_drop == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
