// Flexagon top level: a sparse x sparse matrix multiplication accelerator
// that runs the inner-product, outer-product or Gustavson's dataflow on one
// substrate, chosen per layer by an offline mapper.
//
// Blocks: the control unit; the three L1 structures (STA FIFO for the
// stationary matrix, STR cache for the streaming matrix, PSRAM for psums,
// with the tile writer C and its write buffer); the distribution network
// (DN); LEAVES multiplier switches (MN); the merger-reduction network (MRN)
// with its configuration logic; and the collector that feeds the tile writer
// from the MRN ports and from the psum bypass of the outer product.
//
// External interfaces (plain signals):
//   * configuration of one tile (see control_unit) and start/busy/done;
//   * one DRAM read port with an id that is echoed with the in-order
//     response (0: control unit pointers, 1: STA filler, 2: STR cache filler),
//     fixed priority in that order;
//   * one DRAM write port for the compressed output (tile writer C);
//   * a trace of final output elements and two event outputs (STR cache miss,
//     PSRAM overflow).
// The DRAM itself is off chip and not part of this RTL.
//
// Timing: a tile is accepted on `start` while idle; `done` pulses for one
// cycle when its last output has been written; `error` is then valid (tile
// too large, empty, or a cluster map that would need the MRN's lateral
// links). The DN is built with DN_IN inputs but the control unit drives only
// input 0, so one element (possibly multicast) is distributed per cycle.
// Follows the paper: the block set and dataflow of its overview figure, the
// 64 multipliers, 63 nodes, cache and FIFO sizes. Own choices: the DRAM
// port sharing, the output collector and the trace port.
module flexagon
  import flexagon_pkg::*;
#(
  parameter int LEAVES = 64,
  parameter int DN_IN  = 16,
  parameter int OFF_W  = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  // tile configuration
  input  logic               start,
  input  dataflow_e          df,
  input  logic               relu_en,
  input  logic [ADDR_W-1:0]  sta_ptr_addr,
  input  logic [ADDR_W-1:0]  sta_elem_addr,
  input  logic [ROW_W-1:0]   fib_lo,
  input  logic [ROW_W-1:0]   fib_hi,
  input  logic [ADDR_W-1:0]  str_base,
  input  logic [ROW_W-1:0]   str_nfib,
  input  logic [OFF_W-1:0]   str_ptr_off,
  input  logic [OFF_W-1:0]   str_elem_off,
  input  logic [ADDR_W-1:0]  c_data_base,
  input  logic [ADDR_W-1:0]  c_ptr_base,
  output logic               busy,
  output logic               done,
  output logic               error,
  // DRAM read port
  output logic               mem_req_valid,
  output logic [ADDR_W-1:0]  mem_req_addr,
  output logic [1:0]         mem_req_id,
  input  logic               mem_req_ready,
  input  logic               mem_resp_valid,
  input  logic [WORD_W-1:0]  mem_resp_data,
  input  logic [1:0]         mem_resp_id,
  // DRAM write port
  output logic               mem_wr_valid,
  output logic [ADDR_W-1:0]  mem_wr_addr,
  output logic [WORD_W-1:0]  mem_wr_data,
  input  logic               mem_wr_ready,
  // trace and events
  output logic               out_valid,
  output logic [ROW_W-1:0]   out_row,
  output logic [COORD_W-1:0] out_col,
  output logic [VAL_W-1:0]   out_val,
  output logic               str_miss,
  output logic               psram_overflow,
  output logic               mrn_conflict
);

  localparam int SW = $clog2(DN_IN);

  // ---------------- DRAM read arbitration ---------------------------------
  logic              cu_req_valid, sta_req_valid, ch_req_valid;
  logic [ADDR_W-1:0] cu_req_addr, sta_req_addr, ch_req_addr;
  logic              cu_req_ready, sta_req_ready, ch_req_ready;

  always_comb begin
    cu_req_ready = 1'b0; sta_req_ready = 1'b0; ch_req_ready = 1'b0;
    mem_req_valid = 1'b1;
    if (cu_req_valid) begin
      mem_req_addr = cu_req_addr;  mem_req_id = 2'd0; cu_req_ready = mem_req_ready;
    end else if (sta_req_valid) begin
      mem_req_addr = sta_req_addr; mem_req_id = 2'd1; sta_req_ready = mem_req_ready;
    end else begin
      mem_req_valid = ch_req_valid;
      mem_req_addr = ch_req_addr;  mem_req_id = 2'd2; ch_req_ready = mem_req_ready;
    end
  end

  // ---------------- blocks -------------------------------------------------
  logic              sta_start, sta_head_valid, sta_pop, sta_busy;
  logic [ADDR_W-1:0] sta_base, sta_count;
  elem_t             sta_head;

  logic              c_rd_valid, c_rd_ready, c_resp_valid;
  logic [OFF_W-1:0]  c_rd_off;
  logic [WORD_W-1:0] c_resp_data;

  logic               cs_valid, cs_rvalid, cs_found;
  logic [ROW_W-1:0]   cs_row;
  logic [COORD_W-1:0] cs_k;
  elem_t              cs_elem;

  logic               pw_valid, pw_ready;
  logic [ROW_W-1:0]   pw_row;
  logic [COORD_W-1:0] pw_k;
  elem_t              pw_elem;

  logic               dn_valid, dn_ready;
  elem_t              dn_data;
  logic               dn_en[LEAVES];
  ms_mode_e           ms_mode;
  logic               ms_in_valid[LEAVES], ms_in_ready[LEAVES];
  elem_t              ms_in_data[LEAVES];
  logic               ms_out_valid[LEAVES], ms_out_ready[LEAVES];
  elem_t              ms_out_data[LEAVES];
  elem_t              ms_sta[LEAVES];

  logic               mrn_merge, bypass;
  logic               leaf_use[LEAVES];
  logic [ROW_W-1:0]   leaf_cl[LEAVES], leaf_row[LEAVES];
  logic [COORD_W-1:0] leaf_k[LEAVES];

  logic               wr_start, seen_elem, seen_eof, wr_idle;
  logic               cu_error;

  control_unit #(.LEAVES(LEAVES), .OFF_W(OFF_W)) u_cu (
    .clk, .rst_n, .start, .df, .sta_ptr_addr, .sta_elem_addr, .fib_lo, .fib_hi,
    .str_nfib, .str_ptr_off, .str_elem_off, .busy, .done, .error(cu_error),
    .dreq_valid(cu_req_valid), .dreq_addr(cu_req_addr), .dreq_ready(cu_req_ready),
    .dresp_valid(mem_resp_valid && mem_resp_id == 2'd0), .dresp_data(mem_resp_data),
    .sta_start, .sta_base, .sta_count, .sta_head_valid, .sta_head, .sta_pop,
    .c_rd_valid, .c_rd_off, .c_rd_ready, .c_resp_valid, .c_resp_data,
    .cs_valid, .cs_row, .cs_k, .cs_rvalid, .cs_found, .cs_elem,
    .dn_valid, .dn_data, .dn_ready, .dn_en, .ms_mode, .ms_ready(ms_in_ready),
    .mrn_merge, .leaf_use, .leaf_cl, .bypass, .leaf_row, .leaf_k,
    .wr_start, .seen_elem, .seen_eof, .wr_idle
  );

  sta_fifo u_sta (
    .clk, .rst_n, .start(sta_start), .base(sta_base), .count(sta_count), .busy(sta_busy),
    .dram_req_valid(sta_req_valid), .dram_req_addr(sta_req_addr), .dram_req_ready(sta_req_ready),
    .dram_resp_valid(mem_resp_valid && mem_resp_id == 2'd1), .dram_resp_data(mem_resp_data),
    .head_valid(sta_head_valid), .head(sta_head), .pop(sta_pop)
  );

  str_cache #(.OFF_W(OFF_W)) u_cache (
    .clk, .rst_n, .base(str_base), .flush(start && !busy),
    .rd_valid(c_rd_valid), .rd_off(c_rd_off), .rd_ready(c_rd_ready),
    .resp_valid(c_resp_valid), .resp_data(c_resp_data), .miss_pulse(str_miss),
    .dram_req_valid(ch_req_valid), .dram_req_addr(ch_req_addr), .dram_req_ready(ch_req_ready),
    .dram_resp_valid(mem_resp_valid && mem_resp_id == 2'd2), .dram_resp_data(mem_resp_data)
  );

  psram u_psram (
    .clk, .rst_n,
    .pw_valid, .pw_row, .pw_k, .pw_elem, .pw_ready, .overflow(psram_overflow),
    .cs_valid, .cs_row, .cs_k, .cs_rvalid, .cs_found, .cs_elem
  );

  // ---------------- distribution network ------------------------------------
  logic          dn_in_valid[DN_IN], dn_in_ready[DN_IN];
  elem_t         dn_in_data[DN_IN];
  logic [SW-1:0] dn_sel[LEAVES];

  always_comb begin
    for (int p = 0; p < DN_IN; p++) begin
      dn_in_valid[p] = (p == 0) ? dn_valid : 1'b0;
      dn_in_data[p]  = dn_data;
    end
    for (int i = 0; i < LEAVES; i++) dn_sel[i] = '0;
  end
  assign dn_ready = dn_in_ready[0];

  dist_network #(.NUM_IN(DN_IN), .NUM_OUT(LEAVES)) u_dn (
    .in_valid(dn_in_valid), .in_data(dn_in_data), .in_ready(dn_in_ready),
    .en(dn_en), .sel(dn_sel),
    .out_valid(ms_in_valid), .out_data(ms_in_data), .out_ready(ms_in_ready)
  );

  // ---------------- multiplier network --------------------------------------
  for (genvar i = 0; i < LEAVES; i++) begin : g_ms
    mult_switch u_ms (
      .clk, .rst_n, .mode(ms_mode), .coord_sta(1'b0),
      .in_valid(ms_in_valid[i]), .in_data(ms_in_data[i]), .in_ready(ms_in_ready[i]),
      .out_valid(ms_out_valid[i]), .out_data(ms_out_data[i]), .out_ready(ms_out_ready[i]),
      .sta_q(ms_sta[i])
    );
  end

  // ---------------- merger-reduction network --------------------------------
  node_cfg_t        node_cfg[LEAVES];
  logic [ROW_W-1:0] mem_row[LEAVES];
  logic [ROW_W-1:0] root_row;
  logic             leaf_valid[LEAVES], leaf_ready[LEAVES];
  logic             port_valid[LEAVES], port_ready[LEAVES];
  elem_t            port_data[LEAVES];

  mrn_config #(.LEAVES(LEAVES)) u_cfg (
    .merge(mrn_merge), .leaf_use, .leaf_cl, .node_cfg, .mem_row, .root_row,
    .conflict(mrn_conflict)
  );

  always_comb
    for (int i = 0; i < LEAVES; i++) leaf_valid[i] = ms_out_valid[i] && !bypass;

  mrn #(.LEAVES(LEAVES)) u_mrn (
    .clk, .rst_n, .node_cfg,
    .leaf_valid, .leaf_data(ms_out_data), .leaf_ready,
    .port_valid, .port_data, .port_ready
  );

  // ---------------- collector and tile writer --------------------------------
  localparam int NS = 2*LEAVES;
  logic               src_valid[NS], src_ready[NS], src_partial[NS];
  elem_t              src_data[NS];
  logic [ROW_W-1:0]   src_row[NS];
  logic [COORD_W-1:0] src_k[NS];
  logic               col_valid, col_ready, col_partial;
  elem_t              col_data;
  logic [ROW_W-1:0]   col_row;
  logic [COORD_W-1:0] col_k;

  always_comb begin
    for (int p = 0; p < LEAVES; p++) begin
      src_valid[p]   = port_valid[p];
      src_data[p]    = port_data[p];
      src_row[p]     = (p == 0) ? root_row : mem_row[p];
      src_k[p]       = '0;
      src_partial[p] = 1'b0;
      port_ready[p]  = src_ready[p];
    end
    for (int i = 0; i < LEAVES; i++) begin
      src_valid[LEAVES+i]   = ms_out_valid[i] && bypass;
      src_data[LEAVES+i]    = ms_out_data[i];
      src_row[LEAVES+i]     = leaf_row[i];
      src_k[LEAVES+i]       = leaf_k[i];
      src_partial[LEAVES+i] = 1'b1;
      ms_out_ready[i]       = bypass ? src_ready[LEAVES+i] : leaf_ready[i];
    end
  end

  out_collector #(.N(NS)) u_col (
    .src_valid, .src_data, .src_row, .src_k, .src_partial, .src_ready,
    .out_valid(col_valid), .out_data(col_data), .out_row(col_row), .out_k(col_k),
    .out_partial(col_partial), .out_ready(col_ready)
  );

  tile_writer_c u_wr (
    .clk, .rst_n, .start(wr_start), .relu_en, .c_data_base, .c_ptr_base,
    .in_valid(col_valid), .in_row(col_row), .in_k(col_k), .in_partial(col_partial),
    .in_elem(col_data), .in_ready(col_ready), .seen_elem, .seen_eof,
    .pw_valid, .pw_row, .pw_k, .pw_elem, .pw_ready,
    .wr_valid(mem_wr_valid), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .wr_ready(mem_wr_ready),
    .out_valid, .out_row, .out_col, .out_val, .idle(wr_idle)
  );

  // a cluster map that needs lateral links cannot be routed
  assign error = cu_error || (busy && mrn_conflict && !bypass && (ms_mode == MS_MULT || ms_mode == MS_FWD));

endmodule
