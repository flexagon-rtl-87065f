// Memory structure for the streaming matrix: read-only set-associative cache
// with its tile filler.
//
// The streaming matrix is read sequentially (outer product), re-read once per
// tile (inner product) or gathered fiber by fiber from scattered places
// (Gustavson's), so it is held in a traditional read-only set-associative
// cache: 1 MiB, 128-byte lines, 16 ways in the evaluated configuration. The
// cache works on word offsets relative to the start of the streaming matrix;
// the tile filler adds the register Addr STR (`base`) only when a miss goes
// to DRAM, which keeps tags short.
//
// Interface: a read request (rd_valid/rd_off) is accepted when rd_ready is
// high. A hit answers in the next cycle (1-cycle L1 latency). A miss makes the
// tile filler fetch the whole line word by word from DRAM, then answers.
// Victim choice is round-robin per set (the paper does not name a policy).
// The paper's 16 banks are not modelled: one word is read per cycle.
// `flush` (pulsed when a tile starts, while the cache is idle) invalidates
// every line if `base` differs from the base the lines were filled for, so a
// new streaming matrix never hits on lines of the previous one; the same
// matrix stays cached across tiles.
module str_cache
  import flexagon_pkg::*;
#(
  parameter int SIZE_BYTES = 1048576,
  parameter int LINE_BYTES = 128,
  parameter int WAYS       = 16,
  parameter int OFF_W      = 24,          // word-offset width
  localparam int WPL   = LINE_BYTES / (WORD_W/8),
  localparam int SETS  = SIZE_BYTES / LINE_BYTES / WAYS,
  localparam int WB    = $clog2(WPL),
  localparam int SB    = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int WYB   = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int TAG_W = OFF_W - WB - SB
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] base,            // Addr STR
  input  logic              flush,
  input  logic              rd_valid,
  input  logic [OFF_W-1:0]  rd_off,
  output logic              rd_ready,
  output logic              resp_valid,
  output logic [WORD_W-1:0] resp_data,
  output logic              miss_pulse,      // one cycle per miss (statistics)
  // DRAM read port of the tile filler
  output logic              dram_req_valid,
  output logic [ADDR_W-1:0] dram_req_addr,
  input  logic              dram_req_ready,
  input  logic              dram_resp_valid,
  input  logic [WORD_W-1:0] dram_resp_data
);

  logic [WORD_W-1:0] data_q [SETS*WAYS*WPL];
  logic [TAG_W-1:0]  tag_q  [SETS][WAYS];
  logic              val_q  [SETS][WAYS];
  logic [WYB-1:0]    rr_q   [SETS];

  typedef enum logic [1:0] {C_IDLE, C_FILL, C_DONE} cstate_e;
  logic [ADDR_W-1:0] base_q;
  cstate_e state;

  logic [WB-1:0]    req_w;
  logic [SB-1:0]    req_s;
  logic [TAG_W-1:0] req_t;
  logic             hit;
  logic [WYB-1:0]   hit_way;

  logic [OFF_W-1:0] miss_off;
  logic [WYB-1:0]   victim;
  logic [WB:0]      req_cnt, rsp_cnt;

  assign req_w = rd_off[WB-1:0];
  assign req_s = SB'(rd_off[WB +: SB]);
  assign req_t = rd_off[OFF_W-1 -: TAG_W];

  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (val_q[req_s][w] && tag_q[req_s][w] == req_t) begin
        hit = 1'b1;
        hit_way = WYB'(w);
      end
  end

  assign rd_ready       = (state == C_IDLE);
  assign miss_pulse     = (state == C_IDLE) && rd_valid && !hit;
  assign dram_req_valid = (state == C_FILL) && (req_cnt < (WB+1)'(WPL));
  assign dram_req_addr  = base + ADDR_W'({miss_off[OFF_W-1:WB], WB'(0)}) + ADDR_W'(req_cnt);

  function automatic int didx(input logic [SB-1:0] s, input logic [WYB-1:0] w, input logic [WB-1:0] o);
    return (int'(s) * WAYS + int'(w)) * WPL + int'(o);
  endfunction

  always_ff @(posedge clk) begin
    if (state == C_FILL && dram_resp_valid)
      data_q[didx(SB'(miss_off[WB +: SB]), victim, WB'(rsp_cnt))] <= dram_resp_data;
    if (state == C_IDLE && rd_valid && hit)
      resp_data <= data_q[didx(req_s, hit_way, req_w)];
    else if (state == C_DONE)
      resp_data <= data_q[didx(SB'(miss_off[WB +: SB]), victim, miss_off[WB-1:0])];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      resp_valid <= 1'b0;
      base_q <= '0;
      miss_off <= '0; victim <= '0; req_cnt <= '0; rsp_cnt <= '0;
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          val_q[s][w] <= 1'b0;
          tag_q[s][w] <= '0;
        end
      end
    end else begin
      resp_valid <= 1'b0;
      if (flush) begin
        base_q <= base;
        if (base != base_q)
          for (int s = 0; s < SETS; s++)
            for (int w = 0; w < WAYS; w++) val_q[s][w] <= 1'b0;
      end
      unique case (state)
        C_IDLE: if (rd_valid) begin
          if (hit) resp_valid <= 1'b1;
          else begin
            state    <= C_FILL;
            miss_off <= rd_off;
            victim   <= rr_q[req_s];
            rr_q[req_s] <= rr_q[req_s] + 1'b1;
            val_q[req_s][rr_q[req_s]] <= 1'b0;
            req_cnt  <= '0;
            rsp_cnt  <= '0;
          end
        end
        C_FILL: begin
          if (dram_req_valid && dram_req_ready) req_cnt <= req_cnt + 1'b1;
          if (dram_resp_valid) begin
            rsp_cnt <= rsp_cnt + 1'b1;
            if (rsp_cnt == (WB+1)'(WPL-1)) begin
              state <= C_DONE;
              val_q[SB'(miss_off[WB +: SB])][victim] <= 1'b1;
              tag_q[SB'(miss_off[WB +: SB])][victim] <= miss_off[OFF_W-1 -: TAG_W];
            end
          end
        end
        C_DONE: begin
          resp_valid <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
