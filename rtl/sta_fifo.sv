// Memory structure for the stationary matrix: read-only FIFO with its tile
// filler and tile reader.
//
// The stationary elements of a tile are read once and in order. On `start`
// the tile filler loads its address register (Addr STA) with `base` and then
// requests `count` consecutive DRAM words, adding 1 to the address after each
// request, as long as the FIFO has room for every outstanding word. Returned
// words are pushed; the tile reader pops them from the head.
//
// Follows the paper: FIFO organisation, implicit push from an address
// register, a single SRAM port shared by push and pop (a pop is refused in a
// cycle in which a DRAM word arrives), 256-byte capacity (64 words). The
// DRAM request/response handshake is this design's own: requests use
// valid/ready, responses arrive in order and cannot be stalled.
module sta_fifo
  import flexagon_pkg::*;
#(
  parameter int DEPTH_BYTES = 256,
  localparam int DEPTH = DEPTH_BYTES / (WORD_W/8),
  localparam int PW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [ADDR_W-1:0] count,
  output logic              busy,       // words still to be requested
  // DRAM read port
  output logic              dram_req_valid,
  output logic [ADDR_W-1:0] dram_req_addr,
  input  logic              dram_req_ready,
  input  logic              dram_resp_valid,
  input  logic [WORD_W-1:0] dram_resp_data,
  // tile reader side
  output logic              head_valid,
  output elem_t             head,
  input  logic              pop
);

  logic [WORD_W-1:0] mem [DEPTH];
  logic [PW-1:0]     rd_ptr, wr_ptr;
  logic [PW:0]       occ;        // words stored
  logic [PW:0]       pend;       // words requested, not yet returned
  logic [ADDR_W-1:0] addr_sta, remaining;
  logic              do_pop, do_req;

  assign busy           = (remaining != '0);
  assign dram_req_valid = busy && ((occ + pend) < (PW+1)'(DEPTH));
  assign dram_req_addr  = addr_sta;
  assign do_req         = dram_req_valid && dram_req_ready;
  assign head_valid     = (occ != '0) && !dram_resp_valid;   // single port
  assign head           = word_to_elem(mem[rd_ptr]);
  assign do_pop         = pop && head_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; occ <= '0; pend <= '0;
      addr_sta <= '0; remaining <= '0;
    end else begin
      if (start) begin
        addr_sta  <= base;
        remaining <= count;
      end else if (do_req) begin
        addr_sta  <= addr_sta + 1'b1;
        remaining <= remaining - 1'b1;
      end
      if (dram_resp_valid) begin
        mem[wr_ptr] <= dram_resp_data;
        wr_ptr <= wr_ptr + 1'b1;
      end
      if (do_pop) rd_ptr <= rd_ptr + 1'b1;
      occ  <= occ + (PW+1)'(dram_resp_valid) - (PW+1)'(do_pop);
      pend <= pend + (PW+1)'(do_req && !start) - (PW+1)'(dram_resp_valid);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    dram_resp_valid |-> occ < (PW+1)'(DEPTH));

endmodule
