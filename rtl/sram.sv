// sram: on-chip SRAM on the system bus, holding the enclaves' memory.
//
// A single-port synchronous memory of SRAM_WORDS 32-bit words, written as
// an array. A selected write stores the whole word at the next clock edge;
// a selected read returns the word in slv_rsp the cycle after the select.
// An address beyond the memory returns err and changes nothing. The bus
// selects this slave for addresses 0x0000_0000..0x0FFF_FFFF; the word index
// is addr[..:2].
//
// The paper only names an SRAM on the bus. Its size (64 KiB), word-only
// access with no byte strobes and one-cycle read latency are this design's
// own choices. Contents are not reset; the output register is.
module sram
  import xine_pkg::*;
#(
  parameter int unsigned SRAM_WORDS = 16384
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t slv_req,
  output slv_rsp_t slv_rsp
);

  localparam int unsigned AW = $clog2(SRAM_WORDS);

  word_t         mem [SRAM_WORDS];
  logic [AW-1:0] widx;
  logic          in_range;
  word_t         rdata_q;
  logic          err_q;

  assign widx     = slv_req.addr[AW+1:2];
  assign in_range = (slv_req.addr >> 2) < XLEN'(SRAM_WORDS);

  // memory array: no reset, so it can map onto an SRAM macro
  always_ff @(posedge clk) begin
    if (slv_req.req && in_range) begin
      if (slv_req.we) mem[widx] <= slv_req.wdata;
      else            rdata_q   <= mem[widx];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err_q <= 1'b0;
    else        err_q <= slv_req.req && !in_range;
  end

  assign slv_rsp.rdata = err_q ? '0 : rdata_q;
  assign slv_rsp.err   = err_q;

endmodule
