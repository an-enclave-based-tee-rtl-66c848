// avail_table: the Availability Table of free receive space per enclave.
//
// For each enclave the table holds a window, a base byte address and a size
// in bytes, that the enclave can accept DMA data into. The enclave
// privilege arbitrator refreshes an entry whenever an enclave exits, so
// writes are accepted from M-mode only; every enclave may read the table.
// The DMA controller asks, through a combinational check port, whether a
// transfer of 'len' bytes to 'dst' fits inside the destination enclave's
// window; if it does not, the transfer ends with an exception.
//
// Register map (bus slave, word offsets within the slave's 4 KiB window):
//   0x8*i + 0x0  BASE[i]   byte address of enclave i's free window
//   0x8*i + 0x4  SIZE[i]   size of that window in bytes
// A U-mode write or an access beyond the table returns err and changes
// nothing. Read data and err are valid the cycle after the select.
//
// Following the paper: a table, accessible to all enclaves, recording the
// memory each enclave has available, updated when an enclave exits, and
// consulted before a DMA transfer starts. This design's own choices: the
// base/size encoding, the M-mode-only write rule, the register map, reset
// to zero (no space anywhere), and that a transfer does not shrink the
// window by itself (the firmware refreshes it).
module avail_table
  import xine_pkg::*;
#(
  parameter int unsigned NUM_ENCLAVES = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t slv_req,
  output slv_rsp_t slv_rsp,
  // DMA check port
  input  eid_t     chk_eid,
  input  word_t    chk_dst,
  input  word_t    chk_len,
  output logic     chk_fits
);

  word_t base [NUM_ENCLAVES];
  word_t size [NUM_ENCLAVES];

  logic [11:0] off;
  logic [7:0]  idx;
  logic        in_range;
  assign off      = slv_req.addr[11:0];
  assign idx      = 8'(off[11:3]);
  assign in_range = int'(idx) < NUM_ENCLAVES;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NUM_ENCLAVES; i++) begin
        base[i] <= '0;
        size[i] <= '0;
      end
      slv_rsp <= '0;
    end else begin
      slv_rsp <= '0;
      if (slv_req.req) begin
        if (!in_range || (slv_req.we && slv_req.priv != PRIV_M)) begin
          slv_rsp.err <= 1'b1;
        end else if (slv_req.we) begin
          if (off[2]) size[idx[3:0]] <= slv_req.wdata;
          else        base[idx[3:0]] <= slv_req.wdata;
        end else begin
          slv_rsp.rdata <= off[2] ? size[idx[3:0]] : base[idx[3:0]];
        end
      end
    end
  end

  // dst >= base and dst + len <= base + size, computed without overflow.
  always_comb begin
    logic [XLEN:0] end_req, end_win;
    chk_fits = 1'b0;
    if (int'(chk_eid) < NUM_ENCLAVES) begin
      end_req  = {1'b0, chk_dst} + {1'b0, chk_len};
      end_win  = {1'b0, base[chk_eid]} + {1'b0, size[chk_eid]};
      chk_fits = (chk_dst >= base[chk_eid]) && (end_req <= end_win);
    end
  end

endmodule
