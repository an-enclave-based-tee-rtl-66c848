// sys_bus: the shared system bus between the core, the DMA and the slaves.
//
// Two masters (0: the RISC-V core, 1: the DMA controller) share one path
// to the slaves. When both request in the same cycle the bus grants the one
// that was not granted last (round robin), and the other is stalled: its
// gnt stays low and it must hold its request. The granted request is
// decoded by address and forwarded, with its privilege and enclave ID, to
// exactly one slave:
//   0x0000_0000..0x0FFF_FFFF SRAM, 0x1000_0xxx DMA registers,
//   0x1000_1xxx Availability Table, 0x1000_2xxx SE mailbox.
// One cycle after a grant the master sees rvalid with the slave's rdata and
// err; an address that decodes to no slave gets err. Reads and writes alike
// get this response. One transfer per cycle, no outstanding requests
// beyond one.
//
// The paper shows only a bus joining the core, DMA, SE, SRAM and other
// slaves (an AXI bus with an AXI-to-APB bridge). This simple single-beat
// request/grant protocol, the round-robin rule and the address map are this
// design's own choices; Flash, DDR and the APB peripherals are not attached.
module sys_bus
  import xine_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [2],
  output bus_rsp_t m_rsp [2],
  output bus_req_t s_req [NUM_SLAVES],
  input  slv_rsp_t s_rsp [NUM_SLAVES]
);

  logic   gnt [2];
  logic   last;        // master granted last time
  logic   sel;         // master granted now
  logic   any;
  slave_e dec;
  logic   r_valid;
  logic   r_master;
  slave_e r_slave;

  function automatic slave_e decode(word_t a);
    if (a[31:28] == 4'h0)               return SLV_SRAM;
    if (a[31:12] == MAP_DMA[31:12])     return SLV_DMA;
    if (a[31:12] == MAP_AVAIL[31:12])   return SLV_AVAIL;
    if (a[31:12] == MAP_MBOX[31:12])    return SLV_MBOX;
    return SLV_NONE;
  endfunction

  always_comb begin
    any = m_req[0].req || m_req[1].req;
    if (m_req[0].req && m_req[1].req) sel = !last;
    else                              sel = m_req[1].req;
    gnt[0] = any && !sel;
    gnt[1] = any &&  sel;
    dec    = decode(m_req[sel].addr);
    for (int s = 0; s < NUM_SLAVES; s++) begin
      s_req[s]     = m_req[sel];
      s_req[s].req = any && dec == slave_e'(s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last     <= 1'b1;
      r_valid  <= 1'b0;
      r_master <= 1'b0;
      r_slave  <= SLV_NONE;
    end else begin
      r_valid <= any;
      if (any) begin
        last     <= sel;
        r_master <= sel;
        r_slave  <= dec;
      end
    end
  end

  always_comb begin
    for (int m = 0; m < 2; m++) begin
      m_rsp[m].gnt    = gnt[m];
      m_rsp[m].rvalid = r_valid && r_master == 1'(m);
      m_rsp[m].rdata  = '0;
      m_rsp[m].err    = 1'b1;
      if (r_slave != SLV_NONE) begin
        m_rsp[m].rdata = s_rsp[r_slave[1:0]].rdata;
        m_rsp[m].err   = s_rsp[r_slave[1:0]].err;
      end
    end
  end

  // A stalled master must hold its request until granted.
  for (genvar m = 0; m < 2; m++) begin : g_hold
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_req[m].req && !m_rsp[m].gnt |=> m_req[m].req);
  end

endmodule
