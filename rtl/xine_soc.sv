// xine_soc: the enclave-isolation hardware of a RISC-V MCU with an
// integrated secure element.
//
// A single RV32 core with M- and U-mode runs M-mode firmware (the enclave
// privilege arbitrator) and U-mode enclaves: app enclaves, a Crypto Enclave
// that alone drives the secure element, and a Runtime Enclave that the
// others may execute but not read or write. This module holds the hardware
// that enforces that split, around an external core:
//   * pmp          checks every core access (port 0) and, for the DMA, the
//                  source range of a request (ports 1, 2);
//   * sec_csr      the security CSR: running enclave ID and DMA rules;
//   * dma_ctrl     inter-enclave DMA with the security and availability checks;
//   * avail_table  free receive window per enclave;
//   * se_mailbox   the Crypto Enclave's queues to the secure-element core;
//   * sram         on-chip memory holding the enclaves;
//   * sys_bus      the shared bus, core and DMA as masters.
// The core itself, the secure element's core and crypto blocks, the
// interrupt controller, Flash, DDR and the APB peripherals are outside; their
// signals are this module's ports.
//
// Core interface: a memory access (core_req, with its kind and privilege)
// is checked by the PMP in the same cycle; a refused access raises
// core_acc_fault in that cycle and never reaches the bus, otherwise it is
// forwarded with the running enclave's ID, and core_rsp carries gnt (same
// cycle) and rvalid/rdata/err (the cycle after the grant). CSR interface:
// csr_we/csr_re with a number, data and privilege; reads are combinational;
// an access from U-mode, or to a number neither the PMP nor the security
// CSR owns, raises csr_illegal and writes nothing.
//
// The split of functions follows the paper's SoC (PMP and security CSR in
// the core, DMA, SE and SRAM on a shared bus); the bus protocol, address
// map, register maps and enclave numbering are this design's own.
module xine_soc
  import xine_pkg::*;
#(
  parameter int unsigned NUM_PMP      = 16,
  parameter int unsigned NUM_ENCLAVES = 16,
  parameter int unsigned SRAM_WORDS   = 16384,
  parameter int unsigned MBOX_DEPTH   = 8,
  parameter eid_t        CE_EID       = EID_CE
) (
  input  logic        clk,
  input  logic        rst_n,
  // core memory port
  input  core_req_t   core_req,
  output bus_rsp_t    core_rsp,
  output logic        core_acc_fault,
  // core CSR port
  input  logic        csr_we,
  input  logic        csr_re,
  input  logic [11:0] csr_addr,
  input  word_t       csr_wdata,
  input  priv_e       csr_priv,
  output word_t       csr_rdata,
  output logic        csr_illegal,
  output eid_t        cur_eid,
  // secure-element core side of the mailbox
  output logic        se_req_valid,
  output word_t       se_req_data,
  input  logic        se_req_pop,
  input  logic        se_rsp_push,
  input  word_t       se_rsp_data,
  output logic        se_rsp_full,
  output logic        se_doorbell,
  input  logic        se_doorbell_ack,
  input  logic        se_done,
  // interrupts, to the interrupt controller
  output logic        dma_done_irq,
  output logic        dma_err_irq,
  output logic        mbox_irq
);

  localparam int unsigned NPORT = 3;

  // ---------------- CSRs ----------------
  logic  pmp_hit, sec_hit, csr_ok;
  word_t pmp_rdata, sec_rdata;

  assign csr_ok      = csr_priv == PRIV_M && (pmp_hit || sec_hit);
  assign csr_illegal = (csr_we || csr_re) && !csr_ok;
  assign csr_rdata   = !csr_ok ? '0 : pmp_hit ? pmp_rdata : sec_rdata;

  // ---------------- PMP ----------------
  word_t      chk_addr  [NPORT];
  acc_e       chk_acc   [NPORT];
  priv_e      chk_priv  [NPORT];
  logic       chk_allow [NPORT];
  logic       chk_match [NPORT];
  logic [3:0] chk_idx   [NPORT];

  eid_t  dma_src_eid, dma_dst_eid;
  priv_e dma_priv;
  word_t dma_first, dma_last, av_dst, av_len;
  logic  sec_allow, sec_deny_perm, sec_deny_src, av_fits, dma_busy;

  assign chk_addr[0] = core_req.addr;
  assign chk_acc[0]  = core_req.acc;
  assign chk_priv[0] = core_req.priv;
  assign chk_addr[1] = dma_first;
  assign chk_acc[1]  = ACC_READ;
  assign chk_priv[1] = dma_priv;
  assign chk_addr[2] = dma_last;
  assign chk_acc[2]  = ACC_READ;
  assign chk_priv[2] = dma_priv;

  pmp #(.NUM_ENTRIES(NUM_PMP), .NUM_PORTS(NPORT)) u_pmp (
    .clk, .rst_n,
    .csr_we    (csr_we && csr_priv == PRIV_M),
    .csr_addr, .csr_wdata,
    .csr_rdata (pmp_rdata), .csr_hit (pmp_hit),
    .chk_addr, .chk_acc, .chk_priv, .chk_allow, .chk_match, .chk_idx
  );

  sec_csr #(.NUM_ENCLAVES(NUM_ENCLAVES)) u_sec (
    .clk, .rst_n,
    .csr_we    (csr_we && csr_priv == PRIV_M),
    .csr_addr, .csr_wdata,
    .csr_rdata (sec_rdata), .csr_hit (sec_hit),
    .cur_eid,
    .chk_src_eid     (dma_src_eid),
    .chk_dst_eid     (dma_dst_eid),
    .chk_priv        (dma_priv),
    .pmp_first_allow (chk_allow[1]), .pmp_first_match (chk_match[1]), .pmp_first_idx (chk_idx[1]),
    .pmp_last_allow  (chk_allow[2]), .pmp_last_match  (chk_match[2]), .pmp_last_idx  (chk_idx[2]),
    .chk_allow       (sec_allow),
    .deny_perm       (sec_deny_perm),
    .deny_src        (sec_deny_src)
  );

  // ---------------- bus ----------------
  bus_req_t m_req [2];
  bus_rsp_t m_rsp [2];
  bus_req_t s_req [NUM_SLAVES];
  slv_rsp_t s_rsp [NUM_SLAVES];

  assign core_acc_fault = core_req.req && !chk_allow[0];

  always_comb begin
    m_req[0].req   = core_req.req && chk_allow[0];
    m_req[0].we    = core_req.we;
    m_req[0].addr  = core_req.addr;
    m_req[0].wdata = core_req.wdata;
    m_req[0].priv  = core_req.priv;
    m_req[0].eid   = cur_eid;
  end
  assign core_rsp = m_rsp[0];

  sys_bus u_bus (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);

  sram #(.SRAM_WORDS(SRAM_WORDS)) u_sram (
    .clk, .rst_n, .slv_req (s_req[int'(SLV_SRAM)]), .slv_rsp (s_rsp[int'(SLV_SRAM)])
  );

  dma_ctrl u_dma (
    .clk, .rst_n,
    .slv_req (s_req[int'(SLV_DMA)]), .slv_rsp (s_rsp[int'(SLV_DMA)]),
    .m_req (m_req[1]), .m_rsp (m_rsp[1]),
    .chk_src_eid (dma_src_eid), .chk_dst_eid (dma_dst_eid), .chk_priv (dma_priv),
    .chk_first_addr (dma_first), .chk_last_addr (dma_last),
    .sec_allow, .sec_deny_perm, .sec_deny_src,
    .av_dst, .av_len, .av_fits,
    .done_irq (dma_done_irq), .err_irq (dma_err_irq), .busy (dma_busy)
  );

  avail_table #(.NUM_ENCLAVES(NUM_ENCLAVES)) u_avail (
    .clk, .rst_n,
    .slv_req (s_req[int'(SLV_AVAIL)]), .slv_rsp (s_rsp[int'(SLV_AVAIL)]),
    .chk_eid (dma_dst_eid), .chk_dst (av_dst), .chk_len (av_len), .chk_fits (av_fits)
  );

  se_mailbox #(.MBOX_DEPTH(MBOX_DEPTH), .CE_EID(CE_EID)) u_mbox (
    .clk, .rst_n,
    .slv_req (s_req[int'(SLV_MBOX)]), .slv_rsp (s_rsp[int'(SLV_MBOX)]),
    .ce_irq (mbox_irq),
    .se_req_valid, .se_req_data, .se_req_pop,
    .se_rsp_push, .se_rsp_data, .se_rsp_full,
    .se_doorbell, .se_doorbell_ack, .se_done
  );

endmodule
