// sec_csr: the security CSR that decides whether a DMA request is legitimate.
//
// The DMA controller sits outside the core and cannot tell a legitimate
// request from a forged one, so the core holds the rule. M-mode firmware
// pre-configures it: SEC_EID holds the ID of the enclave now running (the
// arbitrator rewrites it at every switch, together with the PMP), and
// SEC_DMA_PERM[i] holds a bit mask of the enclaves that enclave i may send
// data to. A request is allowed when
//   * the requester may send to the named destination (its mask bit is set);
//   * the source range belongs to the requester: the PMP, programmed with
//     the requester's view, allows reading both its first and last word,
//     and both fall in the same PMP entry. Enclaves can therefore only push
//     their own data out, never pull data from another enclave.
// The verdict is combinational; deny_perm and deny_src say why it failed.
//
// Interface: M-mode CSR port (write in one cycle, combinational read;
// csr_hit says the number belongs to this unit), cur_eid output, and a
// check port fed by the DMA controller and two PMP check ports.
//
// Following the paper: a special security CSR in the core, pre-configured,
// checks each DMA request and the core denies what it refuses; an enclave
// may only move its own data to other enclaves. This design's own choices:
// the register layout (an enclave-ID register plus one permission row per
// source enclave), using the PMP to prove ownership of the source range,
// and M-mode requests being checked with M-mode PMP rules.
module sec_csr
  import xine_pkg::*;
#(
  parameter int unsigned NUM_ENCLAVES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // CSR access (M-mode only; the caller checks the privilege)
  input  logic        csr_we,
  input  logic [11:0] csr_addr,
  input  word_t       csr_wdata,
  output word_t       csr_rdata,
  output logic        csr_hit,
  // Running enclave
  output eid_t        cur_eid,
  // DMA request check
  input  eid_t        chk_src_eid,
  input  eid_t        chk_dst_eid,
  input  priv_e       chk_priv,       // privilege of the requester
  input  logic        pmp_first_allow, // PMP verdict on reading the first source word
  input  logic        pmp_first_match,
  input  logic [3:0]  pmp_first_idx,
  input  logic        pmp_last_allow,  // PMP verdict on reading the last source word
  input  logic        pmp_last_match,
  input  logic [3:0]  pmp_last_idx,
  output logic        chk_allow,
  output logic        deny_perm,
  output logic        deny_src
);

  logic [NUM_ENCLAVES-1:0] perm [NUM_ENCLAVES];
  eid_t                    eid_q;
  logic                    same_entry;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eid_q <= '0;
      for (int unsigned i = 0; i < NUM_ENCLAVES; i++) perm[i] <= '0;
    end else if (csr_we) begin
      if (csr_addr == CSR_SEC_EID) eid_q <= csr_wdata[EID_W-1:0];
      for (int unsigned i = 0; i < NUM_ENCLAVES; i++)
        if (csr_addr == CSR_SEC_DMA_PERM0 + 12'(i)) perm[i] <= csr_wdata[NUM_ENCLAVES-1:0];
    end
  end

  always_comb begin
    csr_rdata = '0;
    csr_hit   = 1'b0;
    if (csr_addr == CSR_SEC_EID) begin
      csr_hit   = 1'b1;
      csr_rdata = word_t'(eid_q);
    end
    for (int unsigned i = 0; i < NUM_ENCLAVES; i++) begin
      if (csr_addr == CSR_SEC_DMA_PERM0 + 12'(i)) begin
        csr_hit   = 1'b1;
        csr_rdata = word_t'(perm[i]);
      end
    end
  end

  assign cur_eid = eid_q;

  always_comb begin
    deny_perm = 1'b1;
    if (int'(chk_src_eid) < NUM_ENCLAVES && int'(chk_dst_eid) < NUM_ENCLAVES)
      deny_perm = !perm[chk_src_eid][chk_dst_eid];
    same_entry = (chk_priv == PRIV_M) ||
                 (pmp_first_match && pmp_last_match && pmp_first_idx == pmp_last_idx);
    deny_src  = !(pmp_first_allow && pmp_last_allow && same_entry);
    chk_allow = !deny_perm && !deny_src;
  end

endmodule
