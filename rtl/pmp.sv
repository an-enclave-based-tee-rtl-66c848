// pmp: physical memory protection unit of the RISC-V core.
//
// Holds NUM_ENTRIES address registers (pmpaddr) and configuration bytes
// (pmpcfg, four per 32-bit pmpcfg CSR) and checks accesses against them.
// Each region has read, write and execute permissions and an address
// matching mode (OFF, TOR, NA4, NAPOT). The lowest-numbered matching entry
// decides. In U-mode an access that matches no entry is refused; in M-mode
// it is allowed, and a matching entry only binds M-mode when its L bit is
// set. The enclave privilege arbitrator (M-mode firmware) rewrites the
// entries whenever it switches enclaves, which is how each enclave sees
// only its own region, execute-only access to the runtime enclave, and so on.
//
// Interface: an M-mode CSR port (write in one cycle, combinational read;
// csr_hit says the number belongs to this unit) and NUM_PORTS independent
// combinational check ports. Port 0 checks the core's loads, stores and
// fetches; the others check the source range of a DMA request. Each port
// reports allow, whether an entry matched, and which one.
//
// Following the paper: per-region R/W/X privileges, an address register and
// a configuration register per entry, checks applied to U-mode accesses, a
// violation trapped at the processor, 16 entries. Taken from the RISC-V
// privileged specification (which the paper relies on): the register
// layout, matching modes, priority and lock rules. This design's own
// choices: a 32-bit physical address (pmpaddr compared against addr[31:2]
// with its top two bits zero), word-granular checks (all accesses are
// aligned 32-bit words), the reserved combination R=0/W=1 stored as
// R=0/W=0, and reset to all entries OFF.
module pmp
  import xine_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES = 16,
  parameter int unsigned NUM_PORTS   = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  // CSR access (M-mode only; the caller checks the privilege)
  input  logic        csr_we,
  input  logic [11:0] csr_addr,
  input  word_t       csr_wdata,
  output word_t       csr_rdata,
  output logic        csr_hit,
  // Check ports
  input  word_t       chk_addr  [NUM_PORTS],
  input  acc_e        chk_acc   [NUM_PORTS],
  input  priv_e       chk_priv  [NUM_PORTS],
  output logic        chk_allow [NUM_PORTS],
  output logic        chk_match [NUM_PORTS],
  output logic [3:0]  chk_idx   [NUM_PORTS]
);

  localparam int unsigned NUM_CFG_CSR = (NUM_ENTRIES + 3) / 4;

  pmpcfg_t cfg  [NUM_ENTRIES];
  word_t   addr [NUM_ENTRIES];

  // ---------------- CSR write ----------------
  // An entry is locked by its own L bit; pmpaddr[i] is also locked when
  // entry i+1 is a locked TOR entry (it is that entry's lower bound).
  function automatic logic addr_locked(int unsigned i);
    logic lk;
    lk = cfg[i].l;
    if (i + 1 < NUM_ENTRIES)
      lk = lk | (cfg[i+1].l && cfg[i+1].a == PMP_TOR);
    return lk;
  endfunction

  function automatic pmpcfg_t legalize(logic [7:0] b);
    pmpcfg_t c;
    c      = pmpcfg_t'(b);
    c.rsvd = 2'b00;
    if (!c.r) c.w = 1'b0;
    return c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NUM_ENTRIES; i++) begin
        cfg[i]  <= '0;
        addr[i] <= '0;
      end
    end else if (csr_we) begin
      for (int unsigned i = 0; i < NUM_ENTRIES; i++) begin
        if (csr_addr == CSR_PMPCFG0 + 12'(i / 4) && !cfg[i].l)
          cfg[i] <= legalize(csr_wdata[8*(i%4) +: 8]);
        if (csr_addr == CSR_PMPADDR0 + 12'(i) && !addr_locked(i))
          addr[i] <= csr_wdata;
      end
    end
  end

  // ---------------- CSR read ----------------
  always_comb begin
    csr_rdata = '0;
    csr_hit   = 1'b0;
    for (int unsigned j = 0; j < NUM_CFG_CSR; j++) begin
      if (csr_addr == CSR_PMPCFG0 + 12'(j)) begin
        csr_hit = 1'b1;
        for (int unsigned k = 0; k < 4; k++)
          if (4*j + k < NUM_ENTRIES) csr_rdata[8*k +: 8] = cfg[4*j+k];
      end
    end
    for (int unsigned i = 0; i < NUM_ENTRIES; i++) begin
      if (csr_addr == CSR_PMPADDR0 + 12'(i)) begin
        csr_hit   = 1'b1;
        csr_rdata = addr[i];
      end
    end
  end

  // ---------------- Address matching ----------------
  function automatic logic entry_match(int unsigned i, word_t a);
    word_t wa, lo, t;
    wa = {2'b00, a[XLEN-1:2]};
    lo = (i == 0) ? '0 : addr[(i == 0) ? 0 : i-1];
    t  = addr[i] ^ (addr[i] + 1'b1);   // ones over the NAPOT size bits
    unique case (cfg[i].a)
      PMP_TOR:   return (wa >= lo) && (wa < addr[i]);
      PMP_NA4:   return wa == addr[i];
      PMP_NAPOT: return ((wa ^ addr[i]) & ~t) == '0;
      default:   return 1'b0;
    endcase
  endfunction

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    always_comb begin
      logic found;
      logic perm;
      found = 1'b0;
      perm  = 1'b0;
      chk_idx[p] = '0;
      for (int unsigned i = 0; i < NUM_ENTRIES; i++) begin
        if (!found && entry_match(i, chk_addr[p])) begin
          found      = 1'b1;
          chk_idx[p] = 4'(i);
          unique case (chk_acc[p])
            ACC_READ:  perm = cfg[i].r;
            ACC_WRITE: perm = cfg[i].w;
            ACC_EXEC:  perm = cfg[i].x;
            default:   perm = 1'b0;
          endcase
          if (chk_priv[p] == PRIV_M && !cfg[i].l) perm = 1'b1;
        end
      end
      chk_match[p] = found;
      chk_allow[p] = found ? perm : (chk_priv[p] == PRIV_M);
    end
  end

endmodule
