// xine_pkg: types and constants shared by the enclave-isolation hardware.
//
// The design is an RV32 machine with only M-mode and U-mode. Enclaves are
// PMP-isolated memory regions that run in U-mode; M-mode firmware (the
// enclave privilege arbitrator) switches between them. This package holds
// the privilege and access encodings, the PMP configuration byte (as in the
// RISC-V privileged specification), the CSR numbers used by the PMP and by
// the security CSR, the request/response structs of the on-chip bus, the
// address map and the DMA status codes.
//
// The PMP encodings and CSR numbers 0x3A0/0x3B0 follow the RISC-V
// privileged specification. The security CSR numbers (custom M-mode
// read/write space 0x7C0..0x7DF), the bus structs, the address map and the
// DMA status codes are this design's own choices.
package xine_pkg;

  localparam int XLEN  = 32;
  localparam int EID_W = 4;          // enclave ID: up to 16 enclaves, one per PMP entry

  typedef logic [XLEN-1:0]  word_t;
  typedef logic [EID_W-1:0] eid_t;

  // Privilege levels implemented by the core (M and U only).
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_M = 2'b11
  } priv_e;

  // Kind of memory access presented to the PMP.
  typedef enum logic [1:0] {
    ACC_READ  = 2'd0,
    ACC_WRITE = 2'd1,
    ACC_EXEC  = 2'd2
  } acc_e;

  // pmpcfg.A address-matching mode.
  typedef enum logic [1:0] {
    PMP_OFF   = 2'd0,
    PMP_TOR   = 2'd1,
    PMP_NA4   = 2'd2,
    PMP_NAPOT = 2'd3
  } pmp_a_e;

  // One pmpcfg byte: L, reserved(2), A(2), X, W, R.
  typedef struct packed {
    logic       l;
    logic [1:0] rsvd;
    pmp_a_e     a;
    logic       x;
    logic       w;
    logic       r;
  } pmpcfg_t;

  // CSR numbers.
  localparam logic [11:0] CSR_PMPCFG0       = 12'h3A0;  // pmpcfg0..3
  localparam logic [11:0] CSR_PMPADDR0      = 12'h3B0;  // pmpaddr0..15
  localparam logic [11:0] CSR_SEC_EID       = 12'h7C0;  // running enclave ID
  localparam logic [11:0] CSR_SEC_DMA_PERM0 = 12'h7D0;  // DMA permission row per source enclave

  // Enclave IDs used by the reference configuration: the OS is 0, the
  // Crypto Enclave 1, the Runtime Enclave 2, App Enclaves from 3 up.
  localparam eid_t EID_OS  = 4'd0;
  localparam eid_t EID_CE  = 4'd1;
  localparam eid_t EID_RE  = 4'd2;
  localparam eid_t EID_AE1 = 4'd3;

  // A memory access from the core, before the PMP check.
  typedef struct packed {
    logic   req;
    logic   we;
    acc_e   acc;
    logic [XLEN-1:0] addr;
    logic [XLEN-1:0] wdata;
    priv_e  priv;
  } core_req_t;

  // Bus request, from a master or forwarded to a slave. A slave sees
  // 'req' as its select. 'priv' and 'eid' travel with the request so that
  // slaves can enforce who may use them.
  typedef struct packed {
    logic   req;
    logic   we;
    word_t  addr;
    word_t  wdata;
    priv_e  priv;
    eid_t   eid;
  } bus_req_t;

  // Bus response to a master: gnt in the cycle of the request, rvalid
  // (with rdata and err) one cycle after a granted request.
  typedef struct packed {
    logic   gnt;
    logic   rvalid;
    word_t  rdata;
    logic   err;
  } bus_rsp_t;

  // Slave response, valid the cycle after the slave was selected.
  typedef struct packed {
    word_t  rdata;
    logic   err;
  } slv_rsp_t;

  // System address map. Bits [31:28] == 0 select the SRAM; the register
  // blocks each own a 4 KiB window at 0x1000_x000.
  localparam word_t MAP_DMA   = 32'h1000_0000;
  localparam word_t MAP_AVAIL = 32'h1000_1000;
  localparam word_t MAP_MBOX  = 32'h1000_2000;

  // Bus slaves, in the order the bus indexes them.
  typedef enum logic [2:0] {
    SLV_SRAM  = 3'd0,
    SLV_DMA   = 3'd1,
    SLV_AVAIL = 3'd2,
    SLV_MBOX  = 3'd3,
    SLV_NONE  = 3'd4
  } slave_e;
  localparam int NUM_SLAVES = 4;

  // DMA status codes (STATUS register, bits [2:0]).
  typedef enum logic [2:0] {
    DMA_ST_IDLE    = 3'd0,
    DMA_ST_BUSY    = 3'd1,
    DMA_ST_DONE    = 3'd2,
    DMA_ST_DENIED  = 3'd3,   // refused by the security CSR check
    DMA_ST_NOSPACE = 3'd4,   // destination lacks room in the Availability Table
    DMA_ST_BUSERR  = 3'd5    // a bus error during the move
  } dma_status_e;

endpackage
