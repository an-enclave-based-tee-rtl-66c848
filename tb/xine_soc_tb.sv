// xine_soc_tb: end-to-end testbench of the enclave hardware, at the
// default sizes (16 PMP entries, 16 enclaves, 64 KiB SRAM, 8-word mailbox).
//
// The testbench plays the core: M-mode firmware (the enclave privilege
// arbitrator) and the U-mode enclaves of a QR-code payment scanner, with a
// behavioural secure-element core on the mailbox. Memory layout (bytes):
//   EPA 0x0000  OS 0x1000  AE-1 0x2000  AE-2 0x4000  AE-3 0x6000
//   unused 0x8000-0xBFFF  CE 0xC000  RE 0xE000  (each region 4 or 8 KiB)
// and the register windows at 0x1000_0000 (DMA), _1000 (table), _2000
// (mailbox). Enclave IDs: OS 0, CE 1, RE 2, AE-1 3, AE-2 4, AE-3 5.
//
// Flow: boot fills the Availability Table and the DMA permissions (AE-1 may
// send to AE-2, AE-2 to AE-3). AE-1 writes a decoded QR payload of the
// largest QR size (2953 bytes, 739 words) and tries the
// accesses its PMP view must refuse (other enclaves, EPA, reading or
// writing the runtime, which it may only execute), the mailbox, and DMA
// requests that must be denied (to the CE, pulling from AE-2) or end in an
// exception (too large), then sends the payload to AE-2 by DMA while it keeps
// using the bus. AE-2 checks it and asks for encryption; in the Crypto
// Enclave's view the data is read straight from AE-2, passed through the
// mailbox to the SE in 7-word chunks, and the ciphertext and one tag per
// chunk written back into AE-2.
// AE-2 then sends them by DMA to AE-3, which checks them against the
// testbench's own computation. A last step loads the Runtime Enclave's own
// view (full access to the OS, the app enclaves, unused memory and itself;
// none to the EPA and the CE). When AE-2 exits, the EPA updates its
// Availability Table entry, and a later send from AE-1 must respect the
// new window. AE-1 also leaves a message for AE-2 in a
// shared-memory mailbox: 256 bytes of unused memory that the OS maps into
// both views (and no other app enclave's). Each mechanism is counted and must occur.
module xine_soc_tb;
  import xine_pkg::*;

  logic        clk = 0, rst_n = 0;
  core_req_t   core_req;
  bus_rsp_t    core_rsp;
  logic        core_acc_fault;
  logic        csr_we = 0, csr_re = 0;
  logic [11:0] csr_addr = '0;
  word_t       csr_wdata = '0, csr_rdata;
  priv_e       csr_priv = PRIV_M;
  logic        csr_illegal;
  eid_t        cur_eid;
  logic        se_req_valid, se_req_pop, se_rsp_push, se_rsp_full;
  logic        se_doorbell, se_doorbell_ack, se_done;
  word_t       se_req_data, se_rsp_data;
  logic        dma_done_irq, dma_err_irq, mbox_irq;

  xine_soc dut (.*);

  se_core_model #(.KEY(32'h1B2E_3C4D)) u_se (
    .clk, .rst_n, .se_req_valid, .se_req_data, .se_req_pop, .se_rsp_push, .se_rsp_data,
    .se_rsp_full, .se_doorbell, .se_doorbell_ack, .se_done
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_pmp_fault = 0, n_exec_only = 0, n_m_bypass = 0, n_csr_illegal = 0;
  int n_dma_denied_perm = 0, n_dma_denied_src = 0, n_dma_nospace = 0, n_dma_done = 0;
  int n_bus_contention = 0, n_mbox_refused = 0, n_mbox_notify = 0, n_switch = 0;
  int n_table_refused = 0, n_shm_msg = 0;

  // sampled just before the rising edge, when the requests are settled
  always @(negedge clk) begin
    #4;
    if (rst_n && dut.m_req[0].req && dut.m_req[1].req) n_bus_contention++;
  end

  // ---------------- core model ----------------
  task automatic mem(input logic we, input acc_e acc, input word_t a, input word_t d,
                     input priv_e pv, output word_t rd, output logic fault, output logic err);
    @(negedge clk);
    core_req = '{req: 1'b1, we: we, acc: acc, addr: a, wdata: d, priv: pv};
    #1;
    rd = '0; err = 0; fault = core_acc_fault;
    if (fault) begin
      @(negedge clk);
      core_req.req = 1'b0;
      return;
    end
    while (!core_rsp.gnt) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    core_req.req = 1'b0;
    check(core_rsp.rvalid, "response follows grant");
    rd  = core_rsp.rdata;
    err = core_rsp.err;
  endtask

  word_t rd;
  logic  f, e;
  priv_e pv;     // privilege of the code now running

  task automatic wr(input word_t a, input word_t d);
    mem(1, ACC_WRITE, a, d, pv, rd, f, e);
    check(!f && !e, $sformatf("write %h allowed", a));
  endtask
  task automatic rdw(input word_t a, output word_t d);
    mem(0, ACC_READ, a, 0, pv, d, f, e);
    check(!f && !e, $sformatf("read %h allowed", a));
  endtask
  task automatic expect_fault(input logic we, input acc_e acc, input word_t a);
    mem(we, acc, a, 32'hBAD0_BAD0, pv, rd, f, e);
    check(f, $sformatf("access %h kind %0d refused by the PMP", a, acc));
    if (f) n_pmp_fault++;
  endtask

  task automatic csr_w(input logic [11:0] a, input word_t d);
    @(negedge clk);
    csr_we = 1; csr_addr = a; csr_wdata = d; csr_priv = pv;
    #1;
    if (pv == PRIV_M) check(!csr_illegal, $sformatf("csr %h write legal", a));
    else begin
      check(csr_illegal, "U-mode CSR write illegal");
      if (csr_illegal) n_csr_illegal++;
    end
    @(negedge clk);
    csr_we = 0;
  endtask
  task automatic csr_r(input logic [11:0] a, output word_t d);
    @(negedge clk);
    csr_re = 1; csr_addr = a; csr_priv = pv;
    #1 d = csr_rdata;
    @(negedge clk);
    csr_re = 0;
  endtask

  // ---------------- memory layout ----------------
  localparam word_t EPA_B = 32'h0000, OS_B = 32'h1000, AE1_B = 32'h2000, AE2_B = 32'h4000;
  localparam word_t AE3_B = 32'h6000, UNU_B = 32'h8000, CE_B = 32'hC000, RE_B = 32'hE000;
  // shared-memory mailbox the OS assigns to AE-1 and AE-2: top 256 B of unused memory
  localparam word_t SHM_B = 32'hBF00, SHM_S = 32'h100;
  localparam eid_t  E_OS = 0, E_CE = 1, E_RE = 2, E_AE1 = 3, E_AE2 = 4, E_AE3 = 5;

  function automatic word_t napot(word_t base, word_t size);
    return (base >> 2) | ((size >> 3) - 1);
  endfunction
  function automatic logic [7:0] cfg(logic [1:0] a, logic x, logic w, logic r);
    return {1'b0, 2'b00, a, x, w, r};
  endfunction

  // EPA: switch the PMP and the enclave ID to an enclave's view (Fig. privileges)
  task automatic epa_switch(input eid_t id);
    word_t own_b, own_s;
    priv_e save;
    save = pv;
    pv   = PRIV_M;
    for (int j = 0; j < 4; j++) csr_w(CSR_PMPCFG0 + 12'(j), 32'h0);
    unique case (id)
      E_AE1: begin own_b = AE1_B; own_s = 32'h2000; end
      E_AE2: begin own_b = AE2_B; own_s = 32'h2000; end
      E_AE3: begin own_b = AE3_B; own_s = 32'h2000; end
      default: begin own_b = CE_B; own_s = 32'h2000; end
    endcase
    if (id == E_RE) begin
      // RE: OS, app enclaves, unused memory and itself full; no EPA, no CE
      csr_w(CSR_PMPADDR0 + 0, OS_B >> 2);
      csr_w(CSR_PMPADDR0 + 1, CE_B >> 2);
      csr_w(CSR_PMPADDR0 + 2, napot(RE_B, 32'h2000));
      csr_w(CSR_PMPCFG0 + 0, {8'h0, cfg(3, 1, 1, 1), cfg(1, 1, 1, 1), cfg(0, 0, 0, 0)});
    end else if (id == E_CE) begin
      // CE: its own region and OS..unused full, runtime execute-only, MMIO incl. mailbox
      csr_w(CSR_PMPADDR0 + 0, napot(CE_B, 32'h2000));
      csr_w(CSR_PMPADDR0 + 1, napot(RE_B, 32'h2000));
      csr_w(CSR_PMPADDR0 + 2, OS_B >> 2);
      csr_w(CSR_PMPADDR0 + 3, CE_B >> 2);
      csr_w(CSR_PMPADDR0 + 4, napot(32'h1000_0000, 32'h4000));
      csr_w(CSR_PMPCFG0 + 0, {cfg(1, 1, 1, 1), cfg(0, 0, 0, 0), cfg(3, 1, 0, 0), cfg(3, 1, 1, 1)});
      csr_w(CSR_PMPCFG0 + 1, {24'h0, cfg(3, 0, 1, 1)});
    end else begin
      // app enclave: its own region, runtime execute-only, DMA and table registers
      csr_w(CSR_PMPADDR0 + 0, napot(own_b, own_s));
      csr_w(CSR_PMPADDR0 + 1, napot(RE_B, 32'h2000));
      csr_w(CSR_PMPADDR0 + 2, napot(32'h1000_0000, 32'h2000));
      csr_w(CSR_PMPCFG0 + 0, {8'h0, cfg(3, 0, 1, 1), cfg(3, 1, 0, 0), cfg(3, 1, 1, 1)});
      if (id == E_AE1 || id == E_AE2) begin
        // both ends of the shared mailbox see it read/write
        csr_w(CSR_PMPADDR0 + 3, napot(SHM_B, SHM_S));
        csr_w(CSR_PMPCFG0 + 0, {cfg(3, 0, 1, 1), cfg(3, 0, 1, 1), cfg(3, 1, 0, 0), cfg(3, 1, 1, 1)});
      end
    end
    csr_w(CSR_SEC_EID, word_t'(id));
    check(cur_eid == id, "enclave ID switched");
    n_switch++;
    pv = save;
  endtask

  // DMA as called by an enclave through the runtime
  task automatic dma(input word_t src, input word_t dst, input word_t len, input eid_t de,
                     input logic busy_core, output dma_status_e st);
    word_t x;
    wr(MAP_DMA + 32'h00, src);
    wr(MAP_DMA + 32'h04, dst);
    wr(MAP_DMA + 32'h08, len);
    wr(MAP_DMA + 32'h0C, word_t'(de));
    wr(MAP_DMA + 32'h10, 32'h1);
    while (!dma_done_irq && !dma_err_irq) begin
      if (busy_core) rdw(src, x);     // the enclave keeps working: bus contention
      else @(negedge clk);
    end
    rdw(MAP_DMA + 32'h14, x);
    st = dma_status_e'(x[2:0]);
    wr(MAP_DMA + 32'h10, 32'h2);
    unique case (st)
      DMA_ST_DONE:    n_dma_done++;
      DMA_ST_NOSPACE: n_dma_nospace++;
      DMA_ST_DENIED:  if (x[8]) n_dma_denied_perm++; else if (x[9]) n_dma_denied_src++;
      default: ;
    endcase
  endtask

  function automatic word_t cipher(word_t w);
    word_t x;
    x = w ^ 32'h1B2E_3C4D;
    return {x[26:0], x[31:27]} + 32'h9E37_79B9;
  endfunction

  // The payload is the largest QR code (version 40-L, 2953 bytes) rounded up
  // to words. The SE takes it in chunks of 7 words, so that a chunk and its
  // tag fill the 8-word reply queue; the last chunk is shorter.
  localparam int QR_WORDS = 739;
  localparam int CHUNK    = 7;
  localparam int NCHUNK   = (QR_WORDS + CHUNK - 1) / CHUNK;
  localparam int CT_WORDS = QR_WORDS + NCHUNK;        // ciphertext plus one tag per chunk
  // receive windows offered in the Availability Table, and where the CE puts results
  localparam word_t RX2_B = AE2_B + 32'h0400, RX3_B = AE3_B + 32'h1000, CT2_B = AE2_B + 32'h1000;
  localparam word_t RX2_S = 32'h0C00, RX3_S = 32'h1000;
  word_t qr [QR_WORDS];
  word_t exp_ct [CT_WORDS];
  int    n_in;
  word_t tag;
  dma_status_e st;
  word_t d;

  initial begin
    core_req = '0;
    pv = PRIV_M;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------- boot: EPA in M-mode ----------
    // Availability Table: AE-2 offers 3 KiB, AE-3 4 KiB of their regions
    wr(MAP_AVAIL + 8 * E_AE2,     RX2_B);
    wr(MAP_AVAIL + 8 * E_AE2 + 4, RX2_S);
    wr(MAP_AVAIL + 8 * E_AE3,     RX3_B);
    wr(MAP_AVAIL + 8 * E_AE3 + 4, RX3_S);
    wr(MAP_AVAIL + 8 * E_CE,      CE_B + 32'h1000);
    wr(MAP_AVAIL + 8 * E_CE + 4,  32'h400);
    csr_w(CSR_SEC_DMA_PERM0 + 12'(E_AE1), 32'h1 << E_AE2);
    csr_w(CSR_SEC_DMA_PERM0 + 12'(E_AE2), 32'h1 << E_AE3);
    // M-mode reaches any memory without a matching entry
    wr(RE_B, 32'h0000_0013);              // runtime code: a nop
    wr(EPA_B + 32'h10, 32'hC0DE_0E9A);
    wr(SHM_B, 32'h0);                     // the OS assigns the shared mailbox, empty
    n_m_bypass++;

    // ---------- AE-1: capture the QR image ----------
    epa_switch(E_AE1);
    pv = PRIV_U;
    for (int i = 0; i < QR_WORDS; i++) begin
      qr[i] = $urandom;
      wr(AE1_B + 32'h100 + word_t'(4 * i), qr[i]);
    end
    expect_fault(0, ACC_READ,  AE2_B);          // other app enclave
    expect_fault(1, ACC_WRITE, AE3_B + 32'h10);
    expect_fault(0, ACC_READ,  EPA_B + 32'h10); // the arbitrator
    expect_fault(0, ACC_READ,  OS_B);           // the OS
    expect_fault(0, ACC_READ,  CE_B);           // the crypto enclave
    expect_fault(0, ACC_READ,  UNU_B);          // unused memory
    expect_fault(0, ACC_READ,  RE_B);           // runtime: no read ...
    expect_fault(1, ACC_WRITE, RE_B);           // ... no write ...
    mem(0, ACC_EXEC, RE_B, 0, pv, d, f, e);     // ... but execute
    check(!f && !e && d == 32'h0000_0013, "runtime executable from an app enclave");
    if (!f) n_exec_only++;
    expect_fault(0, ACC_READ,  MAP_MBOX + 32'h8); // mailbox belongs to the CE
    mem(1, ACC_WRITE, MAP_AVAIL, 32'h0, pv, d, f, e);
    check(!f && e, "U-mode write to the Availability Table refused");
    if (e) n_table_refused++;
    rdw(MAP_AVAIL + 8 * E_AE2 + 4, d);
    check(d == RX2_S, "AE-1 reads AE-2's free space from the table");
    csr_w(CSR_SEC_EID, word_t'(E_CE));          // U-mode cannot impersonate the CE
    check(cur_eid == E_AE1, "enclave ID unchanged by a U-mode write");
    csr_w(CSR_PMPCFG0, 32'h0F0F_0F0F);
    csr_r(CSR_PMPCFG0, d);
    check(d == '0, "U-mode cannot read the PMP");

    // shared mailbox: word 0 holds the message length (0 = empty), then the words
    rdw(SHM_B, d);
    check(d == 0, "shared mailbox starts empty");
    if (d == 0) begin                           // put only when not full
      for (int i = 0; i < 4; i++) wr(SHM_B + 4 + word_t'(4 * i), qr[i] ^ 32'h5A5A_0000);
      wr(SHM_B, 32'd4);
    end

    dma(AE1_B + 32'h100, CE_B + 32'h1000, 4 * QR_WORDS, E_CE, 0, st);
    check(st == DMA_ST_DENIED, "AE-1 may not send to the CE");
    dma(AE2_B, RX2_B, 32'h10, E_AE2, 0, st);
    check(st == DMA_ST_DENIED, "AE-1 may not pull data out of AE-2");
    dma(AE1_B, RX2_B, RX2_S + 4, E_AE2, 0, st);
    check(st == DMA_ST_NOSPACE, "AE-2 has no room for one word more than its window");
    dma(AE1_B + 32'h100, RX2_B, 4 * QR_WORDS, E_AE2, 1, st);
    check(st == DMA_ST_DONE, "QR image sent to AE-2");

    // ---------- AE-2: parse, then ask for encryption ----------
    epa_switch(E_AE2);
    for (int i = 0; i < QR_WORDS; i++) begin
      rdw(RX2_B + word_t'(4 * i), d);
      check(d == qr[i], $sformatf("AE-2 received QR word %0d", i));
    end
    expect_fault(0, ACC_READ, AE1_B + 32'h100);
    rdw(SHM_B, d);                              // get only when not empty
    check(d == 4, "AE-2 finds a message in the shared mailbox");
    if (d == 4) begin
      for (int i = 0; i < 4; i++) begin
        rdw(SHM_B + 4 + word_t'(4 * i), d);
        check(d == (qr[i] ^ 32'h5A5A_0000), $sformatf("shared mailbox word %0d", i));
      end
      wr(SHM_B, 32'd0);
      n_shm_msg++;
    end
    expect_fault(0, ACC_READ, SHM_B - 4);       // the rest of unused memory stays closed
    // AE-2 exits keeping the payload: the EPA shrinks its free window
    pv = PRIV_M;
    wr(MAP_AVAIL + 8 * E_AE2,     RX2_B + 4 * QR_WORDS);
    wr(MAP_AVAIL + 8 * E_AE2 + 4, RX2_S - 4 * QR_WORDS);
    pv = PRIV_U;

    // ---------- CE: encrypt AE-2's data with the SE ----------
    epa_switch(E_CE);
    for (int c = 0; c < NCHUNK; c++) begin
      n_in = (c == NCHUNK - 1) ? QR_WORDS - c * CHUNK : CHUNK;
      for (int i = 0; i < n_in; i++) begin
        rdw(RX2_B + word_t'(4 * (c * CHUNK + i)), d);  // CE reads AE-2 directly
        wr(MAP_MBOX + 32'h0, d);
      end
      wr(MAP_MBOX + 32'hC, 32'h1);                 // doorbell
      while (!mbox_irq) @(negedge clk);
      n_mbox_notify++;
      for (int i = 0; i < n_in + 1; i++) begin
        rdw(MAP_MBOX + 32'h4, d);
        // results written at the place AE-2 asked for
        wr(CT2_B + word_t'(4 * (c * (CHUNK + 1) + i)), d);
      end
      wr(MAP_MBOX + 32'hC, 32'h2);
    end
    expect_fault(0, ACC_READ, EPA_B);

    // firmware with another enclave's ID is refused by the mailbox itself
    pv = PRIV_M;
    epa_switch(E_AE2);
    mem(0, ACC_READ, MAP_MBOX + 32'h8, 0, PRIV_M, d, f, e);
    check(!f && e, "mailbox refuses a non-CE enclave ID");
    if (e) n_mbox_refused++;
    pv = PRIV_U;

    // ---------- AE-2 sends ciphertext and tags to AE-3 ----------
    dma(CT2_B, RX3_B, 4 * CT_WORDS, E_AE3, 1, st);
    check(st == DMA_ST_DONE, "ciphertext sent to AE-3");

    // ---------- AE-3: check what goes to the cloud ----------
    for (int c = 0; c < NCHUNK; c++) begin
      n_in = (c == NCHUNK - 1) ? QR_WORDS - c * CHUNK : CHUNK;
      tag = '0;
      for (int i = 0; i < n_in; i++) begin
        exp_ct[c * (CHUNK + 1) + i] = cipher(qr[c * CHUNK + i]);
        tag ^= exp_ct[c * (CHUNK + 1) + i];
      end
      exp_ct[c * (CHUNK + 1) + n_in] = cipher(tag);
    end
    epa_switch(E_AE3);
    for (int i = 0; i < CT_WORDS; i++) begin
      rdw(RX3_B + word_t'(4 * i), d);
      check(d == exp_ct[i], $sformatf("AE-3 ciphertext word %0d", i));
    end
    expect_fault(0, ACC_READ, CT2_B);
    expect_fault(0, ACC_READ, SHM_B);           // not a party to the shared mailbox
    expect_fault(1, ACC_WRITE, SHM_B + 4);
    check(u_se.jobs == NCHUNK, "SE ran one job per chunk");

    // ---------- AE-1 again: the table update on AE-2's exit holds ----------
    epa_switch(E_AE1);
    dma(AE1_B, RX2_B, RX2_S, E_AE2, 0, st);
    check(st == DMA_ST_NOSPACE, "AE-2's old window no longer offered");
    dma(AE1_B + 32'h100, RX2_B + 4 * QR_WORDS, RX2_S - 4 * QR_WORDS, E_AE2, 0, st);
    check(st == DMA_ST_DONE, "AE-2's updated window accepted");
    rdw(MAP_DMA + 32'h18, d);
    check(d == RX2_S - 4 * QR_WORDS, "whole updated window moved");

    // ---------- the Runtime Enclave's own view ----------
    epa_switch(E_RE);
    rdw(AE1_B + 32'h100, d);
    check(d == qr[0], "RE reads an app enclave");
    wr(RE_B + 32'h4, 32'h0000_0013);
    rdw(RE_B + 32'h4, d);
    check(d == 32'h0000_0013, "RE writes itself");
    rdw(UNU_B, d);
    rdw(OS_B, d);
    expect_fault(0, ACC_READ, CE_B);
    expect_fault(0, ACC_READ, EPA_B);

    // ---------- every mechanism happened ----------
    $display("mechanisms: pmp_fault=%0d exec_only=%0d m_bypass=%0d csr_illegal=%0d",
             n_pmp_fault, n_exec_only, n_m_bypass, n_csr_illegal);
    $display("            dma_denied_perm=%0d dma_denied_src=%0d dma_nospace=%0d dma_done=%0d",
             n_dma_denied_perm, n_dma_denied_src, n_dma_nospace, n_dma_done);
    $display("            bus_contention=%0d mbox_notify=%0d mbox_refused=%0d table_refused=%0d switch=%0d shm_msg=%0d",
             n_bus_contention, n_mbox_notify, n_mbox_refused, n_table_refused, n_switch, n_shm_msg);
    check(n_pmp_fault > 0,       "PMP refusal happened");
    check(n_exec_only > 0,       "execute-only access happened");
    check(n_m_bypass > 0,        "M-mode access happened");
    check(n_csr_illegal > 0,     "illegal CSR access happened");
    check(n_dma_denied_perm > 0, "DMA denied by permission happened");
    check(n_dma_denied_src > 0,  "DMA denied by source happened");
    check(n_dma_nospace > 0,     "DMA no-space exception happened");
    check(n_dma_done > 1,        "DMA transfers happened");
    check(n_bus_contention > 0,       "bus contention between core and DMA happened");
    check(n_mbox_notify > 0,     "mailbox notification happened");
    check(n_mbox_refused > 0,    "mailbox refusal happened");
    check(n_table_refused > 0,   "table write refusal happened");
    check(n_switch > 0,          "enclave switch happened");
    check(n_shm_msg > 0,         "shared-memory mailbox message passed");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
