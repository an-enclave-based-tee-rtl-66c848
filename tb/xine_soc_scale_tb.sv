// xine_soc_scale_tb: sixteen enclaves on the default-size design.
//
// The architecture allows up to sixteen enclaves, the number of PMP
// entries. This testbench splits the 64 KiB SRAM into sixteen 4 KiB
// enclaves (ID i at 0x1000*i) and gives each the top 1 KiB of its region
// as its receive window in the Availability Table. The DMA permissions form
// a ring: enclave i may send only to enclave i+1 (mod 16). Playing the
// arbitrator, the testbench switches to each enclave in turn. The enclave
// writes eight words of its own, sends them to its successor (must be
// DONE), tries to send them to the enclave after that (must be DENIED) and
// checks that it cannot read its successor's memory. Finally every enclave
// checks that its window holds its predecessor's words.
module xine_soc_scale_tb;
  import xine_pkg::*;

  localparam int NE = 16;
  localparam int NW = 8;

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
  logic        se_req_valid, se_rsp_full, se_doorbell;
  word_t       se_req_data;
  logic        dma_done_irq, dma_err_irq, mbox_irq;

  xine_soc dut (
    .clk, .rst_n, .core_req, .core_rsp, .core_acc_fault,
    .csr_we, .csr_re, .csr_addr, .csr_wdata, .csr_priv, .csr_rdata, .csr_illegal, .cur_eid,
    .se_req_valid, .se_req_data, .se_req_pop (1'b0), .se_rsp_push (1'b0), .se_rsp_data ('0),
    .se_rsp_full, .se_doorbell, .se_doorbell_ack (1'b0), .se_done (1'b0),
    .dma_done_irq, .dma_err_irq, .mbox_irq
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_done = 0, n_denied = 0, n_fault = 0;

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

  priv_e pv;

  task automatic mem(input logic we, input word_t a, input word_t d,
                     output word_t rd, output logic fault, output logic err);
    @(negedge clk);
    core_req = '{req: 1'b1, we: we, acc: we ? ACC_WRITE : ACC_READ, addr: a, wdata: d, priv: pv};
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
    rd  = core_rsp.rdata;
    err = core_rsp.err;
  endtask

  word_t rd;
  logic  f, e;

  task automatic wr(input word_t a, input word_t d);
    mem(1, a, d, rd, f, e);
    check(!f && !e, $sformatf("write %h", a));
  endtask
  task automatic rdw(input word_t a, output word_t d);
    mem(0, a, 0, d, f, e);
    check(!f && !e, $sformatf("read %h", a));
  endtask
  task automatic csr_w(input logic [11:0] a, input word_t d);
    @(negedge clk);
    csr_we = 1; csr_addr = a; csr_wdata = d; csr_priv = PRIV_M;
    #1 check(!csr_illegal, "M-mode CSR write");
    @(negedge clk);
    csr_we = 0;
  endtask

  function automatic word_t region(int i);
    return word_t'(i) << 12;
  endfunction
  function automatic word_t payload(int i, int k);
    return {8'(i), 8'(k), 16'hC0DE} ^ (word_t'(i) * 32'h0101_0101);
  endfunction

  task automatic switch_to(input int i);
    pv = PRIV_M;
    csr_w(CSR_PMPCFG0, 32'h0);
    csr_w(CSR_PMPADDR0 + 0, (region(i) >> 2) | ((32'h1000 >> 3) - 1));
    csr_w(CSR_PMPADDR0 + 1, (32'h1000_0000 >> 2) | ((32'h2000 >> 3) - 1));
    csr_w(CSR_PMPCFG0, 32'h0000_1B1F);   // entry 0 NAPOT RWX, entry 1 NAPOT RW
    csr_w(CSR_SEC_EID, word_t'(i));
    check(cur_eid == eid_t'(i), "enclave ID switched");
    pv = PRIV_U;
  endtask

  task automatic dma(input word_t src, input word_t dst, input word_t len, input int de,
                     output dma_status_e st);
    word_t x;
    wr(MAP_DMA + 32'h00, src);
    wr(MAP_DMA + 32'h04, dst);
    wr(MAP_DMA + 32'h08, len);
    wr(MAP_DMA + 32'h0C, word_t'(de));
    wr(MAP_DMA + 32'h10, 32'h1);
    while (!dma_done_irq && !dma_err_irq) @(negedge clk);
    rdw(MAP_DMA + 32'h14, x);
    st = dma_status_e'(x[2:0]);
    wr(MAP_DMA + 32'h10, 32'h2);
  endtask

  dma_status_e st;
  word_t d;
  int nxt, nxt2, prv;

  initial begin
    core_req = '0;
    pv = PRIV_M;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int i = 0; i < NE; i++) begin
      wr(MAP_AVAIL + word_t'(8 * i),     region(i) + 32'hC00);
      wr(MAP_AVAIL + word_t'(8 * i + 4), 32'h400);
      csr_w(CSR_SEC_DMA_PERM0 + 12'(i), 32'h1 << ((i + 1) % NE));
    end

    for (int i = 0; i < NE; i++) begin
      nxt  = (i + 1) % NE;
      nxt2 = (i + 2) % NE;
      switch_to(i);
      for (int k = 0; k < NW; k++) wr(region(i) + 32'h100 + word_t'(4 * k), payload(i, k));
      dma(region(i) + 32'h100, region(nxt) + 32'hC00, 4 * NW, nxt, st);
      check(st == DMA_ST_DONE, $sformatf("enclave %0d -> %0d done", i, nxt));
      if (st == DMA_ST_DONE) n_done++;
      dma(region(i) + 32'h100, region(nxt2) + 32'hC00, 4 * NW, nxt2, st);
      check(st == DMA_ST_DENIED, $sformatf("enclave %0d -> %0d denied", i, nxt2));
      if (st == DMA_ST_DENIED) n_denied++;
      mem(0, region(nxt) + 32'hC00, 0, d, f, e);
      check(f, $sformatf("enclave %0d cannot read enclave %0d", i, nxt));
      if (f) n_fault++;
    end

    for (int j = 0; j < NE; j++) begin
      prv = (j + NE - 1) % NE;
      switch_to(j);
      for (int k = 0; k < NW; k++) begin
        rdw(region(j) + 32'hC00 + word_t'(4 * k), d);
        check(d == payload(prv, k), $sformatf("enclave %0d got word %0d of enclave %0d", j, k, prv));
      end
    end

    $display("transfers done=%0d denied=%0d pmp_faults=%0d", n_done, n_denied, n_fault);
    check(n_done == NE && n_denied == NE && n_fault == NE, "every enclave took part");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
