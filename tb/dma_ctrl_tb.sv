// dma_ctrl_tb: self-checking testbench of the inter-enclave DMA controller.
//
// Surrounds the controller with models: a bus memory that may stall grants
// and answers one cycle after a grant, a security check that allows a
// request only if a permission table says the requester may send to the
// destination and the source lies inside the requester's own region, and
// an availability check against a window per enclave. Runs the outcomes of
// the access-control flow (denied by permission, denied by source
// ownership, no space, bus error, success) and checks status, interrupts,
// the data moved, that nothing was written on a refusal, and the cycle
// count of a transfer on a free bus (2 + 4 per word).
module dma_ctrl_tb;
  import xine_pkg::*;

  logic     clk = 0, rst_n = 0;
  bus_req_t slv_req;
  slv_rsp_t slv_rsp;
  bus_req_t m_req;
  bus_rsp_t m_rsp;
  eid_t     chk_src_eid, chk_dst_eid;
  priv_e    chk_priv;
  word_t    chk_first_addr, chk_last_addr, av_dst, av_len;
  logic     sec_allow, sec_deny_perm, sec_deny_src, av_fits;
  logic     done_irq, err_irq, busy;

  int checks = 0, failures = 0;

  dma_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- models ----------------
  word_t mem [int];
  logic  stall_mode = 0;
  int    writes = 0;
  logic  perm [16][16];
  word_t own_lo [16], own_hi [16], win_lo [16], win_hi [16];

  function automatic word_t rd_mem(word_t a);
    return mem.exists(int'(a >> 2)) ? mem[int'(a >> 2)] : (a ^ 32'h5A5A_0000);
  endfunction

  always_comb begin
    sec_deny_perm = !perm[chk_src_eid][chk_dst_eid];
    sec_deny_src  = !(chk_first_addr >= own_lo[chk_src_eid] && chk_last_addr < own_hi[chk_src_eid]
                      && chk_last_addr >= chk_first_addr);
    sec_allow     = !sec_deny_perm && !sec_deny_src;
    av_fits       = av_dst >= win_lo[chk_dst_eid] && av_dst + av_len <= win_hi[chk_dst_eid];
  end

  logic  gnt_ok;
  logic  pend;
  logic  pend_we;
  word_t pend_a;
  always_comb begin
    m_rsp.gnt = m_req.req && gnt_ok;
  end
  always_ff @(posedge clk) begin
    gnt_ok <= stall_mode ? 1'($urandom_range(0, 2) == 0) : 1'b1;
    pend   <= m_rsp.gnt;
    pend_a <= m_req.addr;
    pend_we <= m_req.we;
    if (m_rsp.gnt && m_req.we) begin
      mem[int'(m_req.addr >> 2)] = m_req.wdata;
      writes++;
    end
  end
  always_comb begin
    m_rsp.rvalid = pend;
    m_rsp.rdata  = pend && !pend_we ? rd_mem(pend_a) : '0;
    m_rsp.err    = pend && pend_a[31:28] == 4'hF;
  end

  // ---------------- register access ----------------
  task automatic reg_acc(input logic we, input word_t off, input word_t d, input eid_t e,
                         output word_t rd, output logic err);
    @(negedge clk);
    slv_req = '{req: 1'b1, we: we, addr: MAP_DMA + off, wdata: d, priv: PRIV_U, eid: e};
    @(negedge clk);
    slv_req.req = 1'b0;
    rd  = slv_rsp.rdata;
    err = slv_rsp.err;
  endtask

  word_t rd;
  logic  err;

  task automatic setup_dma(input word_t src, input word_t dst, input word_t len, input eid_t de,
                         input eid_t me);
    reg_acc(1, 32'h00, src, me, rd, err);
    reg_acc(1, 32'h04, dst, me, rd, err);
    reg_acc(1, 32'h08, len, me, rd, err);
    reg_acc(1, 32'h0C, word_t'(de), me, rd, err);
  endtask

  // start, then wait for an interrupt; returns cycles from the start edge
  task automatic run(input eid_t me, output int cycles);
    @(negedge clk);
    slv_req = '{req: 1'b1, we: 1'b1, addr: MAP_DMA + 32'h10, wdata: 32'h1, priv: PRIV_U, eid: me};
    @(posedge clk);
    #1 slv_req.req = 1'b0;
    cycles = 0;
    while (!done_irq && !err_irq) begin
      @(posedge clk);
      #1 cycles++;
    end
  endtask

  task automatic expect_status(input dma_status_e st, input string what);
    reg_acc(0, 32'h14, 0, '0, rd, err);
    check(rd[2:0] == st, $sformatf("%s: status %0d expected %0d", what, rd[2:0], st));
  endtask

  int    cyc, w0;
  word_t src_data [64];

  initial begin
    slv_req = '0;
    for (int i = 0; i < 16; i++) begin
      for (int j = 0; j < 16; j++) perm[i][j] = 0;
      own_lo[i] = 32'h2000 * i;  own_hi[i] = 32'h2000 * (i + 1);
      win_lo[i] = 32'h2000 * i + 32'h1000; win_hi[i] = 32'h2000 * i + 32'h1100;
    end
    perm[3][4] = 1;   // AE-1 (3) may send to AE-2 (4)
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. destination not allowed by the security CSR
    setup_dma(32'h6000, 32'hA000, 32'h10, 4'd5, 4'd3);
    w0 = writes;
    run(4'd3, cyc);
    check(err_irq && !done_irq, "denied: error interrupt");
    expect_status(DMA_ST_DENIED, "denied by permission");
    check(rd[8] && !rd[9] && rd[7:4] == 4'd3, "denied: reason is permission, requester recorded");
    check(writes == w0, "denied: nothing written");
    check(cyc == 1, "denied after one check cycle");
    reg_acc(1, 32'h10, 32'h2, 4'd3, rd, err);
    check(!err_irq && !done_irq, "clear drops the interrupts");

    // 2. source not owned by the requester (pulling from AE-2)
    setup_dma(32'h8000, 32'h9000, 32'h10, 4'd4, 4'd3);
    run(4'd3, cyc);
    expect_status(DMA_ST_DENIED, "denied by source");
    check(!rd[8] && rd[9], "denied: reason is the source range");
    check(writes == w0, "source denial: nothing written");
    reg_acc(1, 32'h10, 32'h2, 4'd3, rd, err);

    // 3. destination lacks space: exception, terminate
    setup_dma(32'h6000, 32'h9000, 32'h104, 4'd4, 4'd3);
    run(4'd3, cyc);
    check(err_irq, "no space: exception raised");
    expect_status(DMA_ST_NOSPACE, "no space");
    check(writes == w0, "no space: nothing written");
    check(cyc == 2, "no space found after two check cycles");
    reg_acc(1, 32'h10, 32'h2, 4'd3, rd, err);

    // 4. zero length is refused
    setup_dma(32'h6000, 32'h9000, 32'h0, 4'd4, 4'd3);
    run(4'd3, cyc);
    expect_status(DMA_ST_DENIED, "zero length");
    reg_acc(1, 32'h10, 32'h2, 4'd3, rd, err);

    // 5. successful transfer on a free bus: 16 words, timing checked
    for (int i = 0; i < 16; i++) begin
      src_data[i] = $urandom;
      mem[int'((32'h6000 >> 2) + i)] = src_data[i];
    end
    setup_dma(32'h6000, 32'h9000, 32'h40, 4'd4, 4'd3);
    run(4'd3, cyc);
    check(done_irq && !err_irq, "transfer done");
    expect_status(DMA_ST_DONE, "done");
    check(cyc == 2 + 4 * 16, $sformatf("16 words in %0d cycles, expected %0d", cyc, 2 + 4 * 16));
    for (int i = 0; i < 16; i++)
      check(mem[int'((32'h9000 >> 2) + i)] == src_data[i], $sformatf("word %0d moved", i));
    check(!mem.exists(int'((32'h9040 >> 2))), "nothing written past the end");
    reg_acc(0, 32'h18, 0, 4'd3, rd, err);
    check(rd == 32'h40, "MOVED counts 64 bytes");
    reg_acc(1, 32'h10, 32'h2, 4'd3, rd, err);

    // 6. successful transfer with a stalling bus, and busy refusals
    stall_mode = 1;
    for (int i = 0; i < 64; i++) begin
      src_data[i] = $urandom;
      mem[int'((32'h6100 >> 2) + i)] = src_data[i];
    end
    setup_dma(32'h6100, 32'h9000, 32'h100, 4'd4, 4'd3);
    @(negedge clk);
    slv_req = '{req: 1'b1, we: 1'b1, addr: MAP_DMA + 32'h10, wdata: 32'h1, priv: PRIV_U, eid: 4'd3};
    @(negedge clk);
    slv_req.req = 1'b0;
    check(busy, "busy after start");
    reg_acc(1, 32'h00, 32'h0, 4'd3, rd, err);
    check(err, "SRC write while busy refused");
    reg_acc(1, 32'h10, 32'h1, 4'd3, rd, err);
    check(err, "second start while busy refused");
    cyc = 0;
    while (!done_irq && !err_irq && cyc < 5000) begin
      @(posedge clk); #1 cyc++;
    end
    check(done_irq, "stalled transfer done");
    check(cyc > 4 * 64, "stalls lengthen the transfer");
    for (int i = 0; i < 64; i++)
      check(mem[int'((32'h9000 >> 2) + i)] == src_data[i], $sformatf("stalled word %0d moved", i));
    reg_acc(0, 32'h00, 0, 4'd3, rd, err);
    check(rd == 32'h6100, "SRC unchanged by the refused write");
    reg_acc(1, 32'h10, 32'h2, 4'd3, rd, err);
    stall_mode = 0;

    // 7. bus error during the move (requester is M-mode firmware, id 0)
    for (int j = 0; j < 16; j++) perm[0][j] = 1;
    own_lo[0] = 32'hF000_0000; own_hi[0] = 32'hF001_0000;
    setup_dma(32'hF000_0000, 32'h9000, 32'h10, 4'd4, 4'd0);
    run(4'd0, cyc);
    check(err_irq, "bus error raises the error interrupt");
    expect_status(DMA_ST_BUSERR, "bus error");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
