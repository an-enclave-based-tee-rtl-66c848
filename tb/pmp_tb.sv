// pmp_tb: self-checking testbench of the PMP unit.
//
// Programs a mix of NAPOT, TOR and NA4 entries through the CSR port,
// including an execute-only region like the Runtime Enclave seen from an
// app enclave and a locked entry, then checks random addresses on all
// three check ports against a model that describes each region by its
// lower and upper byte bound and permissions, never by the pmpaddr
// encoding. Also checks CSR read-back, the lock rule, the R=0/W=1 rule and
// M-mode behaviour.
module pmp_tb;
  import xine_pkg::*;

  localparam int N = 16;
  localparam int P = 3;

  logic        clk = 0, rst_n = 0;
  logic        csr_we = 0;
  logic [11:0] csr_addr = '0;
  word_t       csr_wdata = '0, csr_rdata;
  logic        csr_hit;
  word_t       chk_addr  [P];
  acc_e        chk_acc   [P];
  priv_e       chk_priv  [P];
  logic        chk_allow [P];
  logic        chk_match [P];
  logic [3:0]  chk_idx   [P];

  int checks = 0, failures = 0;

  pmp #(.NUM_ENTRIES(N), .NUM_PORTS(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model of the programmed regions
  logic        m_on [N];
  logic [32:0] m_lo [N], m_hi [N];
  logic        m_r [N], m_w [N], m_x [N], m_l [N];
  logic [7:0]  cfgb [N];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic csr_write(input logic [11:0] a, input word_t d);
    @(negedge clk);
    csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk);
    csr_we = 0;
  endtask

  task automatic csr_read(input logic [11:0] a, output word_t d);
    @(negedge clk);
    csr_addr = a;
    #1 d = csr_rdata;
    check(csr_hit, $sformatf("csr_hit for %h", a));
  endtask

  // perms: {l, x, w, r}
  task automatic set_napot(input int i, input logic [31:0] base, input logic [31:0] size,
                           input logic [3:0] perm);
    m_on[i] = 1; m_lo[i] = {1'b0, base}; m_hi[i] = {1'b0, base} + {1'b0, size};
    {m_l[i], m_x[i], m_w[i], m_r[i]} = perm;
    cfgb[i] = {perm[3], 2'b00, 2'd3, perm[2:0]};
    csr_write(CSR_PMPADDR0 + 12'(i), (base >> 2) | ((size >> 3) - 1));
  endtask

  task automatic set_na4(input int i, input logic [31:0] base, input logic [3:0] perm);
    m_on[i] = 1; m_lo[i] = {1'b0, base}; m_hi[i] = {1'b0, base} + 33'd4;
    {m_l[i], m_x[i], m_w[i], m_r[i]} = perm;
    cfgb[i] = {perm[3], 2'b00, 2'd2, perm[2:0]};
    csr_write(CSR_PMPADDR0 + 12'(i), base >> 2);
  endtask

  // TOR entry i uses pmpaddr[i-1] (already written) as its lower bound
  task automatic set_tor(input int i, input logic [31:0] lo, input logic [31:0] hi,
                         input logic [3:0] perm);
    m_on[i] = 1; m_lo[i] = {1'b0, lo}; m_hi[i] = {1'b0, hi};
    {m_l[i], m_x[i], m_w[i], m_r[i]} = perm;
    cfgb[i] = {perm[3], 2'b00, 2'd1, perm[2:0]};
    csr_write(CSR_PMPADDR0 + 12'(i), hi >> 2);
  endtask

  task automatic write_cfgs();
    for (int j = 0; j < N / 4; j++)
      csr_write(CSR_PMPCFG0 + 12'(j), {cfgb[4*j+3], cfgb[4*j+2], cfgb[4*j+1], cfgb[4*j]});
  endtask

  function automatic logic model_allow(input logic [31:0] a, input acc_e acc, input priv_e pv,
                                       output logic hit, output int idx);
    logic [32:0] aa = {1'b0, a[31:2], 2'b00};
    hit = 0; idx = 0;
    for (int i = 0; i < N; i++) begin
      if (m_on[i] && aa >= m_lo[i] && aa < m_hi[i]) begin
        hit = 1; idx = i;
        if (pv == PRIV_M && !m_l[i]) return 1;
        return acc == ACC_READ ? m_r[i] : acc == ACC_WRITE ? m_w[i] : m_x[i];
      end
    end
    return pv == PRIV_M;
  endfunction

  task automatic probe(input logic [31:0] a, input acc_e acc, input priv_e pv);
    logic exp, hit;
    int   idx;
    exp = model_allow(a, acc, pv, hit, idx);
    for (int p = 0; p < P; p++) begin
      chk_addr[p] = a; chk_acc[p] = acc; chk_priv[p] = pv;
    end
    #1;
    for (int p = 0; p < P; p++) begin
      check(chk_allow[p] == exp, $sformatf("port %0d addr %h acc %0d priv %0d allow %0d exp %0d",
                                           p, a, acc, pv, chk_allow[p], exp));
      check(chk_match[p] == hit && (!hit || int'(chk_idx[p]) == idx),
            $sformatf("port %0d addr %h match/idx", p, a));
    end
  endtask

  logic [31:0] a;
  word_t       d;
  acc_e        acc;
  priv_e       pv;

  initial begin
    for (int i = 0; i < N; i++) begin
      m_on[i] = 0; cfgb[i] = 0; m_l[i] = 0; m_r[i] = 0; m_w[i] = 0; m_x[i] = 0;
      m_lo[i] = 0; m_hi[i] = 0;
    end
    for (int p = 0; p < P; p++) begin
      chk_addr[p] = '0; chk_acc[p] = ACC_READ; chk_priv[p] = PRIV_U;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // after reset nothing matches: U refused, M allowed
    probe(32'h0000_2000, ACC_READ, PRIV_U);
    probe(32'h0000_2000, ACC_WRITE, PRIV_M);

    // an app enclave's view: own region RWX, runtime execute-only, MMIO window
    set_napot(0, 32'h0000_2000, 32'h2000, 4'b0111);   // own region
    set_napot(1, 32'h0000_E000, 32'h2000, 4'b0100);   // runtime: X only
    set_napot(2, 32'h1000_0000, 32'h2000, 4'b0011);   // DMA + table registers: RW
    csr_write(CSR_PMPADDR0 + 12'd3, 32'h0000_8000 >> 2); // lower bound of TOR entry 4
    m_on[3] = 0; cfgb[3] = 8'h00;
    set_tor(4, 32'h0000_8000, 32'h0000_A000, 4'b0001); // read-only TOR
    set_na4(5, 32'h0000_3000, 4'b0000);                // shadowed by entry 0
    set_na4(6, 32'h0000_0100, 4'b1001);                // locked, read only, binds M too
    write_cfgs();

    // read-back
    csr_read(CSR_PMPADDR0, d);
    check(d == ((32'h2000 >> 2) | 32'h3FF), "pmpaddr0 read-back");
    csr_read(CSR_PMPCFG0 + 12'd1, d);
    check(d[7:0] == 8'h09 && d[15:8] == 8'h10 && d[23:16] == 8'h91, "pmpcfg1 read-back");

    // lock: writes to entry 6 are ignored
    csr_write(CSR_PMPADDR0 + 12'd6, 32'h0);
    csr_read(CSR_PMPADDR0 + 12'd6, d);
    check(d == (32'h100 >> 2), "locked pmpaddr keeps its value");
    csr_write(CSR_PMPCFG0 + 12'd1, {8'h00, 8'h00, 8'h17, 8'h09});
    csr_read(CSR_PMPCFG0 + 12'd1, d);
    check(d[23:16] == 8'h91, "locked pmpcfg keeps its value");
    check(d[15:8] == 8'h17, "unlocked byte of the same CSR is written");
    // entry 5 is now R/W/X in NA4 mode; the model follows
    m_r[5] = 1; m_w[5] = 1; m_x[5] = 1; cfgb[5] = 8'h17;

    // reserved R=0/W=1 is stored as no access
    csr_write(CSR_PMPCFG0 + 12'd2, 32'h0000_0012);  // entry 8: NA4, W only
    csr_read(CSR_PMPCFG0 + 12'd2, d);
    check(d[7:0] == 8'h10, "R=0/W=1 legalised to R=0/W=0");
    csr_write(CSR_PMPADDR0 + 12'd8, 32'h0000_C000 >> 2);
    m_on[8] = 1; m_lo[8] = 33'h0_0000_C000; m_hi[8] = 33'h0_0000_C004;
    m_r[8] = 0; m_w[8] = 0; m_x[8] = 0; m_l[8] = 0;

    // directed probes
    probe(32'h0000_2000, ACC_WRITE, PRIV_U);
    probe(32'h0000_3FFC, ACC_EXEC,  PRIV_U);
    probe(32'h0000_4000, ACC_READ,  PRIV_U);
    probe(32'h0000_E010, ACC_EXEC,  PRIV_U);
    probe(32'h0000_E010, ACC_READ,  PRIV_U);
    probe(32'h0000_E010, ACC_WRITE, PRIV_U);
    probe(32'h0000_8000, ACC_READ,  PRIV_U);
    probe(32'h0000_9FFC, ACC_WRITE, PRIV_U);
    probe(32'h0000_A000, ACC_READ,  PRIV_U);
    probe(32'h0000_7FFC, ACC_READ,  PRIV_U);
    probe(32'h0000_0100, ACC_WRITE, PRIV_M);
    probe(32'h0000_0100, ACC_READ,  PRIV_M);
    probe(32'h0000_C000, ACC_WRITE, PRIV_U);
    probe(32'h0000_C000, ACC_WRITE, PRIV_M);
    probe(32'h1000_1FFC, ACC_WRITE, PRIV_U);
    probe(32'h1000_2000, ACC_READ,  PRIV_U);

    // random probes, biased to the programmed area
    for (int k = 0; k < 3000; k++) begin
      a   = ($urandom_range(0, 3) == 0) ? {16'h1000, 16'($urandom)} : {16'h0000, 16'($urandom)};
      acc = acc_e'($urandom_range(0, 2));
      pv  = ($urandom_range(0, 3) == 0) ? PRIV_M : PRIV_U;
      probe(a, acc, pv);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
