// sec_csr_tb: self-checking testbench of the security CSR.
//
// Writes random DMA permission rows and enclave IDs through the CSR port,
// reads them back, and checks the DMA verdict (allow, deny_perm, deny_src)
// for random requests and PMP results against a model kept in the
// testbench.
module sec_csr_tb;
  import xine_pkg::*;

  localparam int NE = 16;

  logic        clk = 0, rst_n = 0;
  logic        csr_we = 0;
  logic [11:0] csr_addr = '0;
  word_t       csr_wdata = '0, csr_rdata;
  logic        csr_hit;
  eid_t        cur_eid;
  eid_t        chk_src_eid = '0, chk_dst_eid = '0;
  priv_e       chk_priv = PRIV_U;
  logic        pmp_first_allow = 0, pmp_first_match = 0, pmp_last_allow = 0, pmp_last_match = 0;
  logic [3:0]  pmp_first_idx = '0, pmp_last_idx = '0;
  logic        chk_allow, deny_perm, deny_src;

  int checks = 0, failures = 0;
  logic [NE-1:0] model [NE];

  sec_csr #(.NUM_ENCLAVES(NE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic csr_write(input logic [11:0] a, input word_t d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

  logic exp_perm, exp_src, same;

  initial begin
    for (int i = 0; i < NE; i++) model[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cur_eid == '0, "enclave ID resets to 0");
    csr_addr = CSR_SEC_DMA_PERM0 + 12'd5; #1;
    check(csr_hit && csr_rdata == '0, "permission rows reset to 0");
    csr_addr = 12'h7CF; #1;
    check(!csr_hit, "an unused number does not hit");

    for (int i = 0; i < NE; i++) begin
      model[i] = NE'($urandom);
      csr_write(CSR_SEC_DMA_PERM0 + 12'(i), word_t'(model[i]));
    end
    for (int i = 0; i < NE; i++) begin
      csr_addr = CSR_SEC_DMA_PERM0 + 12'(i); #1;
      check(csr_hit && csr_rdata == word_t'(model[i]), $sformatf("perm row %0d read-back", i));
    end
    for (int k = 0; k < 8; k++) begin
      eid_t e;
      e = eid_t'($urandom);
      csr_write(CSR_SEC_EID, {$urandom} & 32'hFFFF_FFF0 | word_t'(e));
      check(cur_eid == e, "enclave ID written");
      csr_addr = CSR_SEC_EID; #1;
      check(csr_rdata == word_t'(e), "enclave ID read-back");
    end

    for (int k = 0; k < 4000; k++) begin
      chk_src_eid     = eid_t'($urandom);
      chk_dst_eid     = eid_t'($urandom);
      chk_priv        = ($urandom_range(0, 7) == 0) ? PRIV_M : PRIV_U;
      pmp_first_allow = $urandom_range(0, 7) != 0;
      pmp_last_allow  = $urandom_range(0, 7) != 0;
      pmp_first_match = $urandom_range(0, 7) != 0;
      pmp_last_match  = $urandom_range(0, 7) != 0;
      pmp_first_idx   = 4'($urandom_range(0, 2));
      pmp_last_idx    = ($urandom_range(0, 3) == 0) ? 4'($urandom_range(0, 2)) : pmp_first_idx;
      #1;
      exp_perm = !model[chk_src_eid][chk_dst_eid];
      same     = chk_priv == PRIV_M ||
                 (pmp_first_match && pmp_last_match && pmp_first_idx == pmp_last_idx);
      exp_src  = !(pmp_first_allow && pmp_last_allow && same);
      check(deny_perm == exp_perm, "deny_perm");
      check(deny_src == exp_src, "deny_src");
      check(chk_allow == (!exp_perm && !exp_src), "allow");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
