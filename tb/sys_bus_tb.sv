// sys_bus_tb: self-checking testbench of the shared system bus.
//
// Two random masters issue requests (holding each until granted) to all
// four slave windows and to unmapped addresses. Slave models answer one
// cycle after their select with data derived from the address. The
// testbench checks round-robin grants under contention, that exactly the
// decoded slave is selected with the granted master's fields, and that the
// response returns to the right master with the right data or err. It
// also counts the stalls it saw.
module sys_bus_tb;
  import xine_pkg::*;

  logic     clk = 0, rst_n = 0;
  bus_req_t m_req [2];
  bus_rsp_t m_rsp [2];
  bus_req_t s_req [NUM_SLAVES];
  slv_rsp_t s_rsp [NUM_SLAVES];

  int checks = 0, failures = 0, stalls = 0;

  sys_bus dut (.*);

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

  function automatic word_t slave_data(int s, word_t a);
    return a ^ (word_t'(s + 1) << 24);
  endfunction

  // slave models
  always_ff @(posedge clk) begin
    for (int s = 0; s < NUM_SLAVES; s++) begin
      s_rsp[s].rdata <= s_req[s].req ? slave_data(s, s_req[s].addr) : '0;
      s_rsp[s].err   <= s_req[s].req && s == 3 && s_req[s].addr[2];
    end
  end

  function automatic int exp_slave(word_t a);
    if (a[31:28] == 0) return 0;
    if (a[31:12] == 20'h10000) return 1;
    if (a[31:12] == 20'h10001) return 2;
    if (a[31:12] == 20'h10002) return 3;
    return 4;
  endfunction

  function automatic word_t rand_addr();
    int sel = $urandom_range(0, 4);
    case (sel)
      0: return {4'h0, 28'($urandom)} & ~32'h3;
      1: return MAP_DMA   | (word_t'($urandom_range(0, 1023)) << 2);
      2: return MAP_AVAIL | (word_t'($urandom_range(0, 1023)) << 2);
      3: return MAP_MBOX  | (word_t'($urandom_range(0, 1023)) << 2);
      default: return 32'h2000_0000 | word_t'($urandom) & 32'h0FFF_FFFC;
    endcase
  endfunction

  logic  last_m, pend_v;
  int    pend_m, pend_s;
  word_t pend_a;
  int    g;
  logic  gact [2];

  initial begin
    for (int m = 0; m < 2; m++) m_req[m] = '0;
    for (int s = 0; s < NUM_SLAVES; s++) s_rsp[s] = '0;
    last_m = 1; pend_v = 0; pend_m = 0; pend_s = 0; pend_a = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      // new requests where the master is idle
      for (int m = 0; m < 2; m++) begin
        if (!m_req[m].req && $urandom_range(0, 2) != 0) begin
          m_req[m].req   = 1'b1;
          m_req[m].we    = 1'($urandom);
          m_req[m].addr  = rand_addr();
          m_req[m].wdata = $urandom;
          m_req[m].priv  = priv_e'($urandom_range(0, 1) ? 2'b11 : 2'b00);
          m_req[m].eid   = eid_t'($urandom);
        end
      end
      #1;
      // response for last cycle's grant
      for (int m = 0; m < 2; m++) begin
        check(m_rsp[m].rvalid == (pend_v && pend_m == m), "rvalid goes to the granted master");
        if (pend_v && pend_m == m)
          check(pend_s == 4 ? m_rsp[m].err :
                (m_rsp[m].rdata == slave_data(pend_s, pend_a) &&
                 m_rsp[m].err == (pend_s == 3 && pend_a[2])),
                $sformatf("response data to master %0d", m));
      end
      // grant
      if (m_req[0].req && m_req[1].req) begin
        g = last_m ? 0 : 1;
        stalls++;
      end else if (m_req[0].req) g = 0;
      else if (m_req[1].req) g = 1;
      else g = -1;
      check(m_rsp[0].gnt == (g == 0) && m_rsp[1].gnt == (g == 1), "round-robin grant");
      gact[0] = m_rsp[0].gnt;
      gact[1] = m_rsp[1].gnt;
      for (int s = 0; s < NUM_SLAVES; s++) begin
        logic exp_sel;
        exp_sel = g >= 0 && exp_slave(m_req[g < 0 ? 0 : g].addr) == s;
        check(s_req[s].req == exp_sel, $sformatf("select of slave %0d", s));
        if (exp_sel)
          check(s_req[s].addr == m_req[g].addr && s_req[s].we == m_req[g].we &&
                s_req[s].wdata == m_req[g].wdata && s_req[s].eid == m_req[g].eid &&
                s_req[s].priv == m_req[g].priv, "forwarded fields");
      end
      pend_v = g >= 0;
      if (g >= 0) begin
        pend_m = g; pend_a = m_req[g].addr; pend_s = exp_slave(m_req[g].addr);
        last_m = 1'(g);
      end
      @(posedge clk);
      #1;
      for (int m = 0; m < 2; m++) if (gact[m]) m_req[m].req = 1'b0;
    end
    check(stalls > 100, $sformatf("contention seen (%0d stalls)", stalls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
