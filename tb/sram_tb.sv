// sram_tb: self-checking testbench of the on-chip SRAM.
//
// Writes random words to random addresses, keeps a model copy, reads them
// back with the one-cycle latency, and checks that an address beyond the
// memory is refused. Runs at the default 64 KiB size.
module sram_tb;
  import xine_pkg::*;

  localparam int W = 16384;

  logic     clk = 0, rst_n = 0;
  bus_req_t slv_req;
  slv_rsp_t slv_rsp;
  int checks = 0, failures = 0;
  word_t model [int];

  sram #(.SRAM_WORDS(W)) dut (.*);

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

  int    idx;
  word_t d;

  initial begin
    slv_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      idx = (k < 2) ? ((k == 0) ? 0 : W - 1) : $urandom_range(0, W - 1);
      d   = $urandom;
      model[idx] = d;
      @(negedge clk);
      slv_req = '{req: 1'b1, we: 1'b1, addr: word_t'(idx * 4), wdata: d, priv: PRIV_U, eid: '0};
      @(negedge clk);
      slv_req.req = 1'b0;
      check(!slv_rsp.err, "write in range accepted");
    end
    foreach (model[i]) begin
      @(negedge clk);
      slv_req = '{req: 1'b1, we: 1'b0, addr: word_t'(i * 4), wdata: '0, priv: PRIV_U, eid: '0};
      @(negedge clk);
      slv_req.req = 1'b0;
      check(!slv_rsp.err && slv_rsp.rdata == model[i], $sformatf("read word %0d", i));
    end
    @(negedge clk);
    slv_req = '{req: 1'b1, we: 1'b1, addr: word_t'(W * 4), wdata: 32'hFFFF_FFFF, priv: PRIV_U, eid: '0};
    @(negedge clk);
    slv_req.req = 1'b0;
    check(slv_rsp.err, "write beyond the memory refused");
    @(negedge clk);
    slv_req = '{req: 1'b1, we: 1'b0, addr: 32'h0, wdata: '0, priv: PRIV_U, eid: '0};
    @(negedge clk);
    slv_req.req = 1'b0;
    check(slv_rsp.rdata == model[0], "out-of-range write did not wrap onto word 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
