// se_mailbox_tb: self-checking testbench of the Crypto Enclave mailbox.
//
// Plays the Crypto Enclave on the bus side and the secure-element core on
// the other: fills the request queue to full, checks that a push beyond
// full and any access from another enclave are refused without effect,
// checks the doorbell, drains the request queue on the SE side in order,
// returns a transformed response, checks the done notification and reads
// the response back in order until the empty refusal.
module se_mailbox_tb;
  import xine_pkg::*;

  localparam int D = 8;
  localparam eid_t CE = EID_CE;

  logic     clk = 0, rst_n = 0;
  bus_req_t slv_req;
  slv_rsp_t slv_rsp;
  logic     ce_irq;
  logic     se_req_valid, se_rsp_full, se_doorbell;
  word_t    se_req_data;
  logic     se_req_pop = 0, se_rsp_push = 0, se_doorbell_ack = 0, se_done = 0;
  word_t    se_rsp_data = '0;

  int checks = 0, failures = 0;

  se_mailbox #(.MBOX_DEPTH(D), .CE_EID(CE)) dut (.*);

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

  task automatic access(input logic we, input word_t off, input word_t d, input eid_t e,
                        output word_t rd, output logic err);
    @(negedge clk);
    slv_req = '{req: 1'b1, we: we, addr: MAP_MBOX + off, wdata: d, priv: PRIV_U, eid: e};
    @(negedge clk);
    slv_req.req = 1'b0;
    rd  = slv_rsp.rdata;
    err = slv_rsp.err;
  endtask

  word_t rd, msg [D];
  logic  err;

  initial begin
    slv_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    access(0, 32'h8, 0, CE, rd, err);
    check(!err && rd == 32'h0000_000A, "status after reset: both queues empty");

    for (int i = 0; i < D; i++) begin
      msg[i] = $urandom;
      access(1, 32'h0, msg[i], CE, rd, err);
      check(!err, "CE push accepted");
    end
    access(1, 32'h0, 32'h1234, CE, rd, err);
    check(err, "push into a full queue refused");
    access(0, 32'h8, 0, CE, rd, err);
    check(rd[0] && !rd[1] && rd[15:8] == 8'(D), "status: request queue full");

    // another enclave can neither push, read nor ring
    access(1, 32'h0, 32'h5555, 4'd3, rd, err);
    check(err, "push from an app enclave refused");
    access(0, 32'h8, 0, 4'd3, rd, err);
    check(err && rd == '0, "status read from an app enclave refused");
    access(1, 32'hC, 32'h1, 4'd4, rd, err);
    check(err && !se_doorbell, "doorbell from an app enclave refused");

    access(1, 32'hC, 32'h1, CE, rd, err);
    check(!err && se_doorbell, "CE rings the doorbell");
    @(negedge clk); se_doorbell_ack = 1; @(negedge clk); se_doorbell_ack = 0;
    check(!se_doorbell, "SE acknowledges the doorbell");

    // SE core drains the request queue, in order, and answers
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      check(se_req_valid && se_req_data == msg[i], $sformatf("SE reads word %0d in order", i));
      se_req_pop = 1;
      se_rsp_push = 1; se_rsp_data = msg[i] ^ 32'hA5A5_A5A5;
      @(negedge clk);
      se_req_pop = 0; se_rsp_push = 0;
    end
    check(!se_req_valid && se_rsp_full, "request queue empty, response queue full");
    check(!ce_irq, "no notification before done");
    @(negedge clk); se_done = 1; @(negedge clk); se_done = 0;
    check(ce_irq, "done raises the CE notification");

    access(0, 32'h4, 0, 4'd3, rd, err);
    check(err && rd == '0, "app enclave cannot read the response");
    for (int i = 0; i < D; i++) begin
      access(0, 32'h4, 0, CE, rd, err);
      check(!err && rd == (msg[i] ^ 32'hA5A5_A5A5), $sformatf("CE reads response %0d", i));
    end
    access(0, 32'h4, 0, CE, rd, err);
    check(err, "read from an empty queue refused");
    access(1, 32'hC, 32'h2, CE, rd, err);
    check(!ce_irq, "CE clears the notification");
    access(0, 32'h10, 0, CE, rd, err);
    check(err, "unmapped offset refused");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
