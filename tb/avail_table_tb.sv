// avail_table_tb: self-checking testbench of the Availability Table.
//
// Fills the table from M-mode, checks that U-mode writes are refused and
// that every enclave can read it, then checks the fit verdict for random
// (enclave, destination, length) triples, including the edges of each
// window, against a model.
module avail_table_tb;
  import xine_pkg::*;

  localparam int NE = 16;

  logic     clk = 0, rst_n = 0;
  bus_req_t slv_req;
  slv_rsp_t slv_rsp;
  eid_t     chk_eid = '0;
  word_t    chk_dst = '0, chk_len = '0;
  logic     chk_fits;

  int checks = 0, failures = 0;
  word_t mbase [NE], msize [NE];

  avail_table #(.NUM_ENCLAVES(NE)) dut (.*);

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

  task automatic access(input logic we, input word_t off, input word_t d, input priv_e pv,
                        input eid_t e, output word_t rd, output logic err);
    @(negedge clk);
    slv_req = '{req: 1'b1, we: we, addr: MAP_AVAIL + off, wdata: d, priv: pv, eid: e};
    @(negedge clk);
    slv_req.req = 1'b0;
    rd  = slv_rsp.rdata;
    err = slv_rsp.err;
  endtask

  word_t rd;
  logic  err, exp;
  logic [32:0] e1, e2;

  initial begin
    slv_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk_eid = 4'd3; chk_dst = 32'h100; chk_len = 32'd4; #1;
    check(!chk_fits, "empty table after reset has no space");

    for (int i = 0; i < NE; i++) begin
      mbase[i] = {16'h0, 16'($urandom) & 16'hFFFC};
      msize[i] = word_t'($urandom_range(0, 4096)) & 32'hFFFC;
      access(1, word_t'(8*i),     mbase[i], PRIV_M, '0, rd, err);
      check(!err, "M-mode base write accepted");
      access(1, word_t'(8*i + 4), msize[i], PRIV_M, '0, rd, err);
      check(!err, "M-mode size write accepted");
    end
    // U-mode writes are refused and change nothing
    access(1, 32'h0, 32'hDEAD_0000, PRIV_U, 4'd3, rd, err);
    check(err, "U-mode write refused");
    access(0, 32'h0, 32'h0, PRIV_U, 4'd4, rd, err);
    check(!err && rd == mbase[0], "U-mode read allowed, base unchanged");
    for (int i = 0; i < NE; i++) begin
      access(0, word_t'(8*i + 4), 32'h0, PRIV_U, eid_t'(i), rd, err);
      check(!err && rd == msize[i], $sformatf("size %0d read-back", i));
    end
    access(0, word_t'(8*NE), 32'h0, PRIV_M, '0, rd, err);
    check(err, "access beyond the table refused");

    for (int k = 0; k < 4000; k++) begin
      int i, sel;
      i   = $urandom_range(0, NE - 1);
      sel = $urandom_range(0, 3);
      chk_eid = eid_t'(i);
      case (sel)
        0: begin chk_dst = mbase[i]; chk_len = msize[i]; end
        1: begin chk_dst = mbase[i]; chk_len = msize[i] + 4; end
        2: begin chk_dst = mbase[i] - 4; chk_len = 4; end
        default: begin
          chk_dst = mbase[i] + word_t'($urandom_range(0, 5000));
          chk_len = word_t'($urandom_range(0, 5000));
        end
      endcase
      #1;
      e1  = {1'b0, chk_dst} + {1'b0, chk_len};
      e2  = {1'b0, mbase[i]} + {1'b0, msize[i]};
      exp = chk_dst >= mbase[i] && e1 <= e2;
      check(chk_fits == exp, $sformatf("fit eid %0d dst %h len %0d", i, chk_dst, chk_len));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
