// se_core_model: behavioural model of the secure element's own core and
// crypto firmware, as seen from the mailbox.
//
// Not a design of the secure element, whose insides are outside this
// design: it stands in for it in simulation. When the doorbell rings it
// acknowledges, pops every word of the request queue, "encrypts" each one
// with a fixed keyed mixing function (see cipher()), pushes the results and
// one tag word (XOR of all results, mixed again) into the response queue,
// then pulses done. The testbench computes the same function on its own to
// check the data that comes back.
module se_core_model
  import xine_pkg::*;
#(
  parameter word_t KEY = 32'h1B2E_3C4D
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  se_req_valid,
  input  word_t se_req_data,
  output logic  se_req_pop,
  output logic  se_rsp_push,
  output word_t se_rsp_data,
  input  logic  se_rsp_full,
  input  logic  se_doorbell,
  output logic  se_doorbell_ack,
  output logic  se_done
);

  function automatic word_t cipher(word_t w);
    word_t x;
    x = w ^ KEY;
    return {x[26:0], x[31:27]} + 32'h9E37_79B9;
  endfunction

  word_t tag;
  int    jobs = 0;

  initial begin
    se_req_pop = 0; se_rsp_push = 0; se_rsp_data = '0; se_doorbell_ack = 0; se_done = 0;
    forever begin
      @(posedge clk);
      if (rst_n && se_doorbell) begin
        #1 se_doorbell_ack = 1;
        @(posedge clk);
        #1 se_doorbell_ack = 0;
        tag = '0;
        while (se_req_valid) begin
          while (se_rsp_full) @(posedge clk);
          #1;
          se_req_pop  = 1;
          se_rsp_push = 1;
          se_rsp_data = cipher(se_req_data);
          tag         = tag ^ se_rsp_data;
          @(posedge clk);
          #1 se_req_pop = 0; se_rsp_push = 0;
        end
        while (se_rsp_full) @(posedge clk);
        #1 se_rsp_push = 1; se_rsp_data = cipher(tag);
        @(posedge clk);
        #1 se_rsp_push = 0; se_done = 1;
        @(posedge clk);
        #1 se_done = 0;
        jobs++;
      end
    end
  end

endmodule
