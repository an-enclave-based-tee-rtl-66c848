// se_mailbox: mailbox between the Crypto Enclave and the Secure Element core.
//
// The Secure Element has its own RISC-V core, and only the Crypto Enclave
// (CE) may talk to it. The CE writes words of a message (for example plain
// data to encrypt) into a request queue and rings a doorbell; the SE core
// pops the words, works on them with its crypto hardware, pushes its result
// words into a response queue and signals done, which raises a notification
// interrupt to the CE; the CE then reads the result. A queue refuses a push
// when full and a pop when empty.
//
// Host side (bus slave; word offsets in its 4 KiB window; read data and err
// are valid the cycle after the select). Any access whose enclave ID is not
// CE_EID is refused with err and has no effect, so no other enclave can
// read or inject crypto messages.
//   0x00 TXDATA  write: push a word into the request queue (err if full)
//   0x04 RXDATA  read:  pop a word from the response queue (err if empty)
//   0x08 STATUS  read:  [0] req full [1] req empty [2] rsp full [3] rsp empty
//                       [4] notify pending [15:8] req count [23:16] rsp count
//   0x0C CTRL    write: [0] ring doorbell  [1] clear notify
// SE side: se_req_valid/se_req_data with se_req_pop (first-word fall
// through), se_rsp_push/se_rsp_data with se_rsp_full, se_doorbell held until
// se_doorbell_ack, and se_done (one-cycle pulse) which sets 'notify'.
//
// Following the paper: a mailbox reachable only by the CE, the CE places
// data in it, the SE core reads, processes and places results back and
// notifies the CE; put only when not full, get only when not empty; a
// pre-defined size. This design's own choices: two queues of MBOX_DEPTH
// words, the register map, the doorbell/notify signalling, enforcing CE-only
// access by enclave ID on the bus (in addition to the PMP region).
module se_mailbox
  import xine_pkg::*;
#(
  parameter int unsigned MBOX_DEPTH = 8,
  parameter eid_t        CE_EID     = eid_t'(1)
) (
  input  logic     clk,
  input  logic     rst_n,
  // host (CE) side
  input  bus_req_t slv_req,
  output slv_rsp_t slv_rsp,
  output logic     ce_irq,
  // SE core side
  output logic     se_req_valid,
  output word_t    se_req_data,
  input  logic     se_req_pop,
  input  logic     se_rsp_push,
  input  word_t    se_rsp_data,
  output logic     se_rsp_full,
  output logic     se_doorbell,
  input  logic     se_doorbell_ack,
  input  logic     se_done
);

  localparam int unsigned CW = $clog2(MBOX_DEPTH) + 1;

  logic          ok;
  logic [11:0]   off;
  logic          req_full, req_empty, rsp_full, rsp_empty;
  logic [CW-1:0] req_cnt, rsp_cnt;
  logic          host_push, host_pop;
  word_t         rsp_head;
  logic          notify, doorbell;

  assign off = slv_req.addr[11:0];
  assign ok  = slv_req.req && slv_req.eid == CE_EID;

  assign host_push = ok &&  slv_req.we && off == 12'h000;
  assign host_pop  = ok && !slv_req.we && off == 12'h004;

  sync_fifo #(.WIDTH(XLEN), .DEPTH(MBOX_DEPTH)) u_req_q (
    .clk, .rst_n,
    .push (host_push), .wdata (slv_req.wdata),
    .pop  (se_req_pop), .rdata (se_req_data),
    .full (req_full), .empty (req_empty), .count (req_cnt)
  );

  sync_fifo #(.WIDTH(XLEN), .DEPTH(MBOX_DEPTH)) u_rsp_q (
    .clk, .rst_n,
    .push (se_rsp_push), .wdata (se_rsp_data),
    .pop  (host_pop), .rdata (rsp_head),
    .full (rsp_full), .empty (rsp_empty), .count (rsp_cnt)
  );

  assign se_req_valid = !req_empty;
  assign se_rsp_full  = rsp_full;
  assign se_doorbell  = doorbell;
  assign ce_irq       = notify;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slv_rsp  <= '0;
      notify   <= 1'b0;
      doorbell <= 1'b0;
    end else begin
      slv_rsp <= '0;
      if (slv_req.req) begin
        if (!ok) slv_rsp.err <= 1'b1;
        else begin
          unique case (off)
            12'h000: slv_rsp.err <= !slv_req.we || req_full;
            12'h004: begin
              slv_rsp.err   <= slv_req.we || rsp_empty;
              slv_rsp.rdata <= rsp_head;
            end
            12'h008: begin
              slv_rsp.err   <= slv_req.we;
              slv_rsp.rdata <= {8'h00, 8'(rsp_cnt), 8'(req_cnt), 3'b000,
                                notify, rsp_empty, rsp_full, req_empty, req_full};
            end
            12'h00C: slv_rsp.err <= !slv_req.we;
            default: slv_rsp.err <= 1'b1;
          endcase
        end
      end
      // doorbell: set by the CE, cleared when the SE core acknowledges
      if (ok && slv_req.we && off == 12'h00C && slv_req.wdata[0]) doorbell <= 1'b1;
      else if (se_doorbell_ack)                                  doorbell <= 1'b0;
      // notify: set when the SE core is done, cleared by the CE
      if (se_done)                                                     notify <= 1'b1;
      else if (ok && slv_req.we && off == 12'h00C && slv_req.wdata[1]) notify <= 1'b0;
    end
  end

endmodule
