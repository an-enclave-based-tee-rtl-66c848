// dma_ctrl: DMA controller for data transfer from one enclave to another.
//
// An enclave programs the source address, destination address, length and
// destination enclave, then writes START. The controller records who asked
// (the enclave ID and privilege that came with the START write) and then
// follows a fixed order:
//   1. CHK_CSR   the security CSR judges the request: the requester must be
//                allowed to send to the destination enclave and must own
//                the source range. If not, the request is denied (status
//                DENIED, err_irq) and nothing moves.
//   2. CHK_AVAIL the Availability Table must show enough free space in the
//                destination enclave's window for [dst, dst+len). If not,
//                the DMA raises an exception and terminates (NOSPACE,
//                err_irq).
//   3. RD/WR     words are read from the source and written to the
//                destination over the system bus, one word at a time, until
//                all are moved (DONE, done_irq). A bus error stops the move
//                (BUSERR, err_irq).
// A zero length is denied in step 1.
//
// Register map (bus slave; word offsets in its 4 KiB window; read data and
// err valid the cycle after the select):
//   0x00 SRC  0x04 DST  0x08 LEN (bytes)  0x0C DST_EID
//   0x10 CTRL  write: [0] start  [1] clear status and interrupts
//   0x14 STATUS read: [2:0] dma_status_e  [7:4] requester ID  [8] deny_perm
//               [9] deny_src
//   0x18 MOVED  read: bytes moved so far
// Writes to SRC..DST_EID or START while busy return err and are ignored.
// Addresses and length are word aligned (bits [1:0] are dropped), so bits
// [1:0] of every address the controller drives are always zero.
//
// Timing: one cycle for each check, then per word a read (grant, plus one
// cycle for the data) and a write (grant, plus one cycle for the
// response): four cycles per word when the bus is free, more when the core
// holds the bus.
//
// Following the paper (its DMA access-control flow): a request names the
// destination enclave and the size; it is checked by the security CSR and
// denied if not allowed; the Availability Table is checked and an exception
// ends the DMA if space is lacking; data then move until the DMA has
// finished; enclaves may only push their own data. This design's own
// choices: the register map, word-granular moves, level interrupts cleared
// by CTRL[1], and one outstanding bus access at a time. In the paper the
// destination enclave supplies the destination address to the source
// through software; here it is simply a register.
module dma_ctrl
  import xine_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // register port
  input  bus_req_t slv_req,
  output slv_rsp_t slv_rsp,
  // bus master port
  output bus_req_t m_req,
  input  bus_rsp_t m_rsp,
  // request check: to the security CSR and PMP
  output eid_t     chk_src_eid,
  output eid_t     chk_dst_eid,
  output priv_e    chk_priv,
  output word_t    chk_first_addr,
  output word_t    chk_last_addr,
  input  logic     sec_allow,
  input  logic     sec_deny_perm,
  input  logic     sec_deny_src,
  // availability check: to the Availability Table
  output word_t    av_dst,
  output word_t    av_len,
  input  logic     av_fits,
  // interrupts
  output logic     done_irq,
  output logic     err_irq,
  output logic     busy
);

  typedef enum logic [2:0] {
    S_IDLE, S_CHK_CSR, S_CHK_AVAIL, S_RD, S_RD_WAIT, S_WR, S_WR_WAIT
  } state_e;

  state_e      state;
  word_t       src, dst, len, cur_src, cur_dst, left, moved, data;
  eid_t        dst_eid, req_eid;
  priv_e       req_priv;
  dma_status_e status;
  logic        dperm, dsrc;

  logic [11:0] off;
  logic        wr, start, clear, cfg_wr;
  assign off    = slv_req.addr[11:0];
  assign wr     = slv_req.req &&  slv_req.we;
  assign cfg_wr = wr && off <= 12'h00C;
  assign start  = wr && off == 12'h010 && slv_req.wdata[0];
  assign clear  = wr && off == 12'h010 && slv_req.wdata[1];

  assign busy = state != S_IDLE;

  // check ports
  assign chk_src_eid    = req_eid;
  assign chk_dst_eid    = dst_eid;
  assign chk_priv       = req_priv;
  assign chk_first_addr = src;
  assign chk_last_addr  = src + len - 32'd4;
  assign av_dst         = dst;
  assign av_len         = len;

  // bus master
  always_comb begin
    m_req       = '0;
    m_req.priv  = req_priv;
    m_req.eid   = req_eid;
    m_req.req   = state == S_RD || state == S_WR;
    m_req.we    = state == S_WR;
    m_req.addr  = (state == S_WR) ? cur_dst : cur_src;
    m_req.wdata = data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      src      <= '0;
      dst      <= '0;
      len      <= '0;
      dst_eid  <= '0;
      req_eid  <= '0;
      req_priv <= PRIV_U;
      cur_src  <= '0;
      cur_dst  <= '0;
      left     <= '0;
      moved    <= '0;
      data     <= '0;
      status   <= DMA_ST_IDLE;
      dperm    <= 1'b0;
      dsrc     <= 1'b0;
      done_irq <= 1'b0;
      err_irq  <= 1'b0;
      slv_rsp  <= '0;
    end else begin
      // ---------------- register port ----------------
      slv_rsp <= '0;
      if (slv_req.req) begin
        unique case (off)
          12'h000, 12'h004, 12'h008, 12'h00C:
            if (slv_req.we) slv_rsp.err <= busy;
            else slv_rsp.rdata <= (off == 12'h000) ? src :
                                  (off == 12'h004) ? dst :
                                  (off == 12'h008) ? len : word_t'(dst_eid);
          12'h010: slv_rsp.err <= !slv_req.we || (start && busy);
          12'h014: begin
            slv_rsp.err   <= slv_req.we;
            slv_rsp.rdata <= word_t'({dsrc, dperm, req_eid, 1'b0, status});
          end
          12'h018: begin
            slv_rsp.err   <= slv_req.we;
            slv_rsp.rdata <= moved;
          end
          default: slv_rsp.err <= 1'b1;
        endcase
      end
      if (cfg_wr && !busy) begin
        unique case (off)
          12'h000: src     <= {slv_req.wdata[31:2], 2'b00};
          12'h004: dst     <= {slv_req.wdata[31:2], 2'b00};
          12'h008: len     <= {slv_req.wdata[31:2], 2'b00};
          default: dst_eid <= slv_req.wdata[EID_W-1:0];
        endcase
      end
      if (clear && !busy) begin
        status   <= DMA_ST_IDLE;
        done_irq <= 1'b0;
        err_irq  <= 1'b0;
        dperm    <= 1'b0;
        dsrc     <= 1'b0;
      end

      // ---------------- transfer engine ----------------
      unique case (state)
        S_IDLE: if (start) begin
          req_eid  <= slv_req.eid;
          req_priv <= slv_req.priv;
          status   <= DMA_ST_BUSY;
          done_irq <= 1'b0;
          err_irq  <= 1'b0;
          dperm    <= 1'b0;
          dsrc     <= 1'b0;
          moved    <= '0;
          state    <= S_CHK_CSR;
        end
        S_CHK_CSR: begin
          if (!sec_allow || len == '0) begin
            status  <= DMA_ST_DENIED;
            dperm   <= sec_deny_perm;
            dsrc    <= sec_deny_src;
            err_irq <= 1'b1;
            state   <= S_IDLE;
          end else begin
            state <= S_CHK_AVAIL;
          end
        end
        S_CHK_AVAIL: begin
          if (!av_fits) begin
            status  <= DMA_ST_NOSPACE;
            err_irq <= 1'b1;
            state   <= S_IDLE;
          end else begin
            cur_src <= src;
            cur_dst <= dst;
            left    <= len;
            state   <= S_RD;
          end
        end
        S_RD:      if (m_rsp.gnt) state <= S_RD_WAIT;
        S_RD_WAIT: if (m_rsp.rvalid) begin
          if (m_rsp.err) begin
            status  <= DMA_ST_BUSERR;
            err_irq <= 1'b1;
            state   <= S_IDLE;
          end else begin
            data  <= m_rsp.rdata;
            state <= S_WR;
          end
        end
        S_WR:      if (m_rsp.gnt) state <= S_WR_WAIT;
        S_WR_WAIT: if (m_rsp.rvalid) begin
          if (m_rsp.err) begin
            status  <= DMA_ST_BUSERR;
            err_irq <= 1'b1;
            state   <= S_IDLE;
          end else begin
            cur_src <= cur_src + 32'd4;
            cur_dst <= cur_dst + 32'd4;
            left    <= left - 32'd4;
            moved   <= moved + 32'd4;
            if (left == 32'd4) begin
              status   <= DMA_ST_DONE;
              done_irq <= 1'b1;
              state    <= S_IDLE;
            end else begin
              state <= S_RD;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A refused request never reaches the move: the next state is IDLE.
  a_deny_stops: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_CHK_CSR && !sec_allow |=> state == S_IDLE);
  a_nospace_stops: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_CHK_AVAIL && !av_fits |=> state == S_IDLE);
  // The engine holds a bus request until it is granted.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_req.req && !m_rsp.gnt |=> m_req.req && $stable(m_req.addr) && $stable(m_req.we));

endmodule
