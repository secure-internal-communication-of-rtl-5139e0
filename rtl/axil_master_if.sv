// axil_master_if: AXI4-Lite master port of the crypto IP.
//
// The crypto IP uses this port to write decrypted words to, and read
// plaintext words from, the target IP in the secure hardware area. The
// controller hands over one command at a time (cmd_valid/cmd_ready); the
// module drives the AXI channels and reports the end of the access with a
// one-cycle rsp_valid pulse carrying the read data and an error flag
// (response other than OKAY).
//
// Writes put AW and W up together and lower each as soon as it is taken,
// then wait for B. Reads put up AR and wait for R. Every access is issued
// as a secure, unprivileged data access (AxPROT = 3'b000). cmd_ready is
// high only while idle, so there is never more than one access in flight.
//
// AXI4-Lite, one outstanding access and the AxPROT value are this design's
// choices; the paper gives only the port's role.
module axil_master_if
  import crypto_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic        cmd_write,
  input  logic [31:0] cmd_addr,
  input  logic [31:0] cmd_wdata,
  output logic        rsp_valid,
  output logic [31:0] rsp_rdata,
  output logic        rsp_err,
  output axil_req_t   m_req,
  input  axil_rsp_t   m_rsp
);

  typedef enum logic [1:0] { M_IDLE, M_WRITE, M_READ } state_e;

  state_e      state;
  logic        addr_pend, w_pend;   // AW (write) or AR (read) not yet taken; W not yet taken
  logic [31:0] addr_q, wdata_q;

  assign cmd_ready = (state == M_IDLE);

  always_comb begin
    m_req          = '0;
    m_req.aw_valid = (state == M_WRITE) && addr_pend;
    m_req.aw_addr  = addr_q;
    m_req.aw_prot  = 3'b000;
    m_req.w_valid  = w_pend;
    m_req.w_data   = wdata_q;
    m_req.w_strb   = 4'hF;
    m_req.b_ready  = (state == M_WRITE) && !addr_pend && !w_pend;
    m_req.ar_valid = (state == M_READ) && addr_pend;
    m_req.ar_addr  = addr_q;
    m_req.ar_prot  = 3'b000;
    m_req.r_ready  = (state == M_READ) && !addr_pend;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= M_IDLE;
      addr_pend   <= 1'b0;
      w_pend    <= 1'b0;
      addr_q    <= '0;
      wdata_q   <= '0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
      rsp_err   <= 1'b0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        M_IDLE: begin
          if (cmd_valid) begin
            addr_q  <= cmd_addr;
            wdata_q <= cmd_wdata;
            addr_pend <= 1'b1;
            w_pend  <= cmd_write;
            state   <= cmd_write ? M_WRITE : M_READ;
          end
        end
        M_WRITE: begin
          if (addr_pend && m_rsp.aw_ready) addr_pend <= 1'b0;
          if (w_pend && m_rsp.w_ready)   w_pend  <= 1'b0;
          if (m_req.b_ready && m_rsp.b_valid) begin
            rsp_valid <= 1'b1;
            rsp_rdata <= '0;
            rsp_err   <= (m_rsp.b_resp != RESP_OKAY);
            state     <= M_IDLE;
          end
        end
        M_READ: begin
          if (addr_pend && m_rsp.ar_ready) addr_pend <= 1'b0;
          if (m_req.r_ready && m_rsp.r_valid) begin
            rsp_valid <= 1'b1;
            rsp_rdata <= m_rsp.r_data;
            rsp_err   <= (m_rsp.r_resp != RESP_OKAY);
            state     <= M_IDLE;
          end
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  // AXI rule: a raised valid stays raised, with its payload, until taken.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_req.aw_valid && !m_rsp.aw_ready |=> m_req.aw_valid && $stable(m_req.aw_addr));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_req.w_valid && !m_rsp.w_ready |=> m_req.w_valid && $stable(m_req.w_data));
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_req.ar_valid && !m_rsp.ar_ready |=> m_req.ar_valid && $stable(m_req.ar_addr));

endmodule
