// axil_slave_if: AXI4-Lite slave port of the crypto IP.
//
// The secure software reaches the crypto IP through this port; all data
// that crosses it is ciphertext. The module turns each AXI4-Lite access
// into one request on a simple register port towards the controller and
// returns the controller's answer as the B or R response.
//
// Operation: one access at a time. AW and W may arrive in either order and
// are latched separately; once both are present the write goes out. A read
// is taken only while no write is pending (writes win). Any access marked
// non-secure (AxPROT[1] = 1) is answered with SLVERR at once and never
// reaches the controller, so non-secure masters cannot drive the IP.
//
// Register port timing: reg_req.valid stays high until the controller
// raises reg_ack in the same cycle (combinationally); the controller may
// hold ack low for as long as it needs, which stalls the AXI access (the
// back-pressure used while data or keystream is not yet available). The
// response then follows on the next cycle and is held until accepted.
//
// Only register offsets addr[7:0] are decoded (the interconnect selects the
// window), WSTRB is ignored because every register is written as a whole
// word, and of AxPROT only bit 1 is looked at; those input bits are unused
// on purpose.
//
// AXI4-Lite with 32-bit data, one access at a time, the write priority and
// the AxPROT check are this design's choices; the paper gives only the
// port's role.
module axil_slave_if
  import crypto_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  s_req,
  output axil_rsp_t  s_rsp,
  output reg_req_t   reg_req,
  input  logic       reg_ack,
  input  logic [31:0] reg_rdata,
  input  logic       reg_err
);

  typedef enum logic [1:0] { S_IDLE, S_REQ, S_BRESP, S_RRESP } state_e;

  state_e      state;
  logic        aw_got, w_got, is_write;
  logic [7:0]  addr_q;
  logic [31:0] wdata_q, rdata_q;
  logic [1:0]  resp_q;

  wire aw_hs = s_req.aw_valid && s_rsp.aw_ready;
  wire w_hs  = s_req.w_valid  && s_rsp.w_ready;
  wire ar_hs = s_req.ar_valid && s_rsp.ar_ready;

  always_comb begin
    s_rsp          = '0;
    s_rsp.aw_ready = (state == S_IDLE) && !aw_got;
    s_rsp.w_ready  = (state == S_IDLE) && !w_got;
    s_rsp.ar_ready = (state == S_IDLE) && !aw_got && !w_got && !s_req.aw_valid && !s_req.w_valid;
    s_rsp.b_valid  = (state == S_BRESP);
    s_rsp.b_resp   = resp_q;
    s_rsp.r_valid  = (state == S_RRESP);
    s_rsp.r_data   = rdata_q;
    s_rsp.r_resp   = resp_q;
    reg_req.valid  = (state == S_REQ);
    reg_req.write  = is_write;
    reg_req.addr   = addr_q;
    reg_req.wdata  = wdata_q;
  end

  logic ns_q;   // the latched AW was non-secure

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      aw_got   <= 1'b0;
      w_got    <= 1'b0;
      is_write <= 1'b0;
      addr_q   <= '0;
      wdata_q  <= '0;
      rdata_q  <= '0;
      resp_q   <= RESP_OKAY;
      ns_q     <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (aw_hs) begin
            aw_got <= 1'b1;
            addr_q <= s_req.aw_addr[7:0];
            ns_q   <= s_req.aw_prot[1];
          end
          if (w_hs) begin
            w_got   <= 1'b1;
            wdata_q <= s_req.w_data;
          end
          if ((aw_got || aw_hs) && (w_got || w_hs)) begin
            aw_got   <= 1'b0;
            w_got    <= 1'b0;
            is_write <= 1'b1;
            if (aw_got ? ns_q : s_req.aw_prot[1]) begin
              resp_q <= RESP_SLVERR;
              state  <= S_BRESP;
            end else begin
              state  <= S_REQ;
            end
          end else if (ar_hs) begin
            is_write <= 1'b0;
            addr_q   <= s_req.ar_addr[7:0];
            if (s_req.ar_prot[1]) begin
              resp_q  <= RESP_SLVERR;
              rdata_q <= '0;
              state   <= S_RRESP;
            end else begin
              state   <= S_REQ;
            end
          end
        end
        S_REQ: begin
          if (reg_ack) begin
            resp_q  <= reg_err ? RESP_SLVERR : RESP_OKAY;
            rdata_q <= reg_err ? '0 : reg_rdata;
            state   <= is_write ? S_BRESP : S_RRESP;
          end
        end
        S_BRESP: if (s_req.b_ready) state <= S_IDLE;
        S_RRESP: if (s_req.r_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A response, once offered, stays until taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rsp.b_valid && !s_req.b_ready |=> s_rsp.b_valid && $stable(s_rsp.b_resp));
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rsp.r_valid && !s_req.r_ready |=> s_rsp.r_valid && $stable(s_rsp.r_data));

endmodule
