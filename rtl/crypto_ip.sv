// crypto_ip: crypto IP for encrypted traffic between the secure software
// and the secure hardware area of a TrustZone-enabled FPGA SoC.
//
// Sensitive data that the secure software sends to, or fetches from, a
// secure IP in the programmable logic crosses the SoC bus only as
// ciphertext. The crypto IP is the endpoint in the logic: its AXI4-Lite
// slave port faces the bus and carries ciphertext, its AXI4-Lite master
// port faces the target IP and carries plaintext. Between them the
// controller runs a lightweight stream cipher, re-initialised with the
// shared key and a counter-generated IV at the start of every message,
// and XORs its keystream into each 32-bit word.
//
//   s_axi --> axil_slave_if --> crypto_controller --> axil_master_if --> m_axi
//                                     |
//                     trivium_core or grain128a_core (CIPHER)
//
// Parameters: CIPHER selects Trivium (80-bit key, 80-bit IV, 1152 init
// rounds) or Grain-128a (128-bit key, 96-bit IV, 256 init rounds); W is
// the cipher's output rate in bits per clock (1, 8, 16 or 32; 32 matches
// the 32-bit data path, giving 36 and 8 clocks of initialisation).
// The IV is the 64-bit message counter, zero-extended; for Grain-128a it
// is shifted up by one place so that IV bit 0 (the authentication-mode
// bit of Grain-128a) stays 0.
//
// The four-block structure (slave interface, controller, cipher, master
// interface) and the two ciphers follow the paper. The key input port, the
// register map, AXI4-Lite and the IV layout are this design's choices.
module crypto_ip
  import crypto_pkg::*;
#(
  parameter cipher_e     CIPHER = TRIVIUM,
  parameter int unsigned W      = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [127:0] key,        // Trivium uses key[79:0]
  input  axil_req_t    s_axi_req,
  output axil_rsp_t    s_axi_rsp,
  output axil_req_t    m_axi_req,
  input  axil_rsp_t    m_axi_rsp,
  output logic         busy
);

  localparam int unsigned IV_CNT_W = 64;

  reg_req_t            reg_req;
  logic                reg_ack, reg_err;
  logic [31:0]         reg_rdata;
  logic                cmd_valid, cmd_ready, cmd_write;
  logic [31:0]         cmd_addr, cmd_wdata;
  logic                rsp_valid, rsp_err;
  logic [31:0]         rsp_rdata;
  logic                ks_load, ks_next, ks_ready;
  logic [IV_CNT_W-1:0] ks_iv_cnt;
  logic [W-1:0]        ks;

  axil_slave_if u_slave (
    .clk, .rst_n,
    .s_req (s_axi_req), .s_rsp (s_axi_rsp),
    .reg_req, .reg_ack, .reg_rdata, .reg_err
  );

  crypto_controller #(.W(W), .IV_CNT_W(IV_CNT_W)) u_ctrl (
    .clk, .rst_n,
    .reg_req, .reg_ack, .reg_rdata, .reg_err,
    .cmd_valid, .cmd_ready, .cmd_write, .cmd_addr, .cmd_wdata,
    .rsp_valid, .rsp_rdata, .rsp_err,
    .ks_load, .ks_iv_cnt, .ks_next, .ks_ready, .ks,
    .busy
  );

  if (CIPHER == TRIVIUM) begin : gen_trivium
    trivium_core #(.W(W)) u_cipher (
      .clk, .rst_n,
      .load (ks_load), .key (key[79:0]), .iv (80'(ks_iv_cnt)),
      .next (ks_next), .ready (ks_ready), .ks
    );
    logic unused_key;
    assign unused_key = ^key[127:80];
  end else begin : gen_grain128a
    grain128a_core #(.W(W)) u_cipher (
      .clk, .rst_n,
      .load (ks_load), .key (key), .iv (96'({ks_iv_cnt, 1'b0})),
      .next (ks_next), .ready (ks_ready), .ks
    );
  end

  axil_master_if u_master (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_write, .cmd_addr, .cmd_wdata,
    .rsp_valid, .rsp_rdata, .rsp_err,
    .m_req (m_axi_req), .m_rsp (m_axi_rsp)
  );

endmodule
