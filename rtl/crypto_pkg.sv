// crypto_pkg: types and constants shared by the crypto IP.
//
// The crypto IP sits between a 32-bit AXI4-Lite slave port (encrypted
// traffic from the secure software) and a 32-bit AXI4-Lite master port
// (plaintext traffic to a secure hardware IP). The AXI4-Lite channels are
// bundled into two packed structs, one per direction, so that both ports
// of the IP and the blocks inside it use the same types. The register map
// of the slave port and the cipher selection also live here.
//
// The 32-bit data width follows the 32-bit data path of the target SoC;
// the register map and its encodings are this design's own.
package crypto_pkg;

  localparam int unsigned AXI_AW = 32;
  localparam int unsigned AXI_DW = 32;

  // AXI response codes.
  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  // Manager-to-subordinate half of an AXI4-Lite bus.
  typedef struct packed {
    logic              aw_valid;
    logic [AXI_AW-1:0] aw_addr;
    logic [2:0]        aw_prot;
    logic              w_valid;
    logic [AXI_DW-1:0] w_data;
    logic [3:0]        w_strb;
    logic              b_ready;
    logic              ar_valid;
    logic [AXI_AW-1:0] ar_addr;
    logic [2:0]        ar_prot;
    logic              r_ready;
  } axil_req_t;

  // Subordinate-to-manager half of an AXI4-Lite bus.
  typedef struct packed {
    logic              aw_ready;
    logic              w_ready;
    logic              b_valid;
    logic [1:0]        b_resp;
    logic              ar_ready;
    logic              r_valid;
    logic [AXI_DW-1:0] r_data;
    logic [1:0]        r_resp;
  } axil_rsp_t;

  // Register request from the slave interface to the controller.
  typedef struct packed {
    logic              valid;
    logic              write;
    logic [7:0]        addr;   // byte offset inside the register window
    logic [AXI_DW-1:0] wdata;
  } reg_req_t;

  // Register map (byte offsets; the window decodes addr[7:0]).
  localparam logic [7:0] REG_CTRL   = 8'h00; // W : [0] start, [1] dir, [31:16] length in words
  localparam logic [7:0] REG_ADDR   = 8'h04; // RW: target base address
  localparam logic [7:0] REG_STATUS = 8'h08; // R : [0] busy, [1] init, [2] dir, [3] bus error, [31:16] words left
  localparam logic [7:0] REG_DATA   = 8'h0C; // W : ciphertext in, R : ciphertext out
  localparam logic [7:0] REG_IVLO   = 8'h10; // R : IV counter [31:0]
  localparam logic [7:0] REG_IVHI   = 8'h14; // R : IV counter [63:32]

  // Message direction.
  typedef enum logic {
    DIR_TO_IP   = 1'b0,  // software sends ciphertext, IP writes plaintext to the target
    DIR_FROM_IP = 1'b1   // IP reads plaintext from the target, software reads ciphertext
  } dir_e;

  // Stream cipher selection.
  typedef enum logic {
    TRIVIUM   = 1'b0,
    GRAIN128A = 1'b1
  } cipher_e;

endpackage
