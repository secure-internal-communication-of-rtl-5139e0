// crypto_controller: register file and sequencer of the crypto IP.
//
// A transfer between the secure software and the target IP is a message of
// LEN 32-bit words. Software writes the target base address (ADDR), then
// CTRL with start = 1, the direction and LEN. The controller then
//   1. loads the key and the current value of the IV counter into the
//      stream cipher, which initialises (36 clocks for Trivium, 8 for
//      Grain-128a at 32 bits per clock);
//   2. gathers keystream 32 bits at a time (32/W cipher steps per word,
//      word bit j = keystream bit 32n+j);
//   3. direction DIR_TO_IP: each DATA write carries one ciphertext word;
//      it is XORed with the keystream word and written by the master port
//      to ADDR + 4n. The DATA write completes on the slave side only when
//      the master write has finished, and reports its error.
//      Direction DIR_FROM_IP: the master port reads ADDR + 4n, the word is
//      XORed with the keystream and waits for software to read DATA; the
//      next word is fetched as soon as that read is answered.
//   4. after the last word, increments the IV counter and goes idle.
// Software runs the same cipher with the same key and keeps its own copy of
// the counter, which starts at zero after reset; IVLO/IVHI let it check.
//
// Register map (see crypto_pkg): CTRL (W), ADDR (RW), STATUS (R), DATA
// (RW), IVLO/IVHI (R). Writing CTRL or ADDR during a message, LEN = 0, DATA
// outside a message of the matching direction, writes to read-only
// registers and unknown offsets are answered with an error. A DATA access
// that cannot be served yet (keystream or data not ready) is stalled.
//
// Register port timing: reg_ack, reg_rdata and reg_err are combinational
// from reg_req and the state; the request's effect takes place at the
// clock edge that ends the ack cycle.
//
// The paper fixes the controller's role (pre- and post-processing and
// scheduling of encryption and decryption), the counter-based IV and the
// re-initialisation of the cipher before every encryption or decryption.
// The register map, the message model and the counter width are this
// design's own.
module crypto_controller
  import crypto_pkg::*;
#(
  parameter int unsigned W        = 32,
  parameter int unsigned IV_CNT_W = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  // register port from the slave interface
  input  reg_req_t            reg_req,
  output logic                reg_ack,
  output logic [31:0]         reg_rdata,
  output logic                reg_err,
  // command port of the master interface
  output logic                cmd_valid,
  input  logic                cmd_ready,
  output logic                cmd_write,
  output logic [31:0]         cmd_addr,
  output logic [31:0]         cmd_wdata,
  input  logic                rsp_valid,
  input  logic [31:0]         rsp_rdata,
  input  logic                rsp_err,
  // stream cipher
  output logic                ks_load,
  output logic [IV_CNT_W-1:0] ks_iv_cnt,
  output logic                ks_next,
  input  logic                ks_ready,
  input  logic [W-1:0]        ks,
  // status
  output logic                busy
);

  localparam int unsigned NCHUNK = 32 / W;
  localparam int unsigned KCW    = (NCHUNK > 1) ? $clog2(NCHUNK) : 1;

  if (W < 1 || W > 32 || (32 % W) != 0) begin : gen_bad_w
    $error("crypto_controller: W must divide 32");
  end

  typedef enum logic [2:0] {
    C_IDLE,      // no message
    C_INIT,      // cipher initialising, first keystream word not yet gathered
    C_WAIT_DATA, // DIR_TO_IP: waiting for a DATA write
    C_BUS_WR,    // DIR_TO_IP: master write in flight, DATA write held
    C_RD_ISSUE,  // DIR_FROM_IP: issue the master read
    C_BUS_RD,    // DIR_FROM_IP: master read in flight
    C_RD_HOLD    // DIR_FROM_IP: encrypted word waiting for a DATA read
  } state_e;

  state_e              state;
  dir_e                dir;
  logic [15:0]         remaining;
  logic [31:0]         base_addr, cur_addr;
  logic [IV_CNT_W-1:0] iv_cnt;
  logic                bus_err;
  logic [31:0]         out_word;
  logic                out_err;

  // keystream word gatherer
  logic [31:0]         ks_word;
  logic [KCW-1:0]      ks_cnt;
  logic                ks_full;
  logic                ks_take;   // current keystream word consumed this cycle

  assign busy      = (state != C_IDLE);
  assign ks_iv_cnt = iv_cnt;

  // ---- register decode ----------------------------------------------------
  logic req_ctrl_w, req_addr_w, req_data_w, req_data_r;
  logic start_ok;

  always_comb begin
    req_ctrl_w = reg_req.valid &&  reg_req.write && reg_req.addr == REG_CTRL;
    req_addr_w = reg_req.valid &&  reg_req.write && reg_req.addr == REG_ADDR;
    req_data_w = reg_req.valid &&  reg_req.write && reg_req.addr == REG_DATA;
    req_data_r = reg_req.valid && !reg_req.write && reg_req.addr == REG_DATA;
    start_ok   = req_ctrl_w && state == C_IDLE && reg_req.wdata[0] && reg_req.wdata[31:16] != '0;

    reg_ack   = 1'b0;
    reg_err   = 1'b0;
    reg_rdata = '0;
    if (reg_req.valid) begin
      if (reg_req.write) begin
        unique case (reg_req.addr)
          REG_CTRL: begin
            reg_ack = 1'b1;
            reg_err = busy || (reg_req.wdata[0] && reg_req.wdata[31:16] == '0);
          end
          REG_ADDR: begin
            reg_ack = 1'b1;
            reg_err = busy;
          end
          REG_DATA: begin
            if (!busy || dir != DIR_TO_IP) begin
              reg_ack = 1'b1;
              reg_err = 1'b1;
            end else if (state == C_BUS_WR && rsp_valid) begin
              reg_ack = 1'b1;
              reg_err = rsp_err;
            end
          end
          default: begin
            reg_ack = 1'b1;
            reg_err = 1'b1;
          end
        endcase
      end else begin
        unique case (reg_req.addr)
          REG_CTRL:   begin reg_ack = 1'b1; reg_rdata = {remaining, 14'b0, 1'(dir), 1'b0}; end
          REG_ADDR:   begin reg_ack = 1'b1; reg_rdata = base_addr; end
          REG_STATUS: begin
            reg_ack   = 1'b1;
            reg_rdata = {remaining, 12'b0, bus_err, 1'(dir), state == C_INIT, busy};
          end
          REG_IVLO:   begin reg_ack = 1'b1; reg_rdata = iv_cnt[31:0]; end
          REG_IVHI:   begin reg_ack = 1'b1; reg_rdata = 32'(iv_cnt >> 32); end
          REG_DATA: begin
            if (!busy || dir != DIR_FROM_IP) begin
              reg_ack = 1'b1;
              reg_err = 1'b1;
            end else if (state == C_RD_HOLD) begin
              reg_ack   = 1'b1;
              reg_err   = out_err;
              reg_rdata = out_word;
            end
          end
          default: begin
            reg_ack = 1'b1;
            reg_err = 1'b1;
          end
        endcase
      end
    end
  end

  // ---- master commands ----------------------------------------------------
  always_comb begin
    cmd_valid = 1'b0;
    cmd_write = 1'b0;
    cmd_addr  = cur_addr;
    cmd_wdata = reg_req.wdata ^ ks_word;
    if (state == C_WAIT_DATA && req_data_w && ks_full) begin
      cmd_valid = 1'b1;
      cmd_write = 1'b1;
    end else if (state == C_RD_ISSUE && ks_full) begin
      cmd_valid = 1'b1;
    end
  end

  wire last_word = (remaining == 16'd1);

  // ---- keystream gatherer -------------------------------------------------
  assign ks_load = start_ok;
  assign ks_next = (state != C_IDLE) && ks_ready && !ks_full;
  assign ks_take = (state == C_BUS_WR && rsp_valid) || (state == C_BUS_RD && rsp_valid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ks_word <= '0;
      ks_cnt  <= '0;
      ks_full <= 1'b0;
    end else if (ks_load || ks_take) begin
      ks_cnt  <= '0;
      ks_full <= 1'b0;
    end else if (ks_next) begin
      ks_word[32'(ks_cnt) * W +: W] <= ks;
      if (32'(ks_cnt) == NCHUNK - 1) begin
        ks_cnt  <= '0;
        ks_full <= 1'b1;
      end else begin
        ks_cnt  <= ks_cnt + 1'b1;
      end
    end
  end

  // ---- sequencer ----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      dir       <= DIR_TO_IP;
      remaining <= '0;
      base_addr <= '0;
      cur_addr  <= '0;
      iv_cnt    <= '0;
      bus_err   <= 1'b0;
      out_word  <= '0;
      out_err   <= 1'b0;
    end else begin
      if (req_addr_w && !busy) base_addr <= reg_req.wdata;
      unique case (state)
        C_IDLE: begin
          if (start_ok) begin
            dir       <= dir_e'(reg_req.wdata[1]);
            remaining <= reg_req.wdata[31:16];
            cur_addr  <= base_addr;
            bus_err   <= 1'b0;
            state     <= C_INIT;
          end
        end
        C_INIT: begin
          if (ks_full) state <= (dir == DIR_TO_IP) ? C_WAIT_DATA : C_RD_ISSUE;
        end
        C_WAIT_DATA: begin
          if (cmd_valid && cmd_ready) state <= C_BUS_WR;
        end
        C_BUS_WR: begin
          if (rsp_valid) begin
            bus_err   <= bus_err | rsp_err;
            remaining <= remaining - 1'b1;
            cur_addr  <= cur_addr + 32'd4;
            if (last_word) begin
              iv_cnt <= iv_cnt + 1'b1;
              state  <= C_IDLE;
            end else begin
              state  <= C_WAIT_DATA;
            end
          end
        end
        C_RD_ISSUE: begin
          if (cmd_valid && cmd_ready) state <= C_BUS_RD;
        end
        C_BUS_RD: begin
          if (rsp_valid) begin
            out_word <= rsp_rdata ^ ks_word;
            out_err  <= rsp_err;
            bus_err  <= bus_err | rsp_err;
            state    <= C_RD_HOLD;
          end
        end
        C_RD_HOLD: begin
          if (req_data_r) begin
            remaining <= remaining - 1'b1;
            cur_addr  <= cur_addr + 32'd4;
            if (last_word) begin
              iv_cnt <= iv_cnt + 1'b1;
              state  <= C_IDLE;
            end else begin
              state  <= C_RD_ISSUE;
            end
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // The cipher is only stepped once initialised, and a master command is
  // only issued with a full keystream word.
  a_next_ready: assert property (@(posedge clk) disable iff (!rst_n) ks_next |-> ks_ready);
  a_cmd_ks:     assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> ks_full);

endmodule
