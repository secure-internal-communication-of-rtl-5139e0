// tb_crypto_ip: end-to-end testbench of the crypto IP.
//
// The crypto IP with its default parameters (Trivium, 32 bits per clock)
// runs between a behavioural AXI4-Lite host (the secure software side) and
// a behavioural AXI4-Lite memory (the target IP in the secure hardware
// area). tb_crypto_ip_variants runs the same test on Grain-128a builds.
// The testbench plays the trusted application: it keeps its own message
// counter, generates the same keystream with the bit-serial reference
// models (IV = counter; for Grain-128a the counter shifted up by one bit),
// encrypts what it sends and decrypts what it receives.
// Checks:
//   - plaintext written to the target equals what software encrypted;
//   - ciphertext read back decrypts to what the target holds;
//   - after start, the first target read appears INIT + 32/W + 2 clocks
//     later, INIT being 1152/W (Trivium) or 256/W (Grain-128a) clocks;
//   - the IV counter advances once per message;
//   - the last two messages are 1000 words long, one in each direction;
//   - non-secure accesses, DATA outside a message and target bus errors
//     are answered with SLVERR.
// Each of these mechanisms is counted; one that never happened is a
// failure.
module tb_crypto_ip;
  import crypto_pkg::*;
  import cipher_ref_pkg::*;

  localparam int NINST = 1;
  localparam int NMSG  = 20;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0;
  int   failures = 0;
  logic [NINST-1:0] done = '0;
  int   cyc = 0;

  // mechanism counters
  int n_msg_to_ip = 0, n_msg_from_ip = 0, n_words = 0, n_init_timed = 0;
  int n_stall = 0, n_ns_reject = 0, n_refused = 0, n_bus_err = 0, n_iv_step = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  for (genvar g = 0; g < NINST; g++) begin : gen_inst
    localparam cipher_e     CI   = TRIVIUM;
    localparam int unsigned WI   = 32;
    localparam int          INIT = (CI == TRIVIUM) ? 1152 / WI : 256 / WI;

    axil_req_t    s_req, m_req;
    axil_rsp_t    s_rsp, m_rsp;
    logic         busy;
    logic [127:0] key = '0;

    crypto_ip dut (.clk, .rst_n, .key, .s_axi_req (s_req), .s_axi_rsp (s_rsp),
                   .m_axi_req (m_req), .m_axi_rsp (m_rsp), .busy);

    axil_host_model u_host (.clk, .req (s_req), .rsp (s_rsp));
    axil_mem_model #(.DEPTH(1024), .ERR_BASE(32'h1000)) u_mem (.clk, .rst_n, .req (m_req), .rsp (m_rsp));

    // Clock of the last start (busy rising) and of the first target access after it.
    int  t_start = 0, t_first = -1;
    logic busy_q = 1'b0;
    always @(posedge clk) begin
      busy_q <= busy;
      if (busy && !busy_q) begin
        t_start <= cyc;
        t_first <= -1;
      end else if (busy && t_first < 0 && (m_req.ar_valid || m_req.aw_valid)) begin
        t_first <= cyc;
      end
    end

    // Keystream of message cnt, nwords 32-bit words.
    function automatic void keystream(input logic [63:0] cnt, input int nwords, ref bit z[$]);
      if (CI == TRIVIUM) trivium_ref(key[79:0], 80'(cnt), 32 * nwords, z);
      else               grain_ref(key, {31'b0, cnt, 1'b0}, 32 * nwords, z);
    endfunction

    initial begin
      logic [1:0]  resp;
      logic [31:0] q, base;
      logic [63:0] sw_cnt;
      bit          z[$];
      logic [31:0] plain [$];
      int          len, t0;
      dir_e        dir;
      bit          timed_from;

      sw_cnt = 0;
      timed_from = 0;
      key = {$urandom(), $urandom(), $urandom(), $urandom()};
      @(posedge rst_n);
      u_host.tick();

      u_host.read(32'(REG_IVLO), 1'b0, q, resp);
      check(resp == RESP_OKAY && q == 0, "IV counter starts at zero");

      // Non-secure accesses are refused and change nothing.
      u_host.write(32'(REG_ADDR), 32'hDEAD_BEEF, 1'b1, resp);
      check(resp == RESP_SLVERR, "non-secure write refused");
      u_host.write(32'(REG_CTRL), 32'h0001_0001, 1'b1, resp);
      check(resp == RESP_SLVERR && !busy, "non-secure start refused");
      u_host.read(32'(REG_ADDR), 1'b1, q, resp);
      check(resp == RESP_SLVERR && q == 0, "non-secure read refused without data");
      u_host.read(32'(REG_ADDR), 1'b0, q, resp);
      check(resp == RESP_OKAY && q == 0, "non-secure write had no effect");
      if (resp == RESP_OKAY && q == 0) n_ns_reject += 3;

      // DATA outside a message.
      u_host.write(32'(REG_DATA), 32'h1, 1'b0, resp);
      check(resp == RESP_SLVERR, "DATA write while idle refused");
      if (resp == RESP_SLVERR) n_refused++;

      for (int m = 0; m < NMSG; m++) begin
        dir  = dir_e'(m % 2);
        len  = (m < 2) ? 1 : (m >= NMSG - 2) ? 1000 : $urandom_range(2, 16);
        base = (m >= NMSG - 2) ? 32'h10 : 32'({$urandom_range(0, 200), 2'b00});
        keystream(sw_cnt, len, z);
        plain.delete();
        for (int i = 0; i < len; i++) plain.push_back($urandom());
        u_host.write(32'(REG_ADDR), base, 1'b0, resp);
        check(resp == RESP_OKAY, "ADDR written");
        if (dir == DIR_FROM_IP)
          for (int i = 0; i < len; i++) u_mem.mem[(base >> 2) + i] = plain[i];
        u_host.write(32'(REG_CTRL), {16'(len), 14'b0, 1'(dir), 1'b1}, 1'b0, resp);
        check(resp == RESP_OKAY, "start accepted");
        for (int i = 0; i < len; i++) begin
          if (dir == DIR_TO_IP) begin
            u_host.write(32'(REG_DATA), plain[i] ^ ks_word(z, i), 1'b0, resp);
            check(resp == RESP_OKAY, "ciphertext word accepted");
          end else begin
            t0 = cyc;
            u_host.read(32'(REG_DATA), 1'b0, q, resp);
            if (i == 0 && cyc - t0 > INIT) n_stall++;
            check(resp == RESP_OKAY && (q ^ ks_word(z, i)) == plain[i],
                  $sformatf("inst %0d msg %0d word %0d decrypts to %h, expected %h",
                            g, m, i, q ^ ks_word(z, i), plain[i]));
            if (i == 0 && !timed_from) begin
              check(t_first - t_start == INIT + 32 / WI + 2,
                    $sformatf("inst %0d: first target read %0d clocks after start, expected %0d",
                              g, t_first - t_start, INIT + 32 / WI + 2));
              timed_from = 1;
              n_init_timed++;
            end
          end
          n_words++;
        end
        u_host.tick();
        check(!busy, "idle after the message");
        if (dir == DIR_TO_IP) begin
          for (int i = 0; i < len; i++)
            check(u_mem.mem[(base >> 2) + i] == plain[i],
                  $sformatf("inst %0d msg %0d: target word %0d is %h, expected %h",
                            g, m, i, u_mem.mem[(base >> 2) + i], plain[i]));
          n_msg_to_ip++;
        end else begin
          n_msg_from_ip++;
        end
        sw_cnt++;
        u_host.read(32'(REG_IVLO), 1'b0, q, resp);
        check(resp == RESP_OKAY && q == sw_cnt[31:0], "IV counter in step with software");
        if (q == sw_cnt[31:0]) n_iv_step++;
      end

      // A message whose second word falls into the target's error range.
      keystream(sw_cnt, 2, z);
      u_host.write(32'(REG_ADDR), 32'hFFC, 1'b0, resp);
      u_host.write(32'(REG_CTRL), {16'd2, 14'b0, 1'b0, 1'b1}, 1'b0, resp);
      u_host.write(32'(REG_DATA), 32'h0, 1'b0, resp);
      check(resp == RESP_OKAY, "word before the error range accepted");
      u_host.write(32'(REG_DATA), 32'h0, 1'b0, resp);
      check(resp == RESP_SLVERR, "target error reported to software");
      if (resp == RESP_SLVERR) n_bus_err++;
      u_host.read(32'(REG_STATUS), 1'b0, q, resp);
      check(resp == RESP_OKAY && q[3] && !q[0], "STATUS shows the bus error");
      check(u_mem.n_nonsecure == 0, "target only sees secure accesses");
      done[g] = 1'b1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (&done);
    $display("mechanisms: to_ip=%0d from_ip=%0d words=%0d init_timed=%0d stall=%0d ns_reject=%0d refused=%0d bus_err=%0d iv_step=%0d",
             n_msg_to_ip, n_msg_from_ip, n_words, n_init_timed, n_stall, n_ns_reject,
             n_refused, n_bus_err, n_iv_step);
    check(n_msg_to_ip > 0,   "a software-to-IP (decrypt) message ran");
    check(n_msg_from_ip > 0, "an IP-to-software (encrypt) message ran");
    check(n_init_timed == NINST, "initialisation time measured on every instance");
    check(n_stall > 0,       "a DATA read was stalled during initialisation");
    check(n_ns_reject > 0,   "a non-secure access was refused");
    check(n_refused > 0,     "an out-of-message DATA access was refused");
    check(n_bus_err > 0,     "a target bus error was reported");
    check(n_iv_step > 0,     "the IV counter advanced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
