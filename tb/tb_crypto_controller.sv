// tb_crypto_controller: self-checking testbench of crypto_controller.
//
// The controller runs with a real trivium_core (32 bits per clock). Its
// register port is driven directly and its master command port is answered
// by a behavioural memory (random ready and response delays; addresses at
// or above 0x400 answer with an error). Expected keystream comes from the
// bit-serial reference model, with IV = the message counter.
// Checks:
//   - DIR_TO_IP messages: memory ends up holding ciphertext XOR keystream;
//   - DIR_FROM_IP messages: DATA reads return memory XOR keystream;
//   - the first word leaves 36 + 2 clocks after start (cipher
//     initialisation plus keystream gathering and state change);
//   - a DATA read issued right after start is stalled, not refused;
//   - the IV counter advances by one per message;
//   - refused requests: DATA outside a message, CTRL/ADDR while busy,
//     LEN = 0, read-only and unknown registers; bus errors are reported.
module tb_crypto_controller;
  import crypto_pkg::*;
  import cipher_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0;
  int   failures = 0;

  always #5 clk = ~clk;

  reg_req_t    reg_req = '0;
  logic        reg_ack, reg_err;
  logic [31:0] reg_rdata;
  logic        cmd_valid, cmd_ready = 1'b0, cmd_write;
  logic [31:0] cmd_addr, cmd_wdata;
  logic        rsp_valid = 1'b0, rsp_err = 1'b0;
  logic [31:0] rsp_rdata = '0;
  logic        ks_load, ks_next, ks_ready, busy;
  logic [63:0] ks_iv_cnt;
  logic [31:0] ks;
  logic [79:0] key = '0;

  crypto_controller dut (
    .clk, .rst_n, .reg_req, .reg_ack, .reg_rdata, .reg_err,
    .cmd_valid, .cmd_ready, .cmd_write, .cmd_addr, .cmd_wdata,
    .rsp_valid, .rsp_rdata, .rsp_err,
    .ks_load, .ks_iv_cnt, .ks_next, .ks_ready, .ks, .busy
  );

  trivium_core u_cipher (.clk, .rst_n, .load (ks_load), .key, .iv (80'(ks_iv_cnt)),
                         .next (ks_next), .ready (ks_ready), .ks);

  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  // Behavioural target on the command port.
  logic [31:0] mem [256];
  int          n_cmd = 0;
  initial begin
    for (int i = 0; i < 256; i++) mem[i] = '0;
    forever begin
      tick();
      if (cmd_valid) begin
        logic        w;
        logic [31:0] a, d;
        repeat ($urandom_range(0, 3)) tick();
        cmd_ready = 1'b1;
        w = cmd_write;
        a = cmd_addr;
        d = cmd_wdata;
        tick();
        cmd_ready = 1'b0;
        n_cmd++;
        repeat ($urandom_range(0, 4)) tick();
        rsp_valid = 1'b1;
        rsp_err   = (a >= 32'h400);
        rsp_rdata = (w || a >= 32'h400) ? '0 : mem[a[9:2]];
        if (w && a < 32'h400) mem[a[9:2]] = d;
        tick();
        rsp_valid = 1'b0;
      end
    end
  end

  // Clock counter for latency checks.
  int cyc = 0;
  int first_cmd_cyc = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cmd_valid && first_cmd_cyc < 0) first_cmd_cyc <= cyc;
  end

  initial begin
    repeat (50000) @(posedge clk);
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

  // One register access; returns data, error and the clocks it was stalled.
  task automatic reg_access(input logic wr, input logic [7:0] a, input logic [31:0] d,
                            output logic [31:0] q, output logic err, output int stall);
    reg_req.valid = 1'b1;
    reg_req.write = wr;
    reg_req.addr  = a;
    reg_req.wdata = d;
    stall = 0;
    #1;   // sample after everything driven at +1 has settled
    while (!reg_ack) begin
      @(posedge clk);
      #2;
      stall++;
    end
    q   = reg_rdata;
    err = reg_err;
    tick();
    reg_req = '0;
  endtask

  logic [31:0] q;
  logic        err;
  int          stall;
  longint      msg_cnt = 0;

  // Run one message of len words at word address base.
  task automatic message(input dir_e dir, input int len, input logic [31:0] base,
                         input bit check_latency);
    bit          z[$];
    logic [31:0] plain [$];
    logic [31:0] ksw;
    int          start_cyc;
    trivium_ref(key, 80'(msg_cnt), 32 * len, z);
    reg_access(1, REG_ADDR, base, q, err, stall);
    check(!err, "ADDR write accepted while idle");
    for (int i = 0; i < len; i++) plain.push_back($urandom());
    if (dir == DIR_FROM_IP)
      for (int i = 0; i < len; i++) mem[8'((base >> 2) + i)] = plain[i];
    first_cmd_cyc = -1;
    start_cyc = cyc;
    reg_access(1, REG_CTRL, {16'(len), 14'b0, 1'(dir), 1'b1}, q, err, stall);
    check(!err && busy, "start accepted");
    // Requests refused during a message.
    reg_access(1, REG_CTRL, 32'h0001_0001, q, err, stall);
    check(err, "CTRL write while busy must be refused");
    reg_access(1, REG_ADDR, 32'h0, q, err, stall);
    check(err, "ADDR write while busy must be refused");
    reg_access(dir == DIR_TO_IP ? 1'b0 : 1'b1, REG_DATA, 32'h0, q, err, stall);
    check(err, "DATA access of the wrong direction must be refused");
    for (int i = 0; i < len; i++) begin
      ksw = ks_word(z, i);
      if (dir == DIR_TO_IP) begin
        reg_access(1, REG_DATA, plain[i] ^ ksw, q, err, stall);
        check(!err, "DATA write accepted");
      end else begin
        reg_access(0, REG_DATA, 32'h0, q, err, stall);
        check(!err && q == (plain[i] ^ ksw),
              $sformatf("ciphertext word %0d is %h, expected %h", i, q, plain[i] ^ ksw));
        if (i == 0 && check_latency)
          check(stall > 36, $sformatf("first DATA read must stall during initialisation (%0d)", stall));
      end
      if (i == 0 && check_latency)
        check(first_cmd_cyc - start_cyc == 36 + 2 + 1,
              $sformatf("first command %0d clocks after start", first_cmd_cyc - start_cyc - 1));
    end
    if (dir == DIR_TO_IP)
      for (int i = 0; i < len; i++)
        check(mem[8'((base >> 2) + i)] == plain[i], $sformatf("plaintext word %0d at the target", i));
    check(!busy, "idle after the last word");
    msg_cnt++;
    reg_access(0, REG_IVLO, 32'h0, q, err, stall);
    check(!err && q == 32'(msg_cnt), $sformatf("IV counter %0d, expected %0d", q, msg_cnt));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    key = 80'({$urandom(), $urandom(), $urandom()});
    // Refused while idle.
    reg_access(1, REG_DATA, 32'h1234, q, err, stall);
    check(err, "DATA write while idle must be refused");
    reg_access(0, REG_DATA, 32'h0, q, err, stall);
    check(err, "DATA read while idle must be refused");
    reg_access(1, REG_CTRL, 32'h0000_0001, q, err, stall);
    check(err && !busy, "LEN = 0 must be refused");
    reg_access(1, REG_STATUS, 32'h0, q, err, stall);
    check(err, "STATUS is read-only");
    reg_access(0, 8'h40, 32'h0, q, err, stall);
    check(err, "unknown register");
    reg_access(0, REG_IVLO, 32'h0, q, err, stall);
    check(!err && q == 0, "IV counter starts at zero");

    message(DIR_TO_IP,   1, 32'h000, 1);
    message(DIR_FROM_IP, 1, 32'h000, 1);
    for (int m = 0; m < 6; m++)
      message(dir_e'(m % 2), $urandom_range(2, 12), 32'({$urandom_range(0, 100), 2'b00}), 0);

    // A message that runs into the error range of the target.
    reg_access(1, REG_ADDR, 32'h3FC, q, err, stall);
    reg_access(1, REG_CTRL, {16'd2, 14'b0, 1'b0, 1'b1}, q, err, stall);
    reg_access(1, REG_DATA, 32'h1, q, err, stall);
    check(!err, "word below the error range accepted");
    reg_access(1, REG_DATA, 32'h2, q, err, stall);
    check(err, "bus error reported on the DATA write");
    reg_access(0, REG_STATUS, 32'h0, q, err, stall);
    check(!err && q[3] && !q[0], "STATUS shows the bus error and idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
