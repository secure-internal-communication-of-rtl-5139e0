// tb_axil_master_if: self-checking testbench of axil_master_if.
//
// The master port drives a behavioural AXI4-Lite memory with random
// handshake delays. Random write and read commands are issued on the
// command port; a shadow array holds what the memory should contain.
// Checks: one rsp_valid pulse per command, read data equal to the shadow,
// rsp_err set exactly for addresses in the memory's error range, every
// access marked secure, and the write/read counts seen by the memory.
module tb_axil_master_if;
  import crypto_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0;
  int   failures = 0;

  always #5 clk = ~clk;

  logic        cmd_valid = 1'b0, cmd_ready, cmd_write = 1'b0;
  logic [31:0] cmd_addr = '0, cmd_wdata = '0;
  logic        rsp_valid, rsp_err;
  logic [31:0] rsp_rdata;
  axil_req_t   m_req;
  axil_rsp_t   m_rsp;

  axil_master_if dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_write, .cmd_addr,
                      .cmd_wdata, .rsp_valid, .rsp_rdata, .rsp_err, .m_req, .m_rsp);
  axil_mem_model #(.DEPTH(64), .ERR_BASE(32'h100)) u_mem (.clk, .rst_n, .req (m_req), .rsp (m_rsp));

  int n_rsp = 0;
  always @(posedge clk) if (rst_n && rsp_valid) n_rsp++;

  initial begin
    repeat (20000) @(posedge clk);
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

  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  // One command; returns read data and error.
  task automatic access(input logic wr, input logic [31:0] a, input logic [31:0] d,
                        output logic [31:0] q, output logic err);
    int n0;
    n0 = n_rsp;
    cmd_valid = 1'b1;
    cmd_write = wr;
    cmd_addr  = a;
    cmd_wdata = d;
    while (!cmd_ready) tick();
    tick();
    cmd_valid = 1'b0;
    cmd_wdata = '0;
    while (!rsp_valid) tick();
    q   = rsp_rdata;
    err = rsp_err;
    tick();
    check(n_rsp == n0 + 1 && !rsp_valid, "exactly one response pulse per command");
  endtask

  logic [31:0] shadow [64];

  initial begin
    logic [31:0] q, a, d;
    logic        err, wr;
    int          nw, nr;
    for (int i = 0; i < 64; i++) shadow[i] = '0;
    nw = 0;
    nr = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      wr = 1'($urandom_range(0, 1));
      a  = 32'({$urandom_range(0, 79), 2'b00});   // 0x000..0x13C, top part errors
      d  = $urandom();
      access(wr, a, d, q, err);
      if (wr) nw++; else nr++;
      check(err == (a >= 32'h100), $sformatf("error flag %0b for address %h", err, a));
      if (wr && a < 32'h100) shadow[a >> 2] = d;
      if (!wr && a < 32'h100)
        check(q == shadow[a >> 2], $sformatf("read %h from %h, expected %h", q, a, shadow[a >> 2]));
    end
    check(u_mem.n_writes == nw && u_mem.n_reads == nr, "memory saw every access once");
    check(u_mem.n_nonsecure == 0, "all accesses must be secure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
