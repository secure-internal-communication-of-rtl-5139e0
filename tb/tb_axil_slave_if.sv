// tb_axil_slave_if: self-checking testbench of axil_slave_if.
//
// A behavioural AXI4-Lite host issues random secure and non-secure
// accesses with random AW/W ordering; a behavioural controller on the
// register port answers after a random stall, with read data derived from
// the address and an error for offset 0xFC. Checks: every secure access
// reaches the register port exactly once with the right offset and data;
// responses carry the controller's data and error; non-secure accesses get
// SLVERR and never reach the register port.
module tb_axil_slave_if;
  import crypto_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0;
  int   failures = 0;

  always #5 clk = ~clk;

  axil_req_t   s_req;
  axil_rsp_t   s_rsp;
  reg_req_t    reg_req;
  logic        reg_ack = 1'b0, reg_err = 1'b0;
  logic [31:0] reg_rdata = '0;

  axil_slave_if dut (.clk, .rst_n, .s_req, .s_rsp, .reg_req, .reg_ack, .reg_rdata, .reg_err);
  axil_host_model u_host (.clk, .req (s_req), .rsp (s_rsp));

  // Behavioural register port: stall 0..4 clocks, then acknowledge.
  int          n_req = 0;
  logic        last_write;
  logic [7:0]  last_addr;
  logic [31:0] last_wdata;

  function automatic logic [31:0] pattern(input logic [7:0] a);
    return {a, ~a, a ^ 8'h5A, 8'hC3};
  endfunction

  initial begin
    forever begin
      @(posedge clk);
      #1;
      if (reg_req.valid) begin
        repeat ($urandom_range(0, 4)) begin
          @(posedge clk);
          #1;
        end
        reg_ack   = 1'b1;
        reg_err   = (reg_req.addr == 8'hFC);
        reg_rdata = pattern(reg_req.addr);
        n_req++;
        last_write = reg_req.write;
        last_addr  = reg_req.addr;
        last_wdata = reg_req.wdata;
        @(posedge clk);
        #1;
        reg_ack = 1'b0;
      end
    end
  end

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

  initial begin
    logic [1:0]  resp;
    logic [31:0] rd;
    logic [31:0] addr, data;
    logic        ns;
    int          n_prev;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      addr = {24'h4000_00, 6'($urandom_range(0, 63)), 2'b00};
      if (i % 17 == 3) addr[7:0] = 8'hFC;
      data = $urandom();
      ns   = ($urandom_range(0, 4) == 0);
      n_prev = n_req;
      if ($urandom_range(0, 1) != 0) begin
        u_host.write(addr, data, ns, resp);
        if (ns) begin
          check(resp == RESP_SLVERR, "non-secure write must get SLVERR");
          check(n_req == n_prev, "non-secure write must not reach the controller");
        end else begin
          check(n_req == n_prev + 1, "secure write must reach the controller once");
          check(last_write && last_addr == addr[7:0] && last_wdata == data,
                $sformatf("write forwarded wrongly: addr %h data %h", last_addr, last_wdata));
          check(resp == ((addr[7:0] == 8'hFC) ? RESP_SLVERR : RESP_OKAY), "write response");
        end
      end else begin
        u_host.read(addr, ns, rd, resp);
        if (ns) begin
          check(resp == RESP_SLVERR && rd == '0, "non-secure read must get SLVERR and no data");
          check(n_req == n_prev, "non-secure read must not reach the controller");
        end else begin
          check(n_req == n_prev + 1, "secure read must reach the controller once");
          check(!last_write && last_addr == addr[7:0], "read forwarded wrongly");
          if (addr[7:0] == 8'hFC)
            check(resp == RESP_SLVERR, "read error response");
          else
            check(resp == RESP_OKAY && rd == pattern(addr[7:0]),
                  $sformatf("read data %h, expected %h", rd, pattern(addr[7:0])));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
