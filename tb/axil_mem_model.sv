// axil_mem_model: behavioural AXI4-Lite memory standing in for the target
// IP of the secure hardware area in the testbenches. DEPTH 32-bit words
// from address 0; word addresses at or above ERR_BASE answer SLVERR (write
// dropped, read data 0). Each channel's ready is raised after a random
// delay of 0..MAX_WAIT clocks, so that the master's handshakes are tested
// against slow and fast targets. Counts the accesses it served.
module axil_mem_model
  import crypto_pkg::*;
#(
  parameter int DEPTH    = 256,
  parameter int ERR_BASE = 32'h0000_0800,
  parameter int MAX_WAIT = 3
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp
);

  logic [31:0] mem [DEPTH];
  int          n_writes = 0;
  int          n_reads  = 0;
  int          n_errors = 0;
  int          n_nonsecure = 0;

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  // All sampling and driving happens 1 time unit after a rising edge, when
  // the DUT's registered outputs are stable until the next edge.
  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  initial begin
    rsp = '0;
    forever begin
      tick();
      if (!rst_n) begin
        rsp = '0;
      end else if (req.aw_valid && req.w_valid) begin
        logic [31:0] a, d;
        repeat ($urandom_range(0, MAX_WAIT)) tick();
        a = req.aw_addr;
        d = req.w_data;
        if (req.aw_prot[1]) n_nonsecure++;
        rsp.aw_ready = 1'b1;
        rsp.w_ready  = 1'b1;
        tick();
        rsp.aw_ready = 1'b0;
        rsp.w_ready  = 1'b0;
        n_writes++;
        if (a >= ERR_BASE || (a >> 2) >= DEPTH) begin
          rsp.b_resp = RESP_SLVERR;
          n_errors++;
        end else begin
          mem[a >> 2] = d;
          rsp.b_resp = RESP_OKAY;
        end
        repeat ($urandom_range(0, MAX_WAIT)) tick();
        rsp.b_valid = 1'b1;
        while (!req.b_ready) tick();
        tick();
        rsp.b_valid = 1'b0;
      end else if (req.ar_valid) begin
        logic [31:0] a;
        repeat ($urandom_range(0, MAX_WAIT)) tick();
        a = req.ar_addr;
        if (req.ar_prot[1]) n_nonsecure++;
        rsp.ar_ready = 1'b1;
        tick();
        rsp.ar_ready = 1'b0;
        n_reads++;
        if (a >= ERR_BASE || (a >> 2) >= DEPTH) begin
          rsp.r_resp = RESP_SLVERR;
          rsp.r_data = '0;
          n_errors++;
        end else begin
          rsp.r_resp = RESP_OKAY;
          rsp.r_data = mem[a >> 2];
        end
        repeat ($urandom_range(0, MAX_WAIT)) tick();
        rsp.r_valid = 1'b1;
        while (!req.r_ready) tick();
        tick();
        rsp.r_valid = 1'b0;
      end
    end
  end

endmodule
