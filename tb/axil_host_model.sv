// axil_host_model: behavioural AXI4-Lite master standing in for the
// processing system in the testbenches. Other code calls its tasks
// hierarchically: write() and read() perform one access each and return
// the response, with the secure/non-secure bit given per access (AxPROT[1]).
// For writes the order of AW and W is chosen at random (together, AW
// first, or W first), and B/R ready are delayed at random, so that the
// slave is tested against all legal orderings. Signals change 1 time unit
// after a rising clock edge.
module axil_host_model
  import crypto_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);

  initial req = '0;

  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  task automatic write(input logic [31:0] addr, input logic [31:0] data,
                       input logic nonsecure, output logic [1:0] resp);
    int order;
    bit aw_done, w_done;
    order = $urandom_range(0, 2);
    req.aw_addr = addr;
    req.aw_prot = {1'b0, nonsecure, 1'b0};
    req.w_data  = data;
    req.w_strb  = 4'hF;
    req.aw_valid = (order != 2);
    req.w_valid  = (order != 1);
    aw_done = 0;
    w_done  = 0;
    while (!(aw_done && w_done)) begin
      if (req.aw_valid && rsp.aw_ready) aw_done = 1;
      if (req.w_valid  && rsp.w_ready)  w_done  = 1;
      tick();
      if (aw_done) req.aw_valid = 1'b0;
      if (w_done)  req.w_valid  = 1'b0;
      if (!aw_done) req.aw_valid = 1'b1;
      if (!w_done)  req.w_valid  = 1'b1;
    end
    repeat ($urandom_range(0, 2)) tick();
    req.b_ready = 1'b1;
    while (!rsp.b_valid) tick();
    resp = rsp.b_resp;
    tick();
    req.b_ready = 1'b0;
  endtask

  task automatic read(input logic [31:0] addr, input logic nonsecure,
                      output logic [31:0] data, output logic [1:0] resp);
    req.ar_addr  = addr;
    req.ar_prot  = {1'b0, nonsecure, 1'b0};
    req.ar_valid = 1'b1;
    while (!rsp.ar_ready) tick();
    tick();
    req.ar_valid = 1'b0;
    repeat ($urandom_range(0, 2)) tick();
    req.r_ready = 1'b1;
    while (!rsp.r_valid) tick();
    data = rsp.r_data;
    resp = rsp.r_resp;
    tick();
    req.r_ready = 1'b0;
  endtask

endmodule
