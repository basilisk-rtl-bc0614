// Simulation-only Regbus initiator with read and write tasks for peripheral testbenches.
// Requests are driven 1 time unit after a rising edge and completed at the edge where ready
// is seen (sampled at the falling edge before it).
module reg_drv import basilisk_pkg::*; (
  input  logic     clk_i,
  output reg_req_t req_o,
  input  reg_rsp_t rsp_i
);

  logic last_error;

  initial req_o = '0;

  task automatic access(input logic [31:0] addr, input logic we, input logic [31:0] wdata,
                        output logic [31:0] rdata);
    logic rdy;
    #1;
    req_o = '{addr: addr, write: we, wdata: wdata, wstrb: 4'hF, valid: 1'b1};
    do begin
      @(negedge clk_i);
      rdy = rsp_i.ready; rdata = rsp_i.rdata; last_error = rsp_i.error;
      @(posedge clk_i);
    end while (!rdy);
    #1 req_o.valid = 1'b0;
  endtask

  task automatic write(input logic [31:0] addr, input logic [31:0] wdata);
    logic [31:0] unused;
    access(addr, 1'b1, wdata, unused);
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] rdata);
    access(addr, 1'b0, '0, rdata);
  endtask

endmodule
