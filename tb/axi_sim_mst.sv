// Simulation-only AXI4 initiator with tasks for single-beat and burst accesses.
//
// Testbenches call its tasks hierarchically (i_mst.write(...), i_mst.read(...)). Bursts use the
// internal buffer `buffer`: write_burst sends buffer[0..len], read_burst fills it. Each task
// waits for its full transaction. Outputs change 1 time unit after the rising clock edge;
// inputs are sampled at the falling edge, so a handshake seen there completes at the next
// rising edge.
module axi_sim_mst import basilisk_pkg::*; #(
  parameter id_t Id = '0
) (
  input  logic     clk_i,
  output axi_req_t req_o,
  input  axi_rsp_t rsp_i
);

  data_t buffer [256];
  axi_resp_e last_resp;

  initial req_o = '0;

  task automatic write_burst(input addr_t addr, input int unsigned len, input strb_t strb,
                             output axi_resp_e resp);
    logic rdy;
    #1;
    req_o.aw = '{id: Id, addr: addr, len: 8'(len), size: 3'd3, burst: BurstIncr};
    req_o.aw_valid = 1'b1;
    do begin @(negedge clk_i); rdy = rsp_i.aw_ready; @(posedge clk_i); end while (!rdy);
    #1 req_o.aw_valid = 1'b0;
    for (int unsigned i = 0; i <= len; i++) begin
      req_o.w = '{data: buffer[i], strb: strb, last: (i == len)};
      req_o.w_valid = 1'b1;
      do begin @(negedge clk_i); rdy = rsp_i.w_ready; @(posedge clk_i); end while (!rdy);
      #1 req_o.w_valid = 1'b0;
    end
    req_o.b_ready = 1'b1;
    do begin @(negedge clk_i); rdy = rsp_i.b_valid; resp = rsp_i.b.resp; @(posedge clk_i); end
    while (!rdy);
    last_resp = resp;
    #1 req_o.b_ready = 1'b0;
  endtask

  task automatic read_burst(input addr_t addr, input int unsigned len, output axi_resp_e resp);
    int unsigned i = 0;
    logic rdy;
    axi_r_t r;
    resp = RespOkay;
    #1;
    req_o.ar = '{id: Id, addr: addr, len: 8'(len), size: 3'd3, burst: BurstIncr};
    req_o.ar_valid = 1'b1;
    do begin @(negedge clk_i); rdy = rsp_i.ar_ready; @(posedge clk_i); end while (!rdy);
    #1 req_o.ar_valid = 1'b0;
    req_o.r_ready = 1'b1;
    forever begin
      @(negedge clk_i);
      rdy = rsp_i.r_valid;
      r   = rsp_i.r;
      @(posedge clk_i);
      if (rdy) begin
        buffer[i] = r.data;
        if (r.resp != RespOkay) resp = r.resp;
        if (r.last || i == len) break;
        i++;
      end
    end
    last_resp = resp;
    #1 req_o.r_ready = 1'b0;
  endtask

  task automatic write(input addr_t addr, input data_t data, input strb_t strb = '1);
    axi_resp_e resp;
    buffer[0] = data;
    write_burst(addr, 0, strb, resp);
  endtask

  task automatic read(input addr_t addr, output data_t data);
    axi_resp_e resp;
    read_burst(addr, 0, resp);
    data = buffer[0];
  endtask

endmodule
