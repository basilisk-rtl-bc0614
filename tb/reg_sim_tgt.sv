// Simulation-only Regbus target: 64 32-bit registers with byte strobes and WaitCycles wait
// states per access; offsets at or above 0x100 answer with error. Counts accesses.
module reg_sim_tgt import basilisk_pkg::*; #(
  parameter int unsigned WaitCycles = 2,
  parameter logic [31:0] Tag        = 32'h0
) (
  input  logic     clk_i,
  input  reg_req_t req_i,
  output reg_rsp_t rsp_o
);

  logic [31:0] regs [64];
  int unsigned n_acc = 0, wait_cnt = 0;

  initial for (int i = 0; i < 64; i++) regs[i] = Tag ^ 32'(i);

  always_comb begin
    rsp_o       = '0;
    rsp_o.ready = req_i.valid && (wait_cnt == WaitCycles);
    rsp_o.error = (req_i.addr[11:0] >= 12'h100);
    rsp_o.rdata = regs[req_i.addr[7:2]];
  end

  always @(posedge clk_i) begin
    if (req_i.valid && wait_cnt == WaitCycles) begin
      wait_cnt <= 0;
      n_acc++;
      if (req_i.write && req_i.addr[11:0] < 12'h100)
        for (int b = 0; b < 4; b++)
          if (req_i.wstrb[b]) regs[req_i.addr[7:2]][8*b +: 8] <= req_i.wdata[8*b +: 8];
    end else if (req_i.valid) wait_cnt <= wait_cnt + 1;
  end

endmodule
