// SoC control registers: LLC way configuration, boot mode and a scratch register.
//
// Registers (32-bit, Regbus): 0x0 LLC_SPM_WAYS (bit w set: LLC way w is scratchpad, reset 0,
// all ways cache), 0x4 BOOT_MODE (read-only, the boot mode pins), 0x8 SCRATCH (read/write,
// for software handshakes). Accesses are answered in the same cycle; other offsets answer with
// error.
//
// From the SoC description: each LLC way can be configured dynamically as scratchpad; the
// boot ROM boots from several sources. The layout and reset values are own choices.
module soc_regs import basilisk_pkg::*; #(
  parameter int unsigned NumWays = 4
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  reg_req_t           reg_req_i,
  output reg_rsp_t           reg_rsp_o,
  input  logic [1:0]         boot_mode_i,
  output logic [NumWays-1:0] spm_ways_o
);

  logic [31:0] scratch_q;
  logic [3:0]  reg_off;
  assign reg_off = reg_req_i.addr[5:2];

  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    unique case (reg_off)
      4'd0: reg_rsp_o.rdata = 32'(spm_ways_o);
      4'd1: reg_rsp_o.rdata = 32'(boot_mode_i);
      4'd2: reg_rsp_o.rdata = scratch_q;
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      spm_ways_o <= '0;
      scratch_q  <= '0;
    end else if (reg_req_i.valid && reg_req_i.write) begin
      if (reg_off == 4'd0) spm_ways_o <= reg_req_i.wdata[NumWays-1:0];
      if (reg_off == 4'd2) scratch_q  <= reg_req_i.wdata;
    end
  end

endmodule
