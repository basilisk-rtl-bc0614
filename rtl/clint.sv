// Core-local interruptor: machine timer and software interrupt of one RISC-V hart.
//
// mtime counts up by one on every cycle in which rtc_i is high (tie it high to count clock
// cycles). The timer interrupt mtip_o is high while mtime >= mtimecmp; the software interrupt
// msip_o is bit 0 of MSIP. Registers (32-bit halves, Regbus): 0x0 MSIP, 0x8 MTIMECMP low,
// 0xC MTIMECMP high, 0x10 MTIME low, 0x14 MTIME high. mtimecmp resets to all ones, so no timer
// interrupt is pending after reset. Accesses are answered in the same cycle.
//
// From the SoC description: RISC-V-compliant interrupt controllers. The register meaning
// follows the RISC-V privileged specification; the compact 4 KiB layout is own choice.
module clint import basilisk_pkg::*; (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     rtc_i,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     mtip_o,
  output logic     msip_o
);

  logic [63:0] mtime_q, mtimecmp_q;
  logic        msip_q;
  logic [3:0]  reg_off;
  assign reg_off = reg_req_i.addr[5:2];

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] wdata, logic [3:0] strb);
    for (int b = 0; b < 4; b++) if (strb[b]) old[8*b +: 8] = wdata[8*b +: 8];
    return old;
  endfunction

  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    unique case (reg_off)
      4'd0: reg_rsp_o.rdata = {31'd0, msip_q};
      4'd2: reg_rsp_o.rdata = mtimecmp_q[31:0];
      4'd3: reg_rsp_o.rdata = mtimecmp_q[63:32];
      4'd4: reg_rsp_o.rdata = mtime_q[31:0];
      4'd5: reg_rsp_o.rdata = mtime_q[63:32];
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mtime_q    <= '0;
      mtimecmp_q <= '1;
      msip_q     <= 1'b0;
    end else begin
      if (rtc_i) mtime_q <= mtime_q + 64'd1;
      if (reg_req_i.valid && reg_req_i.write) unique case (reg_off)
        4'd0: if (reg_req_i.wstrb[0]) msip_q <= reg_req_i.wdata[0];
        4'd2: mtimecmp_q[31:0]  <= merge(mtimecmp_q[31:0],  reg_req_i.wdata, reg_req_i.wstrb);
        4'd3: mtimecmp_q[63:32] <= merge(mtimecmp_q[63:32], reg_req_i.wdata, reg_req_i.wstrb);
        4'd4: mtime_q[31:0]     <= merge(mtime_q[31:0],     reg_req_i.wdata, reg_req_i.wstrb);
        4'd5: mtime_q[63:32]    <= merge(mtime_q[63:32],    reg_req_i.wdata, reg_req_i.wstrb);
        default: ;
      endcase
    end
  end

  assign mtip_o = (mtime_q >= mtimecmp_q);
  assign msip_o = msip_q;

endmodule
