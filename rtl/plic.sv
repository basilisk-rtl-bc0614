// Platform-level interrupt controller (RISC-V PLIC) for one context: the core's machine mode.
//
// Sources 1..NumSrc-1 are level-sensitive; source 0 does not exist. A gateway per source sets
// its pending bit while its line is high, unless the source has been claimed and not yet
// completed. The target line irq_o is high while some pending, enabled source has a priority
// above the threshold. Reading CLAIM returns the ID of the pending enabled source with the
// highest priority (the lowest ID wins ties), clears its pending bit and blocks its gateway;
// writing that ID to the same register (COMPLETE) opens the gateway again. A claim with
// nothing to give returns 0.
//
// Registers (Regbus, 32 bit): 0x000 + 4*i PRIORITY of source i (PrioWidth bits),
// 0x080 PENDING (read only, bit i = source i), 0x100 ENABLE, 0x200 THRESHOLD,
// 0x204 CLAIM/COMPLETE. Accesses are answered in the same cycle; irq_o follows a source with
// one cycle of gateway register.
//
// From the SoC description: RISC-V-compliant interrupt controllers. The behaviour follows the
// RISC-V PLIC specification; the number of sources, the priority width and the compact register
// layout (the standard one spans 64 MiB) are this design's own choices.
module plic import basilisk_pkg::*; #(
  parameter int unsigned NumSrc    = 8,
  parameter int unsigned PrioWidth = 3
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [NumSrc-1:0] irq_src_i,   // bit 0 is ignored
  input  reg_req_t          reg_req_i,
  output reg_rsp_t          reg_rsp_o,
  output logic              irq_o
);

  typedef logic [PrioWidth-1:0] prio_t;
  localparam int unsigned SrcIdWidth = $clog2(NumSrc);
  typedef logic [SrcIdWidth-1:0] id_t;

  prio_t             prio_q [NumSrc];
  prio_t             thresh_q;
  logic [NumSrc-1:0] pending_q, enable_q, claimed_q;

  // Arbitration: highest priority above threshold, lowest ID on ties.
  id_t   best_id;
  prio_t best_prio;
  always_comb begin
    best_id   = '0;
    best_prio = thresh_q;
    for (int i = 1; i < NumSrc; i++) begin
      if (pending_q[i] && enable_q[i] && (prio_q[i] > best_prio)) begin
        best_id   = id_t'(i);
        best_prio = prio_q[i];
      end
    end
  end
  assign irq_o = (best_id != '0);

  logic [9:0] reg_off;
  logic       is_claim_rd, is_complete;
  assign reg_off     = reg_req_i.addr[11:2];
  assign is_claim_rd = reg_req_i.valid && !reg_req_i.write && (reg_off == 10'h081);
  assign is_complete = reg_req_i.valid &&  reg_req_i.write && (reg_off == 10'h081);

  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    if (reg_off < 10'(NumSrc)) begin
      reg_rsp_o.rdata = 32'(prio_q[reg_off[SrcIdWidth-1:0]]);
    end else begin
      unique case (reg_off)
        10'h020: reg_rsp_o.rdata = 32'(pending_q);
        10'h040: reg_rsp_o.rdata = 32'(enable_q);
        10'h080: reg_rsp_o.rdata = 32'(thresh_q);
        10'h081: reg_rsp_o.rdata = 32'(best_id);
        default: reg_rsp_o.error = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NumSrc; i++) prio_q[i] <= '0;
      thresh_q  <= '0;
      pending_q <= '0;
      enable_q  <= '0;
      claimed_q <= '0;
    end else begin
      // Gateways: level-sensitive sources, held off while claimed.
      for (int i = 1; i < NumSrc; i++) begin
        if (irq_src_i[i] && !claimed_q[i]) pending_q[i] <= 1'b1;
      end
      if (is_claim_rd && (best_id != '0)) begin
        pending_q[best_id] <= 1'b0;
        claimed_q[best_id] <= 1'b1;
      end
      if (is_complete && (reg_req_i.wdata < 32'(NumSrc))) begin
        claimed_q[reg_req_i.wdata[SrcIdWidth-1:0]] <= 1'b0;
      end
      if (reg_req_i.valid && reg_req_i.write) begin
        if (reg_off < 10'(NumSrc)) begin
          if (reg_off != '0) prio_q[reg_off[SrcIdWidth-1:0]] <= reg_req_i.wdata[PrioWidth-1:0];
        end else if (reg_off == 10'h040) begin
          enable_q <= reg_req_i.wdata[NumSrc-1:0] & ~NumSrc'(1);
        end else if (reg_off == 10'h080) begin
          thresh_q <= reg_req_i.wdata[PrioWidth-1:0];
        end
      end
    end
  end

endmodule
