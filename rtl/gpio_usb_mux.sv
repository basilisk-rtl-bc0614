// 8-bit GPIO whose pins are shared with the four USB 1.1 ports.
//
// Pins 2p and 2p+1 carry D+ and D- of USB port p when bit p of USB_SEL is set, and GPIO
// bits 2p and 2p+1 otherwise, so software can give any mix of ports and GPIO lines to the
// pads. Registers (32-bit, Regbus): 0x0 OUT, 0x4 OE (1 = drive), 0x8 IN (synchronised pad
// inputs, read only), 0xC USB_SEL (4 bits). The USB controller sees its D+/D- inputs only
// from pins given to it (idle J state, D+ high, otherwise). Inputs pass a two-flop
// synchroniser; Regbus accesses are answered in the same cycle.
//
// From the SoC description: each USB port is multiplexed with GPIOs, giving a software
// controlled IO bus of up to 8 bits. The pin assignment and register map are own choices.
module gpio_usb_mux import basilisk_pkg::*; #(
  parameter int unsigned NumUsbPorts = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  reg_req_t                 reg_req_i,
  output reg_rsp_t                 reg_rsp_o,
  // USB controller side
  input  logic [NumUsbPorts-1:0]   usb_dp_i,
  input  logic [NumUsbPorts-1:0]   usb_dm_i,
  input  logic [NumUsbPorts-1:0]   usb_oe_i,
  output logic [NumUsbPorts-1:0]   usb_dp_o,
  output logic [NumUsbPorts-1:0]   usb_dm_o,
  // pads
  output logic [2*NumUsbPorts-1:0] pad_o,
  output logic [2*NumUsbPorts-1:0] pad_oe_o,
  input  logic [2*NumUsbPorts-1:0] pad_i
);

  localparam int unsigned NumPins = 2 * NumUsbPorts;

  logic [NumPins-1:0]     out_q, oe_q, in_q, sync_q;
  logic [NumUsbPorts-1:0] usb_sel_q;
  logic [3:0]             reg_off;
  assign reg_off = reg_req_i.addr[5:2];

  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    unique case (reg_off)
      4'd0: reg_rsp_o.rdata = 32'(out_q);
      4'd1: reg_rsp_o.rdata = 32'(oe_q);
      4'd2: reg_rsp_o.rdata = 32'(in_q);
      4'd3: reg_rsp_o.rdata = 32'(usb_sel_q);
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_q     <= '0;
      oe_q      <= '0;
      sync_q    <= '0;
      in_q      <= '0;
      usb_sel_q <= '0;
    end else begin
      sync_q <= pad_i;
      in_q   <= sync_q;
      if (reg_req_i.valid && reg_req_i.write) unique case (reg_off)
        4'd0: out_q     <= reg_req_i.wdata[NumPins-1:0];
        4'd1: oe_q      <= reg_req_i.wdata[NumPins-1:0];
        4'd3: usb_sel_q <= reg_req_i.wdata[NumUsbPorts-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    for (int unsigned p = 0; p < NumUsbPorts; p++) begin
      if (usb_sel_q[p]) begin
        pad_o[2*p]      = usb_dp_i[p];
        pad_o[2*p+1]    = usb_dm_i[p];
        pad_oe_o[2*p]   = usb_oe_i[p];
        pad_oe_o[2*p+1] = usb_oe_i[p];
        usb_dp_o[p]     = pad_i[2*p];
        usb_dm_o[p]     = pad_i[2*p+1];
      end else begin
        pad_o[2*p]      = out_q[2*p];
        pad_o[2*p+1]    = out_q[2*p+1];
        pad_oe_o[2*p]   = oe_q[2*p];
        pad_oe_o[2*p+1] = oe_q[2*p+1];
        usb_dp_o[p]     = 1'b1;
        usb_dm_o[p]     = 1'b0;
      end
    end
  end

endmodule
