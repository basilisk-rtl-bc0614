// Bridge from a 64-bit AXI4 target port to the 32-bit Regbus.
//
// The Regbus carries no bursts, so every AXI beat becomes one Regbus access. Address bit 2
// picks the 32-bit half of the 64-bit beat: its data and strobes are taken from that half for
// writes, and read data is returned in both halves. A Regbus error gives SLVERR on the AXI side
// (sticky over a burst). One transaction at a time; reads and writes alternate when both wait.
//
// Timing: a single-beat access takes three cycles plus the Regbus wait cycles.
//
// From the SoC description: peripherals without burst support sit on a Regbus behind the
// crossbar. Own choices: 32-bit Regbus data, the half-word mapping, one access per beat.
module axi_to_reg import basilisk_pkg::*; (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o,
  output reg_req_t reg_req_o,
  input  reg_rsp_t reg_rsp_i
);

  typedef enum logic [2:0] {Idle, WData, RegAcc, RResp, BResp} state_e;

  state_e      state_q;
  logic        is_write_q, last_write_q;
  axi_ax_t     ax_q;  // size and burst are not used: INCR of 64-bit beats
  logic [7:0]  beat_q;
  axi_w_t      w_q;
  axi_resp_e   err_q;
  logic [31:0] rdata_q;

  addr_t beat_addr;
  assign beat_addr = ax_q.addr + addr_t'({beat_q, 3'b000});

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= Idle;
      is_write_q   <= 1'b0;
      last_write_q <= 1'b0;
      ax_q         <= '0;
      beat_q       <= '0;
      w_q          <= '0;
      err_q        <= RespOkay;
      rdata_q      <= '0;
    end else begin
      unique case (state_q)
        Idle: begin
          beat_q <= '0;
          err_q  <= RespOkay;
          if (axi_rsp_o.aw_ready) begin
            ax_q <= axi_req_i.aw; is_write_q <= 1'b1; last_write_q <= 1'b1; state_q <= WData;
          end else if (axi_rsp_o.ar_ready) begin
            ax_q <= axi_req_i.ar; is_write_q <= 1'b0; last_write_q <= 1'b0; state_q <= RegAcc;
          end
        end
        WData: if (axi_req_i.w_valid) begin
          w_q <= axi_req_i.w; state_q <= RegAcc;
        end
        RegAcc: if (reg_rsp_i.ready) begin
          rdata_q <= reg_rsp_i.rdata;
          if (reg_rsp_i.error) err_q <= RespSlvErr;
          state_q <= is_write_q ? BResp : RResp;
        end
        RResp: if (axi_req_i.r_ready) begin
          if (beat_q == ax_q.len) state_q <= Idle;
          else begin beat_q <= beat_q + 8'd1; state_q <= RegAcc; end
        end
        BResp: begin
          if (!w_q.last) begin
            beat_q <= beat_q + 8'd1; state_q <= WData;
          end else if (axi_req_i.b_ready) state_q <= Idle;
        end
        default: state_q <= Idle;
      endcase
    end
  end

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.aw_ready = (state_q == Idle) && axi_req_i.aw_valid &&
                         (!axi_req_i.ar_valid || !last_write_q);
    axi_rsp_o.ar_ready = (state_q == Idle) && axi_req_i.ar_valid && !axi_rsp_o.aw_ready;
    axi_rsp_o.w_ready  = (state_q == WData);
    axi_rsp_o.b_valid  = (state_q == BResp) && w_q.last;
    axi_rsp_o.b.id     = ax_q.id;
    axi_rsp_o.b.resp   = err_q;
    axi_rsp_o.r_valid  = (state_q == RResp);
    axi_rsp_o.r.id     = ax_q.id;
    axi_rsp_o.r.data   = {rdata_q, rdata_q};
    axi_rsp_o.r.resp   = err_q;
    axi_rsp_o.r.last   = (beat_q == ax_q.len);
  end

  always_comb begin
    reg_req_o       = '0;
    reg_req_o.valid = (state_q == RegAcc);
    reg_req_o.addr  = {beat_addr[AddrWidth-1:2], 2'b00};
    reg_req_o.write = is_write_q;
    reg_req_o.wdata = beat_addr[2] ? w_q.data[63:32] : w_q.data[31:0];
    reg_req_o.wstrb = beat_addr[2] ? w_q.strb[7:4]   : w_q.strb[3:0];
  end

endmodule
