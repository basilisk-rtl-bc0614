// AXI4 error target: answers every transaction routed to it with a decode error.
//
// The crossbar sends accesses that hit no address rule here. A write is accepted, its W beats
// are drained up to the last one, and a single B with DECERR follows. A read returns len+1 R
// beats with zero data and DECERR, the last one flagged. It serves one transaction per
// direction at a time, which is all the crossbar ever sends it.
module axi_err_slv import basilisk_pkg::*; (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o
);

  typedef enum logic [1:0] {WIdle, WData, WResp} w_state_e;
  w_state_e   w_state_q;
  id_t        w_id_q;
  logic       r_busy_q;
  id_t        r_id_q;
  logic [7:0] r_cnt_q;

  always_comb begin
    rsp_o          = '0;
    rsp_o.aw_ready = (w_state_q == WIdle);
    rsp_o.w_ready  = (w_state_q == WData);
    rsp_o.b_valid  = (w_state_q == WResp);
    rsp_o.b.id     = w_id_q;
    rsp_o.b.resp   = RespDecErr;
    rsp_o.ar_ready = !r_busy_q;
    rsp_o.r_valid  = r_busy_q;
    rsp_o.r.id     = r_id_q;
    rsp_o.r.resp   = RespDecErr;
    rsp_o.r.last   = (r_cnt_q == 8'd0);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_state_q <= WIdle;
      w_id_q    <= '0;
      r_busy_q  <= 1'b0;
      r_id_q    <= '0;
      r_cnt_q   <= '0;
    end else begin
      unique case (w_state_q)
        WIdle: if (req_i.aw_valid) begin
          w_state_q <= WData;
          w_id_q    <= req_i.aw.id;
        end
        WData: if (req_i.w_valid && req_i.w.last) w_state_q <= WResp;
        WResp: if (req_i.b_ready) w_state_q <= WIdle;
        default: w_state_q <= WIdle;
      endcase
      if (!r_busy_q) begin
        if (req_i.ar_valid) begin
          r_busy_q <= 1'b1;
          r_id_q   <= req_i.ar.id;
          r_cnt_q  <= req_i.ar.len;
        end
      end else if (req_i.r_ready) begin
        if (r_cnt_q == 8'd0) r_busy_q <= 1'b0;
        else                 r_cnt_q  <= r_cnt_q - 8'd1;
      end
    end
  end

endmodule
