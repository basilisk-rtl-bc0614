// Clock-domain crossing for single-word memory requests (LLC side to HyperBus side).
//
// The request is held in a register on the source side while a toggle flag crosses to the
// destination domain through a two-flop synchroniser; the destination issues it, stores the
// response and sends a toggle back the same way. Only one request is in flight, so the held
// registers are stable whenever the other side samples them.
//
// Timing: about three destination cycles to start a request and three source cycles for the
// response to return, on top of the controller's own time.
//
// Own design: the SoC runs the HyperBus controller on its own clock at twice the HyperBus CK
// rate, which needs this crossing.
module mem_cdc import basilisk_pkg::*; (
  input  logic     src_clk_i,
  input  logic     src_rst_ni,
  input  mem_req_t src_req_i,
  output mem_rsp_t src_rsp_o,
  input  logic     dst_clk_i,
  input  logic     dst_rst_ni,
  output mem_req_t dst_req_o,
  input  mem_rsp_t dst_rsp_i
);

  // Source side.
  mem_req_t   req_q;
  logic       req_tgl_q, busy_q;
  logic [2:0] ack_sync_q;

  // Destination side state, declared here because both sides read it.
  logic [2:0] req_sync_q;
  logic       ack_tgl_q, issued_q, pending_q;
  data_t      rdata_q;

  always_ff @(posedge src_clk_i or negedge src_rst_ni) begin
    if (!src_rst_ni) begin
      req_q      <= '0;
      req_tgl_q  <= 1'b0;
      busy_q     <= 1'b0;
      ack_sync_q <= '0;
    end else begin
      ack_sync_q <= {ack_sync_q[1:0], ack_tgl_q};
      if (!busy_q && src_req_i.valid) begin
        req_q     <= src_req_i;
        req_tgl_q <= ~req_tgl_q;
        busy_q    <= 1'b1;
      end else if (busy_q && (ack_sync_q[2] != ack_sync_q[1])) begin
        busy_q <= 1'b0;
      end
    end
  end

  assign src_rsp_o.ready  = !busy_q;
  assign src_rsp_o.rvalid = busy_q && (ack_sync_q[2] != ack_sync_q[1]);
  assign src_rsp_o.rdata  = rdata_q;

  // Destination side.

  always_ff @(posedge dst_clk_i or negedge dst_rst_ni) begin
    if (!dst_rst_ni) begin
      req_sync_q <= '0;
      ack_tgl_q  <= 1'b0;
      issued_q   <= 1'b0;
      pending_q  <= 1'b0;
      rdata_q    <= '0;
    end else begin
      req_sync_q <= {req_sync_q[1:0], req_tgl_q};
      if (req_sync_q[2] != req_sync_q[1]) pending_q <= 1'b1;
      if (pending_q && !issued_q && dst_rsp_i.ready) issued_q <= 1'b1;
      if (issued_q && dst_rsp_i.rvalid) begin
        rdata_q   <= dst_rsp_i.rdata;
        ack_tgl_q <= ~ack_tgl_q;
        issued_q  <= 1'b0;
        pending_q <= 1'b0;
      end
    end
  end

  always_comb begin
    dst_req_o       = req_q;
    dst_req_o.valid = pending_q && !issued_q;
  end

endmodule
