// Fully connected AXI4 crossbar, 64-bit data.
//
// Every initiator (core, DMA engine, chip-to-chip link) can reach every target (LLC with its
// scratchpad and DRAM window, the Regbus bridge, the chip-to-chip link) through a static
// address map; accesses that match no rule go to an internal error target that answers with
// DECERR. Transactions to different targets proceed in parallel; write and read directions are
// independent.
//
// How it works: each target has a write and a read arbiter. When a target is idle, a round-robin
// choice among the initiators whose AW (or AR) decodes to it is registered, and the chosen
// address is forwarded on the next cycle; after the address handshake the target stays locked
// to that initiator until the B response (or the last R beat) is handed back. So each initiator
// has at most one write and one read outstanding, and IDs pass through unchanged. W beats of an
// initiator are forwarded only once its AW has been accepted.
//
// Timing: one cycle from an initiator's AW/AR valid to the target's valid; W, B and R pass
// combinationally once the path is locked.
//
// From the SoC description: the full connectivity, the 64-bit data width and the attached
// initiators and targets. Own choices: the lock-based single-outstanding scheme, round-robin
// arbitration and the address map.
module axi_xbar import basilisk_pkg::*; #(
  parameter int unsigned NumMst   = 3,
  parameter int unsigned NumSlv   = 3,
  parameter int unsigned NumRules = 4,
  parameter logic [NumRules-1:0][AddrWidth-1:0] RuleStart =
    {32'h2000_0000, DramBase, SpmBase, RegbusBase},
  parameter logic [NumRules-1:0][AddrWidth-1:0] RuleEnd =
    {32'h3000_0000, DramEnd, SpmEnd, RegbusEnd},
  parameter logic [NumRules-1:0][7:0] RuleIdx = {8'd2, 8'd0, 8'd0, 8'd1}
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  axi_req_t [NumMst-1:0]   mst_req_i,
  output axi_rsp_t [NumMst-1:0]   mst_rsp_o,
  output axi_req_t [NumSlv-1:0]   slv_req_o,
  input  axi_rsp_t [NumSlv-1:0]   slv_rsp_i
);

  localparam int unsigned NumTgt = NumSlv + 1;  // last one is the error target
  localparam int unsigned TW     = $clog2(NumTgt);
  localparam int unsigned MW     = (NumMst > 1) ? $clog2(NumMst) : 1;

  typedef logic [TW-1:0] tgt_idx_t;
  typedef logic [MW-1:0] mst_idx_t;
  typedef enum logic [1:0] {Idle, AddrPend, Locked} lock_e;

  function automatic tgt_idx_t decode(addr_t addr);
    tgt_idx_t idx = tgt_idx_t'(NumSlv);
    for (int unsigned r = 0; r < NumRules; r++)
      if (addr >= RuleStart[r] && addr < RuleEnd[r]) idx = tgt_idx_t'(RuleIdx[r]);
    return idx;
  endfunction

  axi_req_t [NumTgt-1:0] tgt_req;
  axi_rsp_t [NumTgt-1:0] tgt_rsp;

  assign slv_req_o = tgt_req[NumSlv-1:0];
  assign tgt_rsp[NumSlv-1:0] = slv_rsp_i;

  axi_err_slv i_err (
    .clk_i,
    .rst_ni,
    .req_i (tgt_req[NumSlv]),
    .rsp_o (tgt_rsp[NumSlv])
  );

  // Per-target lock state and owner, per-initiator outstanding flags.
  lock_e    [NumTgt-1:0] w_state_q, r_state_q;
  mst_idx_t [NumTgt-1:0] w_owner_q, r_owner_q;
  mst_idx_t [NumTgt-1:0] w_rr_q, r_rr_q;
  logic     [NumMst-1:0] w_busy_q, r_busy_q;

  // Round-robin pick among requesting initiators, starting at the pointer.
  logic     [NumTgt-1:0] w_any, r_any;
  mst_idx_t [NumTgt-1:0] w_pick, r_pick;

  always_comb begin
    for (int unsigned t = 0; t < NumTgt; t++) begin
      w_any[t]  = 1'b0;
      r_any[t]  = 1'b0;
      w_pick[t] = '0;
      r_pick[t] = '0;
      for (int unsigned k = 0; k < NumMst; k++) begin
        automatic int unsigned m = (int'(w_rr_q[t]) + k) % NumMst;
        if (!w_any[t] && mst_req_i[m].aw_valid && !w_busy_q[m] &&
            decode(mst_req_i[m].aw.addr) == tgt_idx_t'(t)) begin
          w_any[t]  = 1'b1;
          w_pick[t] = mst_idx_t'(m);
        end
      end
      for (int unsigned k = 0; k < NumMst; k++) begin
        automatic int unsigned m = (int'(r_rr_q[t]) + k) % NumMst;
        if (!r_any[t] && mst_req_i[m].ar_valid && !r_busy_q[m] &&
            decode(mst_req_i[m].ar.addr) == tgt_idx_t'(t)) begin
          r_any[t]  = 1'b1;
          r_pick[t] = mst_idx_t'(m);
        end
      end
    end
  end

  // Routing of the five channels along the locked paths.
  always_comb begin
    mst_rsp_o = '0;
    tgt_req   = '0;
    for (int unsigned t = 0; t < NumTgt; t++) begin
      // AW and B
      if (w_state_q[t] == AddrPend) begin
        tgt_req[t].aw       = mst_req_i[w_owner_q[t]].aw;
        tgt_req[t].aw_valid = 1'b1;
        mst_rsp_o[w_owner_q[t]].aw_ready = tgt_rsp[t].aw_ready;
      end
      if (w_state_q[t] == Locked) begin
        tgt_req[t].w       = mst_req_i[w_owner_q[t]].w;
        tgt_req[t].w_valid = mst_req_i[w_owner_q[t]].w_valid;
        tgt_req[t].b_ready = mst_req_i[w_owner_q[t]].b_ready;
        mst_rsp_o[w_owner_q[t]].w_ready = tgt_rsp[t].w_ready;
        mst_rsp_o[w_owner_q[t]].b       = tgt_rsp[t].b;
        mst_rsp_o[w_owner_q[t]].b_valid = tgt_rsp[t].b_valid;
      end
      // AR and R
      if (r_state_q[t] == AddrPend) begin
        tgt_req[t].ar       = mst_req_i[r_owner_q[t]].ar;
        tgt_req[t].ar_valid = 1'b1;
        mst_rsp_o[r_owner_q[t]].ar_ready = tgt_rsp[t].ar_ready;
      end
      if (r_state_q[t] == Locked) begin
        tgt_req[t].r_ready = mst_req_i[r_owner_q[t]].r_ready;
        mst_rsp_o[r_owner_q[t]].r       = tgt_rsp[t].r;
        mst_rsp_o[r_owner_q[t]].r_valid = tgt_rsp[t].r_valid;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_state_q <= '{default: Idle};
      r_state_q <= '{default: Idle};
      w_owner_q <= '0;
      r_owner_q <= '0;
      w_rr_q    <= '0;
      r_rr_q    <= '0;
      w_busy_q  <= '0;
      r_busy_q  <= '0;
    end else begin
      for (int unsigned t = 0; t < NumTgt; t++) begin
        unique case (w_state_q[t])
          Idle: if (w_any[t]) begin
            w_state_q[t] <= AddrPend;
            w_owner_q[t] <= w_pick[t];
            w_rr_q[t]    <= mst_idx_t'((int'(w_pick[t]) + 1) % NumMst);
          end
          AddrPend: if (tgt_rsp[t].aw_ready) begin
            w_state_q[t]           <= Locked;
            w_busy_q[w_owner_q[t]] <= 1'b1;
          end
          Locked: if (tgt_rsp[t].b_valid && mst_req_i[w_owner_q[t]].b_ready) begin
            w_state_q[t]           <= Idle;
            w_busy_q[w_owner_q[t]] <= 1'b0;
          end
          default: w_state_q[t] <= Idle;
        endcase
        unique case (r_state_q[t])
          Idle: if (r_any[t]) begin
            r_state_q[t] <= AddrPend;
            r_owner_q[t] <= r_pick[t];
            r_rr_q[t]    <= mst_idx_t'((int'(r_pick[t]) + 1) % NumMst);
          end
          AddrPend: if (tgt_rsp[t].ar_ready) begin
            r_state_q[t]           <= Locked;
            r_busy_q[r_owner_q[t]] <= 1'b1;
          end
          Locked: if (tgt_rsp[t].r_valid && tgt_rsp[t].r.last &&
                      mst_req_i[r_owner_q[t]].r_ready) begin
            r_state_q[t]           <= Idle;
            r_busy_q[r_owner_q[t]] <= 1'b0;
          end
          default: r_state_q[t] <= Idle;
        endcase
      end
    end
  end

  // AXI handshake rule on the target side: a raised valid stays until accepted.
  for (genvar t = 0; t < NumSlv; t++) begin : gen_assert
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      slv_req_o[t].aw_valid && !slv_rsp_i[t].aw_ready |=> slv_req_o[t].aw_valid)
      else $error("AW valid dropped before ready on target %0d", t);
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      slv_req_o[t].ar_valid && !slv_rsp_i[t].ar_ready |=> slv_req_o[t].ar_valid)
      else $error("AR valid dropped before ready on target %0d", t);
  end

endmodule
