// Last-level cache in front of the DRAM controller, whose ways can serve as scratchpad.
//
// The LLC holds 64 KiB in NumWays = 4 ways. A 4-bit way mask (spm_ways_i) selects which ways
// are scratchpad: a scratchpad way appears as a plain 16 KiB memory in the window at SpmBase
// (way w at SpmBase + w * 16 KiB), the others cache the DRAM window. Switching a way between
// the two roles invalidates its cache lines; since the cache is write-through no dirty data is
// lost. With all ways in scratchpad mode every DRAM access bypasses the cache.
//
// How it works: one AXI4 transaction is served at a time (reads and writes alternate when both
// wait), beat by beat for INCR bursts of 64-bit beats. Each beat first reads the tag and data
// arrays (one cycle, synchronous read as an SRAM macro would give), then:
//   * scratchpad beat: read or write the selected way's data array; an access to a way that is
//     not in scratchpad mode answers SLVERR;
//   * DRAM read hit: data from the array; miss: a single-word read to the DRAM controller,
//     whose result fills a way chosen round-robin among the cache ways;
//   * DRAM write: written through to the DRAM controller, and into the array on a hit (no
//     allocation on a write miss).
// Lines are one 64-bit word; the cache covers DRAM addresses by tag comparison. Each way has a
// single-port data SRAM (Sets x 64 bit, byte enables) and a tag SRAM holding {valid, tag}; after reset, and when ways change role, a flush walks all
// sets (one per cycle, Sets = 2048 cycles) and clears the valid bits of the affected ways.
// No transaction is accepted during a flush.
//
// Timing: a scratchpad or hit beat takes 3 cycles from address handshake to data; a miss adds
// the DRAM controller's latency.
//
// From the SoC description: 4 ways, 64 KiB, each way configurable at run time as scratchpad.
// Own choices: one-word lines, write-through without write allocation, round-robin
// replacement, one transaction at a time and the scratchpad address layout.
module llc_spm import basilisk_pkg::*; #(
  parameter int unsigned NumWays   = 4,
  parameter int unsigned SizeBytes = 65536,
  parameter addr_t       SpmAddr   = SpmBase
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [NumWays-1:0] spm_ways_i,   // 1: way is scratchpad, 0: way caches DRAM
  input  axi_req_t           axi_req_i,
  output axi_rsp_t           axi_rsp_o,
  output mem_req_t           mem_req_o,
  input  mem_rsp_t           mem_rsp_i,
  output logic               hit_o,         // one-cycle pulses for event counters
  output logic               miss_o,
  output logic               spm_access_o,
  output logic               bypass_o
);

  localparam int unsigned WayBytes = SizeBytes / NumWays;
  localparam int unsigned Sets     = WayBytes / 8;
  localparam int unsigned IdxW     = $clog2(Sets);
  localparam int unsigned WayW     = (NumWays > 1) ? $clog2(NumWays) : 1;
  localparam int unsigned TagW     = AddrWidth - IdxW - 3;

  typedef logic [IdxW-1:0] idx_t;
  typedef logic [TagW-1:0] tag_t;
  typedef logic [WayW-1:0] way_t;

  typedef enum logic [3:0] {
    Flush, Idle, WData, Lookup, Check, MemReq, MemWait, RResp, BResp
  } state_e;

  state_e     state_q;
  logic       is_write_q;
  axi_ax_t    ax_q;      // size and burst type are not used: INCR of 64-bit beats assumed
  logic [7:0] beat_q;
  axi_w_t     w_q;
  axi_resp_e  err_q;
  data_t      rdata_q;
  way_t       rr_q;
  way_t       fill_way_q;

  // Arrays: per way one data SRAM and one tag SRAM holding {valid, tag}.
  data_t [NumWays-1:0] data_rd;
  tag_t  [NumWays-1:0] tag_rd;
  logic [NumWays-1:0]  valid_rd;
  idx_t                flush_idx_q;
  logic [NumWays-1:0]  flush_ways_q;

  logic [NumWays-1:0] spm_ways_q;

  addr_t beat_addr;
  assign beat_addr = ax_q.addr + addr_t'({beat_q, 3'b000});

  logic is_spm;
  idx_t idx;
  tag_t tag;
  way_t spm_way;
  assign is_spm  = (beat_addr >= SpmAddr) && (beat_addr < SpmAddr + addr_t'(SizeBytes));
  assign idx     = beat_addr[IdxW+2:3];
  assign tag     = beat_addr[AddrWidth-1:IdxW+3];
  assign spm_way = way_t'((beat_addr - SpmAddr) >> (IdxW + 3));

  // Hit detection on the registered array outputs.
  logic [NumWays-1:0] way_hit;
  logic               hit;
  way_t               hit_way;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int unsigned w = 0; w < NumWays; w++) begin
      way_hit[w] = valid_rd[w] && !spm_ways_q[w] && (tag_rd[w] == tag);
      if (way_hit[w] && !hit) begin
        hit     = 1'b1;
        hit_way = way_t'(w);
      end
    end
  end

  way_t wr_way;
  assign wr_way = is_spm ? spm_way : hit_way;

  // Next cache way for a fill: round-robin over the ways not used as scratchpad.
  way_t victim;
  logic all_spm;
  assign all_spm = &spm_ways_q;
  always_comb begin
    victim = rr_q;
    for (int unsigned k = NumWays; k > 0; k--) begin
      automatic way_t w = way_t'((int'(rr_q) + k - 1) % NumWays);
      if (!spm_ways_q[w]) victim = w;
    end
  end

  // SRAM ports: read of all ways in Lookup; data write in Check (scratchpad or write hit);
  // data and tag write on a fill in MemWait; tag clear during a flush.
  logic fill;
  assign fill = (state_q == MemWait) && mem_rsp_i.rvalid && !is_write_q && !all_spm;

  for (genvar w = 0; w < NumWays; w++) begin : gen_way
    logic  d_req, d_we, t_req, t_we;
    idx_t  t_addr;
    data_t d_wdata;
    strb_t d_be;
    logic [TagW:0] t_wdata, t_rdata;

    always_comb begin
      d_req   = (state_q == Lookup);
      d_we    = 1'b0;
      d_wdata = w_q.data;
      d_be    = w_q.strb;
      t_req   = (state_q == Lookup);
      t_we    = 1'b0;
      t_addr  = idx;
      t_wdata = {1'b1, tag};
      if (state_q == Check && is_write_q && wr_way == way_t'(w) &&
          (is_spm ? spm_ways_q[spm_way] : hit)) begin
        d_req = 1'b1;
        d_we  = 1'b1;
      end
      if (fill && fill_way_q == way_t'(w)) begin
        d_req   = 1'b1;
        d_we    = 1'b1;
        d_wdata = mem_rsp_i.rdata;
        d_be    = '1;
        t_req   = 1'b1;
        t_we    = 1'b1;
      end
      if (state_q == Flush && flush_ways_q[w]) begin
        t_req   = 1'b1;
        t_we    = 1'b1;
        t_addr  = flush_idx_q;
        t_wdata = '0;
      end
    end

    sram_sp #(.Words(Sets), .Width(DataWidth), .NumLanes(StrbWidth)) i_data (
      .clk_i,
      .req_i   (d_req),
      .we_i    (d_we),
      .addr_i  (idx),
      .wdata_i (d_wdata),
      .be_i    (d_be),
      .rdata_o (data_rd[w])
    );

    sram_sp #(.Words(Sets), .Width(TagW + 1), .NumLanes(1)) i_tag (
      .clk_i,
      .req_i   (t_req),
      .we_i    (t_we),
      .addr_i  (t_addr),
      .wdata_i (t_wdata),
      .be_i    (1'b1),
      .rdata_o (t_rdata)
    );

    assign valid_rd[w] = t_rdata[TagW];
    assign tag_rd[w]   = t_rdata[TagW-1:0];
  end

  // Control.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= Flush;
      flush_idx_q  <= '0;
      flush_ways_q <= '1;
      is_write_q <= 1'b0;
      ax_q       <= '0;
      beat_q     <= '0;
      w_q        <= '0;
      err_q      <= RespOkay;
      rdata_q    <= '0;
      rr_q       <= '0;
      fill_way_q <= '0;
      spm_ways_q <= '0;
    end else begin
      unique case (state_q)
        // Clear the valid bits of the ways in flush_ways_q, one set per cycle.
        Flush: begin
          flush_idx_q <= flush_idx_q + idx_t'(1);
          if (flush_idx_q == idx_t'(Sets - 1)) state_q <= Idle;
        end
        Idle: begin
          beat_q <= '0;
          err_q  <= RespOkay;
          // The way configuration is taken over only between transactions; a way that
          // changes role loses its cached lines.
          if (spm_ways_i != spm_ways_q) begin
            spm_ways_q   <= spm_ways_i;
            flush_ways_q <= spm_ways_i ^ spm_ways_q;
            flush_idx_q  <= '0;
            state_q      <= Flush;
          end else if (axi_req_i.aw_valid && (!axi_req_i.ar_valid || !is_write_q)) begin
            ax_q <= axi_req_i.aw; is_write_q <= 1'b1; state_q <= WData;
          end else if (axi_req_i.ar_valid) begin
            ax_q <= axi_req_i.ar; is_write_q <= 1'b0; state_q <= Lookup;
          end
        end
        WData: if (axi_req_i.w_valid) begin
          w_q <= axi_req_i.w; state_q <= Lookup;
        end
        Lookup: state_q <= Check;
        Check: begin
          if (is_spm) begin
            if (!spm_ways_q[spm_way]) err_q <= RespSlvErr;
            rdata_q <= spm_ways_q[spm_way] ? data_rd[spm_way] : '0;
            state_q <= is_write_q ? BResp : RResp;
          end else if (!is_write_q && hit) begin
            rdata_q <= data_rd[hit_way];
            state_q <= RResp;
          end else begin
            fill_way_q <= victim;
            state_q    <= MemReq;
          end
        end
        MemReq: if (mem_rsp_i.ready) state_q <= MemWait;
        MemWait: if (mem_rsp_i.rvalid) begin
          rdata_q <= mem_rsp_i.rdata;
          if (!is_write_q && !all_spm) rr_q <= way_t'((int'(fill_way_q) + 1) % NumWays);
          state_q <= is_write_q ? BResp : RResp;
        end
        RResp: if (axi_req_i.r_ready) begin
          if (beat_q == ax_q.len) state_q <= Idle;
          else begin beat_q <= beat_q + 8'd1; state_q <= Lookup; end
        end
        BResp: begin
          // Intermediate W beats are acknowledged on the W channel; B follows the last one.
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
    axi_rsp_o.aw_ready = (state_q == Idle) && (spm_ways_i == spm_ways_q) && axi_req_i.aw_valid &&
                         (!axi_req_i.ar_valid || !is_write_q);
    axi_rsp_o.ar_ready = (state_q == Idle) && (spm_ways_i == spm_ways_q) && axi_req_i.ar_valid &&
                         !axi_rsp_o.aw_ready;
    axi_rsp_o.w_ready  = (state_q == WData);
    axi_rsp_o.b_valid  = (state_q == BResp) && w_q.last;
    axi_rsp_o.b.id     = ax_q.id;
    axi_rsp_o.b.resp   = err_q;
    axi_rsp_o.r_valid  = (state_q == RResp);
    axi_rsp_o.r.id     = ax_q.id;
    axi_rsp_o.r.data   = rdata_q;
    axi_rsp_o.r.resp   = err_q;
    axi_rsp_o.r.last   = (beat_q == ax_q.len);
  end

  assign mem_req_o.valid = (state_q == MemReq);
  assign mem_req_o.we    = is_write_q;
  assign mem_req_o.addr  = {beat_addr[AddrWidth-1:3], 3'b000};
  assign mem_req_o.wdata = w_q.data;
  assign mem_req_o.wstrb = w_q.strb;

  assign hit_o        = (state_q == Check) && !is_spm && !is_write_q && hit;
  assign miss_o       = (state_q == Check) && !is_spm && !is_write_q && !hit && !all_spm;
  assign bypass_o     = (state_q == Check) && !is_spm && all_spm;
  assign spm_access_o = (state_q == Check) && is_spm;

endmodule
