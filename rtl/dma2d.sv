// DMA engine for one- and two-dimensional copies between any two AXI4 addresses.
//
// Software programs a transfer through Regbus registers and starts it; the engine then copies
// REPS rows of LEN bytes, row r reading from SRC + r*SRC_STRIDE and writing to
// DST + r*DST_STRIDE. Each row is moved in bursts of up to MaxBurst 64-bit beats: an AXI read
// burst fills an internal buffer, an AXI write burst of the same length empties it. LEN,
// addresses and strides must be multiples of 8 bytes; a row must not cross a 4 KiB boundary
// inside a burst (the engine splits bursts at 4 KiB boundaries).
//
// Registers (32-bit): 0x00 SRC, 0x04 DST, 0x08 LEN (bytes per row), 0x0C SRC_STRIDE,
// 0x10 DST_STRIDE, 0x14 REPS (rows, 0 is taken as 1), 0x18 CTRL (write 1: start, ignored while
// busy), 0x1C STATUS (bit 0 busy, bit 1 error seen, bits 31:16 transfers completed).
// irq_o pulses for one cycle when a transfer ends.
//
// From the SoC description: a DMA engine capable of 2D transfers that relieves the core of data
// movement. Own choices: the register map, the buffered read-then-write scheme (no overlap of
// reads and writes) and the burst length.
module dma2d import basilisk_pkg::*; #(
  parameter int unsigned MaxBurst = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output axi_req_t axi_req_o,
  input  axi_rsp_t axi_rsp_i,
  output logic     irq_o
);

  localparam int unsigned BW = $clog2(MaxBurst);

  typedef enum logic [2:0] {Idle, RowStart, ReadAddr, ReadData, WriteAddr, WriteData,
                            WriteResp} state_e;

  state_e      state_q;
  addr_t       src_q, dst_q, len_q, sstride_q, dstride_q, reps_q;
  addr_t       row_src_q, row_dst_q, rem_q, row_q;
  addr_t       cur_src_q, cur_dst_q;
  logic [BW:0] beats_q, cnt_q;
  logic        err_q;
  logic [15:0] done_cnt_q;
  data_t       buffer_q [MaxBurst];

  logic [3:0] reg_off;
  assign reg_off = reg_req_i.addr[5:2];
  logic busy;
  assign busy = (state_q != Idle);

  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    unique case (reg_off)
      4'd0: reg_rsp_o.rdata = src_q;
      4'd1: reg_rsp_o.rdata = dst_q;
      4'd2: reg_rsp_o.rdata = len_q;
      4'd3: reg_rsp_o.rdata = sstride_q;
      4'd4: reg_rsp_o.rdata = dstride_q;
      4'd5: reg_rsp_o.rdata = reps_q;
      4'd6: reg_rsp_o.rdata = '0;
      4'd7: reg_rsp_o.rdata = {done_cnt_q, 14'd0, err_q, busy};
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  // Beats of the next burst: the rest of the row, at most MaxBurst, not crossing 4 KiB on
  // either side.
  function automatic logic [BW:0] next_beats(addr_t rem, addr_t s, addr_t d);
    addr_t n  = rem >> 3;
    addr_t ns = (32'h1000 - {20'd0, s[11:0]}) >> 3;
    addr_t nd = (32'h1000 - {20'd0, d[11:0]}) >> 3;
    if (n > addr_t'(MaxBurst)) n = addr_t'(MaxBurst);
    if (n > ns) n = ns;
    if (n > nd) n = nd;
    return (BW+1)'(n);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= Idle;
      src_q      <= '0;
      dst_q      <= '0;
      len_q      <= '0;
      sstride_q  <= '0;
      dstride_q  <= '0;
      reps_q     <= '0;
      row_src_q  <= '0;
      row_dst_q  <= '0;
      rem_q      <= '0;
      row_q      <= '0;
      cur_src_q  <= '0;
      cur_dst_q  <= '0;
      beats_q    <= '0;
      cnt_q      <= '0;
      err_q      <= 1'b0;
      done_cnt_q <= '0;
      irq_o      <= 1'b0;
    end else begin
      irq_o <= 1'b0;
      if (reg_req_i.valid && reg_req_i.write && !busy) unique case (reg_off)
        4'd0: src_q     <= reg_req_i.wdata;
        4'd1: dst_q     <= reg_req_i.wdata;
        4'd2: len_q     <= reg_req_i.wdata;
        4'd3: sstride_q <= reg_req_i.wdata;
        4'd4: dstride_q <= reg_req_i.wdata;
        4'd5: reps_q    <= reg_req_i.wdata;
        4'd6: if (reg_req_i.wdata[0]) begin
          row_src_q <= src_q;
          row_dst_q <= dst_q;
          row_q     <= (reps_q == '0) ? addr_t'(1) : reps_q;
          err_q     <= 1'b0;
          state_q   <= RowStart;
        end
        default: ;
      endcase
      unique case (state_q)
        Idle: ;
        RowStart: begin
          if (row_q == '0 || len_q == '0) begin
            state_q    <= Idle;
            done_cnt_q <= done_cnt_q + 16'd1;
            irq_o      <= 1'b1;
          end else begin
            cur_src_q <= row_src_q;
            cur_dst_q <= row_dst_q;
            rem_q     <= len_q;
            beats_q   <= next_beats(len_q, row_src_q, row_dst_q);
            state_q   <= ReadAddr;
          end
        end
        ReadAddr: if (axi_rsp_i.ar_ready) begin
          cnt_q   <= '0;
          state_q <= ReadData;
        end
        ReadData: if (axi_rsp_i.r_valid) begin
          buffer_q[cnt_q[BW-1:0]] <= axi_rsp_i.r.data;
          if (axi_rsp_i.r.resp != RespOkay) err_q <= 1'b1;
          cnt_q <= cnt_q + 1'b1;
          if (axi_rsp_i.r.last) state_q <= WriteAddr;
        end
        WriteAddr: if (axi_rsp_i.aw_ready) begin
          cnt_q   <= '0;
          state_q <= WriteData;
        end
        WriteData: if (axi_rsp_i.w_ready) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == beats_q - 1'b1) state_q <= WriteResp;
        end
        WriteResp: if (axi_rsp_i.b_valid) begin
          if (axi_rsp_i.b.resp != RespOkay) err_q <= 1'b1;
          if (rem_q == addr_t'({beats_q, 3'b000})) begin
            // Row done: next row.
            row_src_q <= row_src_q + sstride_q;
            row_dst_q <= row_dst_q + dstride_q;
            row_q     <= row_q - addr_t'(1);
            state_q   <= RowStart;
          end else begin
            rem_q     <= rem_q - addr_t'({beats_q, 3'b000});
            cur_src_q <= cur_src_q + addr_t'({beats_q, 3'b000});
            cur_dst_q <= cur_dst_q + addr_t'({beats_q, 3'b000});
            beats_q   <= next_beats(rem_q - addr_t'({beats_q, 3'b000}),
                                    cur_src_q + addr_t'({beats_q, 3'b000}),
                                    cur_dst_q + addr_t'({beats_q, 3'b000}));
            state_q   <= ReadAddr;
          end
        end
        default: state_q <= Idle;
      endcase
    end
  end

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.ar       = '{id: '0, addr: cur_src_q, len: 8'(beats_q - 1'b1), size: 3'd3,
                           burst: BurstIncr};
    axi_req_o.ar_valid = (state_q == ReadAddr);
    axi_req_o.r_ready  = (state_q == ReadData);
    axi_req_o.aw       = '{id: '0, addr: cur_dst_q, len: 8'(beats_q - 1'b1), size: 3'd3,
                           burst: BurstIncr};
    axi_req_o.aw_valid = (state_q == WriteAddr);
    axi_req_o.w        = '{data: buffer_q[cnt_q[BW-1:0]], strb: '1,
                           last: (cnt_q == beats_q - 1'b1)};
    axi_req_o.w_valid  = (state_q == WriteData);
    axi_req_o.b_ready  = (state_q == WriteResp);
  end

endmodule
