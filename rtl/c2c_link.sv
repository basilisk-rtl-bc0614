// Chip-to-chip link: carries AXI4 transactions between two chips over one serial lane per
// direction, with a forwarded double-data-rate clock.
//
// Each side has an AXI4 target port (requests of this chip for the other one, taken from an
// address window) and an AXI4 initiator port (requests of the other chip, replayed on this
// chip's interconnect). Transactions travel as frames of FrameBits bits: a start bit, a 3-bit
// type (AR, AW, W, R, B) and the channel payload, one frame per address or data beat. The
// transmitter sends one bit per clock cycle and toggles tx_clk_o on the falling edge of clk_i,
// so the forwarded clock is centre-aligned and each of its edges carries one bit (DDR): at a
// 77 MHz system clock that is 77 Mbit/s in each direction. Frames start on even bits. The
// receiver captures bit pairs on both edges of rx_clk_i, assembles frames in that clock
// domain, and hands each finished frame to clk_i through a toggle synchroniser; frames are
// FrameBits/2 receive clocks apart, far more than the synchroniser needs.
//
// Flow control is by transaction: each direction has one write and one read outstanding, and
// a whole burst is buffered (up to MaxBeats beats) on both sides, so a frame never arrives
// for a full buffer. Writes are sent once all W beats are in; reads are answered once all R
// beats are in. Longer bursts are answered with SLVERR without crossing. Responses are sent
// ahead of requests. The remote address is {page, addr[27:0]}: the upper nibble comes from
// the PAGE register (reset 0x8, the other chip's DRAM).
//
// Registers (Regbus): 0x0 PAGE, 0x4 frames sent, 0x8 frames received.
//
// From the SoC description: fully digital, DDR, duplex, 77 Mbit/s, serialising AXI, for direct
// accesses between two chips. Frame format, lane count, buffering, flow control and address
// translation are own choices.
module c2c_link import basilisk_pkg::*; #(
  parameter int unsigned MaxBeats = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  // Local requests to the other chip
  input  axi_req_t slv_req_i,
  output axi_rsp_t slv_rsp_o,
  // Requests of the other chip, issued here
  output axi_req_t mst_req_o,
  input  axi_rsp_t mst_rsp_i,
  // Serial lanes
  output logic     tx_clk_o,
  output logic     tx_data_o,
  input  logic     rx_clk_i,
  input  logic     rx_data_i
);

  localparam int unsigned FrameBits = 80;
  localparam int unsigned PayBits   = FrameBits - 4;
  localparam int unsigned BeatW     = $clog2(MaxBeats);
  typedef logic [PayBits-1:0] pay_t;
  typedef enum logic [2:0] {FrAr = 3'd1, FrAw = 3'd2, FrW = 3'd3, FrR = 3'd4, FrB = 3'd5} fr_e;

  // ---------------------------------------------------------------------------------------
  // Registers
  logic [3:0]  page_q;
  logic [31:0] n_tx_q, n_rx_q;
  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    unique case (reg_req_i.addr[3:2])
      2'd0: reg_rsp_o.rdata = 32'(page_q);
      2'd1: reg_rsp_o.rdata = n_tx_q;
      2'd2: reg_rsp_o.rdata = n_rx_q;
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  // ---------------------------------------------------------------------------------------
  // Receiver (rx_clk_i domain): bit pairs on both edges, frames of FrameBits/2 pairs.
  logic                 rx_neg_q;
  logic [FrameBits-1:0] rx_sh_q, rx_frame_q;
  logic [6:0]           rx_cnt_q;
  logic                 rx_busy_q, rx_tgl_q;

  always_ff @(negedge rx_clk_i or negedge rst_ni) begin
    if (!rst_ni) rx_neg_q <= 1'b0;
    else         rx_neg_q <= rx_data_i;
  end

  always_ff @(posedge rx_clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_sh_q    <= '0;
      rx_frame_q <= '0;
      rx_cnt_q   <= '0;
      rx_busy_q  <= 1'b0;
      rx_tgl_q   <= 1'b0;
    end else if (!rx_busy_q) begin
      if (rx_neg_q) begin   // start bit in the first half of the pair
        rx_sh_q   <= {{(FrameBits-2){1'b0}}, rx_neg_q, rx_data_i};
        rx_cnt_q  <= 7'd1;
        rx_busy_q <= 1'b1;
      end
    end else begin
      rx_sh_q  <= {rx_sh_q[FrameBits-3:0], rx_neg_q, rx_data_i};
      rx_cnt_q <= rx_cnt_q + 7'd1;
      if (rx_cnt_q == 7'(FrameBits / 2 - 1)) begin
        rx_frame_q <= {rx_sh_q[FrameBits-3:0], rx_neg_q, rx_data_i};
        rx_tgl_q   <= ~rx_tgl_q;
        rx_busy_q  <= 1'b0;
      end
    end
  end

  // Into clk_i: the frame register is stable for many cycles around each toggle.
  logic [2:0] rx_sync_q;
  logic       rx_valid;
  fr_e        rx_type;
  pay_t       rx_pay;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rx_sync_q <= '0;
    else         rx_sync_q <= {rx_sync_q[1:0], rx_tgl_q};
  end
  assign rx_valid = rx_sync_q[2] != rx_sync_q[1];
  assign rx_type  = fr_e'(rx_frame_q[FrameBits-2 -: 3]);
  assign rx_pay   = rx_frame_q[PayBits-1:0];

  // ---------------------------------------------------------------------------------------
  // Frame payloads.
  function automatic pay_t pack_ax(axi_ax_t ax);
    return pay_t'(ax);
  endfunction
  function automatic axi_ax_t unpack_ax(pay_t p);
    return axi_ax_t'(p[$bits(axi_ax_t)-1:0]);
  endfunction

  // ---------------------------------------------------------------------------------------
  // Target side: local requests out, responses back.
  typedef enum logic [2:0] {TwIdle, TwData, TwSendAw, TwSendW, TwWaitB, TwResp} tw_e;
  typedef enum logic [2:0] {TrIdle, TrSendAr, TrWait, TrResp, TrErr} tr_e;
  tw_e            tw_q;
  tr_e            tr_q;
  axi_ax_t        taw_q, tar_q;
  axi_w_t         tw_buf_q [MaxBeats];
  axi_r_t         tr_buf_q [MaxBeats];
  logic [BeatW:0] tw_n_q, tw_i_q, tr_n_q, tr_i_q;
  logic           tw_err_q;
  logic [7:0]     terr_q;     // beats answered in an error burst
  axi_b_t         tb_q;

  // Initiator side: remote requests replayed here.
  typedef enum logic [2:0] {IwIdle, IwData, IwAw, IwW, IwB, IwSendB} iw_e;
  typedef enum logic [2:0] {IrIdle, IrAr, IrData, IrSendR} ir_e;
  iw_e            iw_q;
  ir_e            ir_q;
  axi_ax_t        iaw_q, iar_q;
  axi_w_t         iw_buf_q [MaxBeats];
  axi_r_t         ir_buf_q [MaxBeats];
  logic [BeatW:0] iw_n_q, iw_i_q, ir_n_q, ir_i_q;
  axi_b_t         ib_q;

  // Transmit arbitration: B, R, AR, AW/W.
  logic tx_idle, tx_take_b, tx_take_r, tx_take_ar, tx_take_tw;
  fr_e  tx_type;
  pay_t tx_pay;
  logic want_b, want_r, want_ar, want_tw;
  assign want_b  = (iw_q == IwSendB);
  assign want_r  = (ir_q == IrSendR);
  assign want_ar = (tr_q == TrSendAr);
  assign want_tw = (tw_q == TwSendAw) || (tw_q == TwSendW);
  always_comb begin
    tx_take_b = 1'b0; tx_take_r = 1'b0; tx_take_ar = 1'b0; tx_take_tw = 1'b0;
    tx_type = FrB;
    tx_pay  = '0;
    if (want_b) begin
      tx_take_b = tx_idle; tx_type = FrB; tx_pay = pay_t'(ib_q);
    end else if (want_r) begin
      tx_take_r = tx_idle; tx_type = FrR; tx_pay = pay_t'(ir_buf_q[ir_i_q[BeatW-1:0]]);
    end else if (want_ar) begin
      tx_take_ar = tx_idle; tx_type = FrAr; tx_pay = pack_ax(tar_q);
    end else if (want_tw) begin
      tx_take_tw = tx_idle;
      if (tw_q == TwSendAw) begin tx_type = FrAw; tx_pay = pack_ax(taw_q); end
      else begin tx_type = FrW; tx_pay = pay_t'(tw_buf_q[tw_i_q[BeatW-1:0]]); end
    end
  end

  // Transmitter: one bit per cycle, start on even bits, two idle bits between frames.
  logic [FrameBits-1:0] tx_sh_q;
  logic [6:0]           tx_cnt_q;
  logic                 tx_phase_q, tx_clk_q;
  assign tx_idle = (tx_cnt_q == '0) && tx_phase_q;   // the frame starts in the next, even bit

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tx_sh_q    <= '0;
      tx_cnt_q   <= '0;
      tx_phase_q <= 1'b0;
      n_tx_q     <= '0;
    end else begin
      tx_phase_q <= ~tx_phase_q;
      if (tx_idle && (want_b || want_r || want_ar || want_tw)) begin
        tx_sh_q  <= {1'b1, tx_type, tx_pay};
        tx_cnt_q <= 7'(FrameBits + 1);
        n_tx_q   <= n_tx_q + 32'd1;
      end else begin
        tx_sh_q <= {tx_sh_q[FrameBits-2:0], 1'b0};
        if (tx_cnt_q != '0) tx_cnt_q <= tx_cnt_q - 7'd1;
      end
    end
  end
  // Forwarded clock: changes in the middle of each bit.
  always_ff @(negedge clk_i or negedge rst_ni) begin
    if (!rst_ni) tx_clk_q <= 1'b0;
    else         tx_clk_q <= tx_phase_q;
  end
  assign tx_clk_o  = tx_clk_q;
  assign tx_data_o = tx_sh_q[FrameBits-1];

  // ---------------------------------------------------------------------------------------
  // AXI ports.
  always_comb begin
    slv_rsp_o          = '0;
    slv_rsp_o.aw_ready = (tw_q == TwIdle);
    slv_rsp_o.w_ready  = (tw_q == TwData);
    slv_rsp_o.b_valid  = (tw_q == TwResp);
    slv_rsp_o.b        = tb_q;
    slv_rsp_o.ar_ready = (tr_q == TrIdle);
    slv_rsp_o.r_valid  = (tr_q == TrResp) || (tr_q == TrErr);
    slv_rsp_o.r        = tr_buf_q[tr_i_q[BeatW-1:0]];
    if (tr_q == TrErr) begin
      slv_rsp_o.r = '{id: tar_q.id, data: '0, resp: RespSlvErr, last: (terr_q == tar_q.len)};
    end
    mst_req_o          = '0;
    mst_req_o.aw       = iaw_q;
    mst_req_o.aw_valid = (iw_q == IwAw);
    mst_req_o.w        = iw_buf_q[iw_i_q[BeatW-1:0]];
    mst_req_o.w_valid  = (iw_q == IwW);
    mst_req_o.b_ready  = (iw_q == IwB);
    mst_req_o.ar       = iar_q;
    mst_req_o.ar_valid = (ir_q == IrAr);
    mst_req_o.r_ready  = (ir_q == IrData);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      page_q   <= 4'h8;
      n_rx_q   <= '0;
      tw_q     <= TwIdle;
      tr_q     <= TrIdle;
      iw_q     <= IwIdle;
      ir_q     <= IrIdle;
      taw_q    <= '0;
      tar_q    <= '0;
      iaw_q    <= '0;
      iar_q    <= '0;
      tw_n_q   <= '0;
      tw_i_q   <= '0;
      tr_n_q   <= '0;
      tr_i_q   <= '0;
      iw_n_q   <= '0;
      iw_i_q   <= '0;
      ir_n_q   <= '0;
      ir_i_q   <= '0;
      tw_err_q <= 1'b0;
      terr_q   <= '0;
      tb_q     <= '0;
      ib_q     <= '0;
      for (int i = 0; i < MaxBeats; i++) begin
        tw_buf_q[i] <= '0;
        tr_buf_q[i] <= '0;
        iw_buf_q[i] <= '0;
        ir_buf_q[i] <= '0;
      end
    end else begin
      if (reg_req_i.valid && reg_req_i.write && reg_req_i.addr[3:2] == 2'd0) begin
        page_q <= reg_req_i.wdata[3:0];
      end
      if (rx_valid) n_rx_q <= n_rx_q + 32'd1;

      // Target write path.
      unique case (tw_q)
        TwIdle: if (slv_req_i.aw_valid) begin
          taw_q      <= slv_req_i.aw;
          taw_q.addr <= {page_q, slv_req_i.aw.addr[27:0]};
          tw_err_q   <= (32'(slv_req_i.aw.len) >= MaxBeats);
          tw_n_q     <= '0;
          tw_q       <= TwData;
        end
        TwData: if (slv_req_i.w_valid) begin
          if (!tw_err_q) tw_buf_q[tw_n_q[BeatW-1:0]] <= slv_req_i.w;
          tw_n_q <= tw_n_q + 1'b1;
          if (slv_req_i.w.last) begin
            if (tw_err_q) begin
              tb_q <= '{id: taw_q.id, resp: RespSlvErr};
              tw_q <= TwResp;
            end else begin
              tw_q <= TwSendAw;
            end
          end
        end
        TwSendAw: if (tx_take_tw) begin tw_i_q <= '0; tw_q <= TwSendW; end
        TwSendW: if (tx_take_tw) begin
          tw_i_q <= tw_i_q + 1'b1;
          if (tw_i_q + 1'b1 == tw_n_q) tw_q <= TwWaitB;
        end
        TwWaitB: if (rx_valid && rx_type == FrB) begin
          tb_q <= axi_b_t'(rx_pay[$bits(axi_b_t)-1:0]);
          tw_q <= TwResp;
        end
        TwResp: if (slv_req_i.b_ready) tw_q <= TwIdle;
        default: tw_q <= TwIdle;
      endcase

      // Target read path.
      unique case (tr_q)
        TrIdle: if (slv_req_i.ar_valid) begin
          tar_q      <= slv_req_i.ar;
          tar_q.addr <= {page_q, slv_req_i.ar.addr[27:0]};
          tr_n_q     <= '0;
          tr_i_q     <= '0;
          terr_q     <= '0;
          tr_q       <= (32'(slv_req_i.ar.len) >= MaxBeats) ? TrErr : TrSendAr;
        end
        TrSendAr: if (tx_take_ar) tr_q <= TrWait;
        TrWait: if (rx_valid && rx_type == FrR) begin
          tr_buf_q[tr_n_q[BeatW-1:0]] <= axi_r_t'(rx_pay[$bits(axi_r_t)-1:0]);
          tr_n_q <= tr_n_q + 1'b1;
          if (rx_pay[0]) tr_q <= TrResp;   // last
        end
        TrResp: if (slv_req_i.r_ready) begin
          tr_i_q <= tr_i_q + 1'b1;
          if (tr_i_q + 1'b1 == tr_n_q) tr_q <= TrIdle;
        end
        TrErr: if (slv_req_i.r_ready) begin
          terr_q <= terr_q + 8'd1;
          if (terr_q == tar_q.len) tr_q <= TrIdle;
        end
        default: tr_q <= TrIdle;
      endcase

      // Initiator write path.
      unique case (iw_q)
        IwIdle: if (rx_valid && rx_type == FrAw) begin
          iaw_q  <= unpack_ax(rx_pay);
          iw_n_q <= '0;
          iw_q   <= IwData;
        end
        IwData: if (rx_valid && rx_type == FrW) begin
          iw_buf_q[iw_n_q[BeatW-1:0]] <= axi_w_t'(rx_pay[$bits(axi_w_t)-1:0]);
          iw_n_q <= iw_n_q + 1'b1;
          if (rx_pay[0]) iw_q <= IwAw;
        end
        IwAw: if (mst_rsp_i.aw_ready) begin iw_i_q <= '0; iw_q <= IwW; end
        IwW: if (mst_rsp_i.w_ready) begin
          iw_i_q <= iw_i_q + 1'b1;
          if (iw_i_q + 1'b1 == iw_n_q) iw_q <= IwB;
        end
        IwB: if (mst_rsp_i.b_valid) begin ib_q <= mst_rsp_i.b; iw_q <= IwSendB; end
        IwSendB: if (tx_take_b) iw_q <= IwIdle;
        default: iw_q <= IwIdle;
      endcase

      // Initiator read path.
      unique case (ir_q)
        IrIdle: if (rx_valid && rx_type == FrAr) begin
          iar_q  <= unpack_ax(rx_pay);
          ir_n_q <= '0;
          ir_q   <= IrAr;
        end
        IrAr: if (mst_rsp_i.ar_ready) ir_q <= IrData;
        IrData: if (mst_rsp_i.r_valid) begin
          ir_buf_q[ir_n_q[BeatW-1:0]] <= mst_rsp_i.r;
          ir_n_q <= ir_n_q + 1'b1;
          if (mst_rsp_i.r.last) begin ir_i_q <= '0; ir_q <= IrSendR; end
        end
        IrSendR: if (tx_take_r) begin
          ir_i_q <= ir_i_q + 1'b1;
          if (ir_i_q + 1'b1 == ir_n_q) ir_q <= IrIdle;
        end
        default: ir_q <= IrIdle;
      endcase
    end
  end

endmodule
