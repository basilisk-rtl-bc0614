// VGA controller: display timing generator with a framebuffer read over AXI4.
//
// Pixels are 8-bit RGB332 (red [7:5], green [4:2], blue [1:0]) stored row by row from FB_BASE,
// one byte per pixel, HVIS bytes per row. A pixel tick comes every DIV+1 clock cycles; the
// horizontal counter runs over visible, front porch, sync and back porch, the vertical one
// likewise in lines. While a line is shown, the next visible line is fetched into the other
// half of a two-line buffer with INCR bursts of up to 16 beats of 8 bytes (never crossing a
// 4 KiB page), so DRAM latency is hidden behind a whole line. A pixel whose word has not
// arrived yet is shown black and counted as an underrun; a buffer half is emptied when its
// next line starts, so stale data is never shown. Sync outputs are active low; outputs
// are registered, so they lag the counters by one clock cycle.
//
// Registers (Regbus): 0x00 CTRL {enable}, 0x04 FB_BASE (8-byte aligned), 0x08 DIV,
// 0x0C HVIS, 0x10 HFP, 0x14 HSYNC, 0x18 HBP, 0x1C VVIS, 0x20 VFP, 0x24 VSYNC, 0x28 VBP,
// 0x2C STATUS {underruns[31:16], frames[15:0]}. Reset values give 640x480 at 60 Hz with a
// 25 MHz pixel tick (DIV 1 at a 50 MHz clock); HVIS must be a multiple of 8 and at most
// MaxWidth.
//
// From the SoC description: a VGA controller for video output. The pixel format, register
// map, line buffering and fetch scheme are this design's own choices.
module vga import basilisk_pkg::*; #(
  parameter int unsigned MaxWidth = 640
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  reg_req_t   reg_req_i,
  output reg_rsp_t   reg_rsp_o,
  output axi_req_t   axi_req_o,
  input  axi_rsp_t   axi_rsp_i,
  output logic       hsync_no,
  output logic       vsync_no,
  output logic [2:0] red_o,
  output logic [2:0] green_o,
  output logic [1:0] blue_o
);

  localparam int unsigned MaxWords = MaxWidth / 8;
  localparam int unsigned WIdxW    = $clog2(MaxWords + 1);
  typedef logic [15:0] cnt_t;

  // Registers.
  logic  enable_q;
  addr_t fb_base_q;
  cnt_t  div_q, hvis_q, hfp_q, hsync_q, hbp_q, vvis_q, vfp_q, vsync_q, vbp_q;
  cnt_t  frames_q, underruns_q;

  logic [3:0] reg_off;
  assign reg_off = reg_req_i.addr[5:2];

  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    unique case (reg_off)
      4'd0:  reg_rsp_o.rdata = 32'(enable_q);
      4'd1:  reg_rsp_o.rdata = fb_base_q;
      4'd2:  reg_rsp_o.rdata = 32'(div_q);
      4'd3:  reg_rsp_o.rdata = 32'(hvis_q);
      4'd4:  reg_rsp_o.rdata = 32'(hfp_q);
      4'd5:  reg_rsp_o.rdata = 32'(hsync_q);
      4'd6:  reg_rsp_o.rdata = 32'(hbp_q);
      4'd7:  reg_rsp_o.rdata = 32'(vvis_q);
      4'd8:  reg_rsp_o.rdata = 32'(vfp_q);
      4'd9:  reg_rsp_o.rdata = 32'(vsync_q);
      4'd10: reg_rsp_o.rdata = 32'(vbp_q);
      4'd11: reg_rsp_o.rdata = {underruns_q, frames_q};
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  // Timing.
  cnt_t hcnt_q, vcnt_q, tick_cnt_q;
  cnt_t htotal, vtotal;
  logic tick, line_start, visible;
  assign htotal     = hvis_q + hfp_q + hsync_q + hbp_q;
  assign vtotal     = vvis_q + vfp_q + vsync_q + vbp_q;
  assign tick       = enable_q && (tick_cnt_q == '0);
  assign line_start = tick && (hcnt_q == '0);
  assign visible    = (hcnt_q < hvis_q) && (vcnt_q < vvis_q);

  // Line buffer: two lines of MaxWords words; line l uses half l[0].
  data_t            lbuf_q [2][MaxWords];
  logic [WIdxW-1:0] have_q [2];     // words received per half

  // Fetch engine.
  typedef enum logic [1:0] {FIdle, FAddr, FData} fstate_e;
  fstate_e          fstate_q;
  logic             fbuf_q;
  addr_t            faddr_q;
  logic [WIdxW-1:0] freq_q;         // words requested so far
  logic [WIdxW-1:0] words_per_line;
  cnt_t             next_line;
  assign words_per_line = WIdxW'(hvis_q >> 3);
  assign next_line      = (vcnt_q == vtotal - 16'd1) ? '0 : vcnt_q + 16'd1;

  logic [WIdxW-1:0] words_left;
  logic [9:0]       to_page;        // words to the next 4 KiB boundary
  logic [4:0]       burst;
  always_comb begin
    words_left = words_per_line - freq_q;
    to_page    = 10'(10'd512 - {1'b0, faddr_q[11:3]});
    burst      = 5'd16;
    if (32'(words_left) < 32'(burst)) burst = 5'(words_left);
    if (32'(to_page) < 32'(burst))    burst = 5'(to_page);
  end

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.ar       = '{id: '0, addr: faddr_q, len: 8'(burst - 5'd1), size: 3'd3,
                           burst: BurstIncr};
    axi_req_o.ar_valid = (fstate_q == FAddr);
    axi_req_o.r_ready  = 1'b1;
    axi_req_o.b_ready  = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      fstate_q <= FIdle;
      fbuf_q   <= 1'b0;
      faddr_q  <= '0;
      freq_q   <= '0;
      have_q   <= '{default: '0};
    end else begin
      // The half that will hold the next line is emptied at every line start, so a line whose
      // fetch could not even start shows black instead of the stale line of the last frame.
      if (line_start && !(fstate_q != FIdle && fbuf_q == next_line[0])) begin
        have_q[next_line[0]] <= '0;
      end
      unique case (fstate_q)
        FIdle: if (line_start && next_line < vvis_q && words_per_line != '0) begin
          fbuf_q         <= next_line[0];
          faddr_q        <= fb_base_q + addr_t'(next_line) * addr_t'(hvis_q);
          freq_q         <= '0;
          have_q[next_line[0]] <= '0;
          fstate_q       <= FAddr;
        end
        FAddr: if (axi_rsp_i.ar_ready) begin
          freq_q   <= freq_q + WIdxW'(burst);
          faddr_q  <= faddr_q + addr_t'({burst, 3'b000});
          fstate_q <= FData;
        end
        FData: if (axi_rsp_i.r_valid) begin
          if (32'(have_q[fbuf_q]) < MaxWords) lbuf_q[fbuf_q][have_q[fbuf_q]] <= axi_rsp_i.r.data;
          have_q[fbuf_q] <= have_q[fbuf_q] + 1'b1;
          if (axi_rsp_i.r.last) fstate_q <= (freq_q == words_per_line) ? FIdle : FAddr;
        end
        default: fstate_q <= FIdle;
      endcase
    end
  end

  // Pixel lookup.
  logic [WIdxW-1:0] pix_word;
  logic             pix_ok;
  data_t            pix_data;
  logic [7:0]       pixel;
  assign pix_word = WIdxW'(hcnt_q >> 3);
  assign pix_ok   = pix_word < have_q[vcnt_q[0]];
  assign pix_data = (32'(pix_word) < MaxWords) ? lbuf_q[vcnt_q[0]][pix_word] : '0;
  assign pixel    = pix_data[8*hcnt_q[2:0] +: 8];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      enable_q    <= 1'b0;
      fb_base_q   <= '0;
      div_q       <= 16'd1;
      hvis_q      <= 16'd640;
      hfp_q       <= 16'd16;
      hsync_q     <= 16'd96;
      hbp_q       <= 16'd48;
      vvis_q      <= 16'd480;
      vfp_q       <= 16'd10;
      vsync_q     <= 16'd2;
      vbp_q       <= 16'd33;
      frames_q    <= '0;
      underruns_q <= '0;
      hcnt_q      <= '0;
      vcnt_q      <= '0;
      tick_cnt_q  <= '0;
      hsync_no    <= 1'b1;
      vsync_no    <= 1'b1;
      {red_o, green_o, blue_o} <= '0;
    end else begin
      if (reg_req_i.valid && reg_req_i.write) begin
        unique case (reg_off)
          4'd0:  enable_q  <= reg_req_i.wdata[0];
          4'd1:  fb_base_q <= {reg_req_i.wdata[31:3], 3'b000};
          4'd2:  div_q     <= reg_req_i.wdata[15:0];
          4'd3:  hvis_q    <= reg_req_i.wdata[15:0];
          4'd4:  hfp_q     <= reg_req_i.wdata[15:0];
          4'd5:  hsync_q   <= reg_req_i.wdata[15:0];
          4'd6:  hbp_q     <= reg_req_i.wdata[15:0];
          4'd7:  vvis_q    <= reg_req_i.wdata[15:0];
          4'd8:  vfp_q     <= reg_req_i.wdata[15:0];
          4'd9:  vsync_q   <= reg_req_i.wdata[15:0];
          4'd10: vbp_q     <= reg_req_i.wdata[15:0];
          default: ;
        endcase
      end
      if (!enable_q) begin
        hcnt_q     <= '0;
        vcnt_q     <= vtotal - 16'd1;   // first line fetched before it is shown
        tick_cnt_q <= '0;
        hsync_no   <= 1'b1;
        vsync_no   <= 1'b1;
        {red_o, green_o, blue_o} <= '0;
      end else begin
        tick_cnt_q <= (tick_cnt_q == '0) ? div_q : tick_cnt_q - 16'd1;
        if (tick) begin
          if (hcnt_q == htotal - 16'd1) begin
            hcnt_q <= '0;
            if (vcnt_q == vtotal - 16'd1) begin
              vcnt_q   <= '0;
            end else begin
              vcnt_q <= vcnt_q + 16'd1;
              if (vcnt_q == vvis_q - 16'd1) frames_q <= frames_q + 16'd1;
            end
          end else begin
            hcnt_q <= hcnt_q + 16'd1;
          end
          hsync_no <= !((hcnt_q >= hvis_q + hfp_q) && (hcnt_q < hvis_q + hfp_q + hsync_q));
          vsync_no <= !((vcnt_q >= vvis_q + vfp_q) && (vcnt_q < vvis_q + vfp_q + vsync_q));
          if (visible && pix_ok) {red_o, green_o, blue_o} <= pixel;
          else                   {red_o, green_o, blue_o} <= '0;
          if (visible && !pix_ok) underruns_q <= underruns_q + 16'd1;
        end
      end
    end
  end

endmodule
