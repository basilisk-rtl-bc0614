// Basilisk SoC top level, without the application core.
//
// Two-level interconnect: the initiators (the RV64GC core, attached through core_req_i /
// core_rsp_o, the 2D DMA engine and the VGA framebuffer fetch) and the high-throughput targets
// (the last-level cache with its scratchpad window and DRAM window, and the bridge to the
// register bus) meet in a fully connected 64-bit AXI4 crossbar. Behind the bridge, a Regbus
// demultiplexer reaches the low-throughput peripherals: SoC control registers (LLC way
// configuration, boot mode), UART, GPIO with the USB pin multiplexer, CLINT, the DMA engine's
// configuration registers, PLIC, quad SPI host, I2C host, VGA controller and the chip-to-chip
// link's page register. The chip-to-chip link is both a crossbar target (the window
// 0x2000_0000-0x2FFF_FFFF, forwarded to the other chip) and an initiator (the other chip's
// requests). LLC misses and
// write-throughs go, through a clock-domain crossing, to the HyperBus controller, which runs on
// hyper_clk_i at twice the HyperBus CK rate and drives two HyperRAM chips.
//
// Address map: Regbus 0x0300_0000 (4 KiB per target: 0 control, 1 UART, 2 GPIO, 3 CLINT,
// 4 DMA, 5 PLIC, 6 SPI, 7 I2C, 8 VGA, 9 C2C), C2C window 0x2000_0000 (256 MiB), scratchpad 0x1000_0000 (64 KiB, 16 KiB per LLC way),
// DRAM 0x8000_0000 (16 MiB, two 8 MiB chips). Everything else answers DECERR (AXI) or with a
// Regbus error turned into SLVERR.
//
// Interrupts: the PLIC collects UART receive (source 1), DMA done (2) and the external USB
// controller (3) into meip_o; the CLINT gives mtip_o and msip_o. ext_irq_o shows the raw
// UART and DMA lines.
//
// The core, the USB OHCI host, the JTAG debug module, the boot ROM and the IO pads are not part of this RTL: the core's AXI4 port and interrupt lines, the USB
// controller's per-port D+/D- signals and its interrupt are ports of this module.
//
// From the SoC description: the block set, the two-stage AXI4/Regbus interconnect, the LLC in
// front of the HyperRAM controller, USB pins shared with GPIO. Own choices: address map,
// register maps, interrupt numbering and the separate HyperBus clock.
//
// Reset: rst_ni is asynchronous. The HyperBus domain gets its own two-flop reset synchroniser
// (asserted at once, released on hyper_clk_i), so lint sees rst_ni and that synchroniser used
// both as asynchronous resets and as data; that is the intended structure and it stands. The
// crossbar's bus-rule assertions also use rst_ni in their disable condition.
module basilisk_soc import basilisk_pkg::*; #(
  parameter int unsigned NumLlcWays   = 4,
  parameter int unsigned LlcBytes     = 65536,
  parameter int unsigned HyperLatency = 6
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       hyper_clk_i,
  input  logic       rtc_i,
  input  logic [1:0] boot_mode_i,
  // Core's AXI4 initiator port and interrupts to the core
  input  axi_req_t   core_req_i,
  output axi_rsp_t   core_rsp_o,
  output logic       mtip_o,
  output logic       msip_o,
  output logic [1:0] ext_irq_o,     // raw interrupt lines {DMA done, UART receive}
  output logic       meip_o,        // machine external interrupt from the PLIC
  input  logic       usb_irq_i,     // interrupt of the external USB controller
  output logic [3:0] llc_event_o,   // one-cycle pulses {bypass, scratchpad, miss, hit}
  // HyperBus
  output logic [1:0] hyper_cs_no,
  output logic       hyper_ck_o,
  output logic       hyper_ck_no,
  output logic       hyper_rwds_o,
  output logic       hyper_rwds_oe_o,
  input  logic       hyper_rwds_i,
  output logic [7:0] hyper_dq_o,
  output logic       hyper_dq_oe_o,
  input  logic [7:0] hyper_dq_i,
  output logic       hyper_reset_no,
  // UART
  output logic       uart_tx_o,
  input  logic       uart_rx_i,
  // USB controller side of the pin multiplexer
  input  logic [3:0] usb_dp_i,
  input  logic [3:0] usb_dm_i,
  input  logic [3:0] usb_oe_i,
  output logic [3:0] usb_dp_o,
  output logic [3:0] usb_dm_o,
  // GPIO / USB pads
  output logic [7:0] gpio_o,
  output logic [7:0] gpio_oe_o,
  input  logic [7:0] gpio_i,
  // Quad SPI (flash)
  output logic       spi_sck_o,
  output logic [1:0] spi_cs_no,
  output logic [3:0] spi_dq_o,
  output logic [3:0] spi_dq_oe_o,
  input  logic [3:0] spi_dq_i,
  // I2C, open drain: oe = 1 pulls the line low
  output logic       i2c_scl_oe_o,
  input  logic       i2c_scl_i,
  output logic       i2c_sda_oe_o,
  input  logic       i2c_sda_i,
  // VGA, RGB332
  output logic       vga_hsync_no,
  output logic       vga_vsync_no,
  output logic [2:0] vga_red_o,
  output logic [2:0] vga_green_o,
  output logic [1:0] vga_blue_o,
  // Chip-to-chip link: one DDR lane with forwarded clock per direction
  output logic       c2c_tx_clk_o,
  output logic       c2c_tx_data_o,
  input  logic       c2c_rx_clk_i,
  input  logic       c2c_rx_data_i
);

  localparam int unsigned NumMst = 4;  // 0 core, 1 DMA, 2 VGA framebuffer fetch, 3 C2C link
  localparam int unsigned NumSlv = 3;  // 0 LLC, 1 Regbus bridge, 2 C2C link

  axi_req_t [NumMst-1:0] mst_req;
  axi_rsp_t [NumMst-1:0] mst_rsp;
  axi_req_t [NumSlv-1:0] slv_req;
  axi_rsp_t [NumSlv-1:0] slv_rsp;

  assign mst_req[0] = core_req_i;
  assign core_rsp_o = mst_rsp[0];

  axi_xbar #(
    .NumMst    (NumMst),
    .NumSlv    (NumSlv),
    .NumRules  (4),
    .RuleStart ({C2cBase, DramBase, SpmBase, RegbusBase}),
    .RuleEnd   ({C2cEnd, DramEnd, SpmEnd, RegbusEnd}),
    .RuleIdx   ({8'd2, 8'd0, 8'd0, 8'd1})
  ) i_xbar (
    .clk_i,
    .rst_ni,
    .mst_req_i (mst_req),
    .mst_rsp_o (mst_rsp),
    .slv_req_o (slv_req),
    .slv_rsp_i (slv_rsp)
  );

  // Last-level cache / scratchpad and the DRAM path.
  logic [NumLlcWays-1:0] spm_ways;
  mem_req_t llc_mem_req, hyp_mem_req;
  mem_rsp_t llc_mem_rsp, hyp_mem_rsp;
  logic llc_hit, llc_miss, llc_spm_access, llc_bypass;

  llc_spm #(
    .NumWays   (NumLlcWays),
    .SizeBytes (LlcBytes)
  ) i_llc (
    .clk_i,
    .rst_ni,
    .spm_ways_i   (spm_ways),
    .axi_req_i    (slv_req[0]),
    .axi_rsp_o    (slv_rsp[0]),
    .mem_req_o    (llc_mem_req),
    .mem_rsp_i    (llc_mem_rsp),
    .hit_o        (llc_hit),
    .miss_o       (llc_miss),
    .spm_access_o (llc_spm_access),
    .bypass_o     (llc_bypass)
  );

  // Reset of the HyperBus domain: asserted with rst_ni, released synchronously.
  logic [1:0] hyp_rst_q;
  always_ff @(posedge hyper_clk_i or negedge rst_ni) begin
    if (!rst_ni) hyp_rst_q <= '0;
    else         hyp_rst_q <= {hyp_rst_q[0], 1'b1};
  end

  mem_cdc i_mem_cdc (
    .src_clk_i  (clk_i),
    .src_rst_ni (rst_ni),
    .src_req_i  (llc_mem_req),
    .src_rsp_o  (llc_mem_rsp),
    .dst_clk_i  (hyper_clk_i),
    .dst_rst_ni (hyp_rst_q[1]),
    .dst_req_o  (hyp_mem_req),
    .dst_rsp_i  (hyp_mem_rsp)
  );

  hyperbus_ctrl #(
    .NumChips (2),
    .Latency  (HyperLatency)
  ) i_hyperbus (
    .clk_i           (hyper_clk_i),
    .rst_ni          (hyp_rst_q[1]),
    .mem_req_i       (hyp_mem_req),
    .mem_rsp_o       (hyp_mem_rsp),
    .hyper_cs_no,
    .hyper_ck_o,
    .hyper_ck_no,
    .hyper_rwds_o,
    .hyper_rwds_oe_o,
    .hyper_rwds_i,
    .hyper_dq_o,
    .hyper_dq_oe_o,
    .hyper_dq_i,
    .hyper_reset_no
  );

  // Register bus.
  reg_req_t reg_req;
  reg_rsp_t reg_rsp;
  reg_req_t [NumRegTgt-1:0] tgt_req;
  reg_rsp_t [NumRegTgt-1:0] tgt_rsp;

  axi_to_reg i_axi_to_reg (
    .clk_i,
    .rst_ni,
    .axi_req_i (slv_req[1]),
    .axi_rsp_o (slv_rsp[1]),
    .reg_req_o (reg_req),
    .reg_rsp_i (reg_rsp)
  );

  reg_demux #(.NumPorts(NumRegTgt)) i_reg_demux (
    .req_i (reg_req),
    .rsp_o (reg_rsp),
    .req_o (tgt_req),
    .rsp_i (tgt_rsp)
  );

  soc_regs #(.NumWays(NumLlcWays)) i_soc_regs (
    .clk_i,
    .rst_ni,
    .reg_req_i   (tgt_req[RegIdxChip]),
    .reg_rsp_o   (tgt_rsp[RegIdxChip]),
    .boot_mode_i,
    .spm_ways_o  (spm_ways)
  );

  logic uart_irq, dma_irq;

  uart i_uart (
    .clk_i,
    .rst_ni,
    .reg_req_i (tgt_req[RegIdxUart]),
    .reg_rsp_o (tgt_rsp[RegIdxUart]),
    .tx_o      (uart_tx_o),
    .rx_i      (uart_rx_i),
    .irq_o     (uart_irq)
  );

  gpio_usb_mux #(.NumUsbPorts(4)) i_gpio (
    .clk_i,
    .rst_ni,
    .reg_req_i (tgt_req[RegIdxGpio]),
    .reg_rsp_o (tgt_rsp[RegIdxGpio]),
    .usb_dp_i,
    .usb_dm_i,
    .usb_oe_i,
    .usb_dp_o,
    .usb_dm_o,
    .pad_o     (gpio_o),
    .pad_oe_o  (gpio_oe_o),
    .pad_i     (gpio_i)
  );

  clint i_clint (
    .clk_i,
    .rst_ni,
    .rtc_i,
    .reg_req_i (tgt_req[RegIdxClint]),
    .reg_rsp_o (tgt_rsp[RegIdxClint]),
    .mtip_o,
    .msip_o
  );

  dma2d i_dma (
    .clk_i,
    .rst_ni,
    .reg_req_i (tgt_req[RegIdxDma]),
    .reg_rsp_o (tgt_rsp[RegIdxDma]),
    .axi_req_o (mst_req[1]),
    .axi_rsp_i (mst_rsp[1]),
    .irq_o     (dma_irq)
  );

  assign ext_irq_o   = {dma_irq, uart_irq};
  assign llc_event_o = {llc_bypass, llc_spm_access, llc_miss, llc_hit};

  // PLIC sources: 1 UART receive, 2 DMA done, 3 USB controller, 4..7 unused.
  plic #(.NumSrc(8), .PrioWidth(3)) i_plic (
    .clk_i,
    .rst_ni,
    .irq_src_i ({4'b0000, usb_irq_i, dma_irq, uart_irq, 1'b0}),
    .reg_req_i (tgt_req[RegIdxPlic]),
    .reg_rsp_o (tgt_rsp[RegIdxPlic]),
    .irq_o     (meip_o)
  );

  spi_host #(.NumCs(2)) i_spi (
    .clk_i,
    .rst_ni,
    .reg_req_i (tgt_req[RegIdxSpi]),
    .reg_rsp_o (tgt_rsp[RegIdxSpi]),
    .sck_o     (spi_sck_o),
    .cs_no     (spi_cs_no),
    .dq_o      (spi_dq_o),
    .dq_oe_o   (spi_dq_oe_o),
    .dq_i      (spi_dq_i)
  );

  i2c_host i_i2c (
    .clk_i,
    .rst_ni,
    .reg_req_i (tgt_req[RegIdxI2c]),
    .reg_rsp_o (tgt_rsp[RegIdxI2c]),
    .scl_oe_o  (i2c_scl_oe_o),
    .scl_i     (i2c_scl_i),
    .sda_oe_o  (i2c_sda_oe_o),
    .sda_i     (i2c_sda_i)
  );

  vga #(.MaxWidth(640)) i_vga (
    .clk_i,
    .rst_ni,
    .reg_req_i (tgt_req[RegIdxVga]),
    .reg_rsp_o (tgt_rsp[RegIdxVga]),
    .axi_req_o (mst_req[2]),
    .axi_rsp_i (mst_rsp[2]),
    .hsync_no  (vga_hsync_no),
    .vsync_no  (vga_vsync_no),
    .red_o     (vga_red_o),
    .green_o   (vga_green_o),
    .blue_o    (vga_blue_o)
  );

  c2c_link #(.MaxBeats(16)) i_c2c (
    .clk_i,
    .rst_ni,
    .reg_req_i (tgt_req[RegIdxC2c]),
    .reg_rsp_o (tgt_rsp[RegIdxC2c]),
    .slv_req_i (slv_req[2]),
    .slv_rsp_o (slv_rsp[2]),
    .mst_req_o (mst_req[3]),
    .mst_rsp_i (mst_rsp[3]),
    .tx_clk_o  (c2c_tx_clk_o),
    .tx_data_o (c2c_tx_data_o),
    .rx_clk_i  (c2c_rx_clk_i),
    .rx_data_i (c2c_rx_data_i)
  );

endmodule
