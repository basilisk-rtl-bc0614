// End-to-end testbench of the Basilisk SoC at its default parameters.
//
// A simulated core drives the SoC's AXI4 initiator port; two HyperRAM models hang on the
// HyperBus; the UART transmit line is looped back to its receiver and the GPIO pads to their
// inputs. The test goes through boot-mode and control registers, cached DRAM traffic on both
// chips (misses, hits, write-through), a 2D DMA copy from DRAM into an LLC way turned
// scratchpad while the core keeps using the interconnect, bypass with all ways scratchpad,
// UART loopback with its interrupt claimed through the PLIC, an SPI byte looped back, an I2C
// address byte on an empty bus (NACK), a small VGA frame fetched from the scratchpad, GPIO and
// USB pin sharing, a write and a read over the chip-to-chip link looped back onto the chip
// itself, timer and software interrupts, and decode errors.
// Every mechanism is counted and must have happened at least once.
module tb_basilisk_soc;
  import basilisk_pkg::*;

  logic clk = 1'b0, hclk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;     // SoC clock
  always #3 hclk = ~hclk;   // HyperBus clock, twice the CK rate, unrelated to clk

  axi_req_t core_req;
  axi_rsp_t core_rsp;
  logic mtip, msip;
  logic [1:0] ext_irq, cs_n;
  logic [3:0] llc_ev;
  logic ck, ck_n, rwds_o, rwds_oe, dq_oe, hreset_n, rwds_i;
  logic [7:0] dq_o, dq_i;
  logic [1:0] m_rwds, m_oe;
  logic [7:0] m_dq [2];
  logic uart_line;
  logic [3:0] usb_dp_i, usb_dm_i, usb_oe_i, usb_dp_o, usb_dm_o;
  logic [7:0] gpio_o, gpio_oe, gpio_i;
  logic meip, usb_irq = 1'b0, spi_sck, i2c_scl_oe, i2c_sda_oe, hs_n, vs_n;
  logic [1:0] spi_cs_n;
  logic [3:0] spi_dq_o, spi_dq_oe;
  logic [7:0] rgb;
  logic c2c_clk, c2c_data;

  int checks = 0, failures = 0;

  basilisk_soc dut (
    .clk_i(clk), .rst_ni(rst_n), .hyper_clk_i(hclk), .rtc_i(1'b1), .boot_mode_i(2'b10),
    .core_req_i(core_req), .core_rsp_o(core_rsp), .mtip_o(mtip), .msip_o(msip),
    .ext_irq_o(ext_irq), .llc_event_o(llc_ev),
    .hyper_cs_no(cs_n), .hyper_ck_o(ck), .hyper_ck_no(ck_n), .hyper_rwds_o(rwds_o),
    .hyper_rwds_oe_o(rwds_oe), .hyper_rwds_i(rwds_i), .hyper_dq_o(dq_o),
    .hyper_dq_oe_o(dq_oe), .hyper_dq_i(dq_i), .hyper_reset_no(hreset_n),
    .uart_tx_o(uart_line), .uart_rx_i(uart_line),
    .usb_dp_i(usb_dp_i), .usb_dm_i(usb_dm_i), .usb_oe_i(usb_oe_i), .usb_dp_o(usb_dp_o),
    .usb_dm_o(usb_dm_o), .gpio_o(gpio_o), .gpio_oe_o(gpio_oe), .gpio_i(gpio_i),
    .meip_o(meip), .usb_irq_i(usb_irq),
    .spi_sck_o(spi_sck), .spi_cs_no(spi_cs_n), .spi_dq_o(spi_dq_o), .spi_dq_oe_o(spi_dq_oe),
    .spi_dq_i({2'b00, spi_dq_o[0], 1'b0}),
    .i2c_scl_oe_o(i2c_scl_oe), .i2c_scl_i(!i2c_scl_oe), .i2c_sda_oe_o(i2c_sda_oe),
    .i2c_sda_i(!i2c_sda_oe),
    .vga_hsync_no(hs_n), .vga_vsync_no(vs_n), .vga_red_o(rgb[7:5]), .vga_green_o(rgb[4:2]),
    .vga_blue_o(rgb[1:0]),
    .c2c_tx_clk_o(c2c_clk), .c2c_tx_data_o(c2c_data), .c2c_rx_clk_i(c2c_clk),
    .c2c_rx_data_i(c2c_data));

  axi_sim_mst i_core (.clk_i(clk), .req_o(core_req), .rsp_i(core_rsp));

  for (genvar c = 0; c < 2; c++) begin : gen_chip
    hyperram_model #(.AW(14), .Latency(6)) i_ram (
      .clk_i(hclk), .cs_ni(cs_n[c]), .ck_i(ck), .rwds_i(rwds_oe ? rwds_o : 1'b0), .dq_i(dq_o),
      .rwds_o(m_rwds[c]), .dq_o(m_dq[c]), .dq_oe_o(m_oe[c]));
  end
  assign rwds_i = cs_n[0] ? m_rwds[1] : m_rwds[0];
  assign dq_i   = cs_n[0] ? m_dq[1]   : m_dq[0];
  assign gpio_i = gpio_o & gpio_oe;

  // Mechanism counters.
  int n_hit = 0, n_miss = 0, n_spm = 0, n_bypass = 0, n_both_active = 0, n_hyper_tx = 0;
  int n_uart_irq = 0, n_dma_irq = 0, n_decerr = 0, n_slverr = 0, n_mtip = 0, n_msip = 0;
  int n_c2c = 0, n_meip = 0, n_sck = 0, n_i2c_start = 0, n_vga_px = 0;
  logic cs_prev = 1'b1;
  logic [7:0] vga_seen [$];
  always @(posedge spi_sck) n_sck++;
  always @(posedge i2c_sda_oe) if (!i2c_scl_oe) n_i2c_start++;   // SDA falls while SCL high
  always @(negedge clk) begin
    n_meip += int'(meip);
    n_vga_px += int'(rgb != 8'h00);   // an underrun shows black, so these come from fetched data
    if (rgb != 8'h00 && vga_seen.size() < 64) vga_seen.push_back(rgb);
  end
  always @(posedge clk) begin
    n_hit += int'(llc_ev[0]); n_miss += int'(llc_ev[1]);
    n_spm += int'(llc_ev[2]); n_bypass += int'(llc_ev[3]);
    n_uart_irq += int'(ext_irq[0]); n_dma_irq += int'(ext_irq[1]);
    n_mtip += int'(mtip); n_msip += int'(msip);
    if (core_rsp.r_valid && core_req.r_ready && core_rsp.r.resp == RespDecErr) n_decerr++;
    if (core_rsp.r_valid && core_req.r_ready && core_rsp.r.resp == RespSlvErr) n_slverr++;
  end
  always @(posedge hclk) begin
    if (cs_prev && !(&cs_n)) n_hyper_tx++;
    cs_prev <= &cs_n;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // 32-bit register access through the 64-bit AXI port.
  task automatic reg_write(addr_t a, logic [31:0] v);
    i_core.write(a, {v, v}, a[2] ? 8'hF0 : 8'h0F);
  endtask
  task automatic reg_read(addr_t a, output logic [31:0] v);
    data_t d;
    i_core.read(a, d);
    v = a[2] ? d[63:32] : d[31:0];
  endtask
  function automatic addr_t rb(int tgt, int off);
    return RegbusBase + addr_t'(tgt * 32'h1000 + off);
  endfunction

  // Initial HyperRAM model content: half-word i holds i*3+1.
  function automatic data_t dram_init(int unsigned byte_off);
    int unsigned h = (byte_off >> 1) % (2**14);
    return {16'((h + 3) * 3 + 1), 16'((h + 2) * 3 + 1), 16'((h + 1) * 3 + 1), 16'(h * 3 + 1)};
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t d;
    logic [31:0] v;
    axi_resp_e resp;
    usb_dp_i = 4'b0001; usb_dm_i = 4'b0000; usb_oe_i = 4'b0001;
    // A reset edge: the C2C receiver runs on the (looped-back) forwarded clock, which stands
    // still during reset, so it is reset asynchronously.
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // Control registers.
    reg_read(rb(RegIdxChip, 4), v);
    check(v == 32'd2, "boot mode pins");
    reg_write(rb(RegIdxChip, 8), 32'hCAFE_F00D);
    reg_read(rb(RegIdxChip, 8), v);
    check(v == 32'hCAFE_F00D, "scratch register");

    // DRAM: untouched word through the LLC (miss), then a hit.
    i_core.read(DramBase + 32'h200, d);
    check(d == dram_init(32'h200), $sformatf("DRAM miss data %h", d));
    i_core.read(DramBase + 32'h200, d);
    check(d == dram_init(32'h200), "DRAM hit data");

    // Burst write to chip 0 and a word on chip 1, write-through to the HyperRAM.
    for (int i = 0; i < 8; i++) i_core.buffer[i] = 64'h1000_0000_0000_0000 + 64'(i * 32'h0101_0101);
    i_core.write_burst(DramBase + 32'h1000, 7, '1, resp);
    check(resp == RespOkay, "DRAM burst write");
    check(gen_chip[0].i_ram.mem[32'h800] == 16'h0000 && gen_chip[0].i_ram.mem[32'h803] == 16'h1000,
          "chip 0 holds the first written word");
    check(gen_chip[0].i_ram.mem[32'h81C] == 16'h0707 && gen_chip[0].i_ram.mem[32'h81F] == 16'h1000,
          "chip 0 holds the last written word");
    i_core.write(DramBase + 32'h0080_0040, 64'hFACE_B00C_DEAD_BEEF);
    check(gen_chip[1].i_ram.mem[32'h20] == 16'hBEEF && gen_chip[1].i_ram.mem[32'h23] == 16'hFACE,
          "chip 1 written");
    i_core.read(DramBase + 32'h0080_0040, d);
    check(d == 64'hFACE_B00C_DEAD_BEEF, "chip 1 read back");
    i_core.read_burst(DramBase + 32'h1000, 7, resp);
    for (int i = 0; i < 8; i++)
      check(i_core.buffer[i] == 64'h1000_0000_0000_0000 + 64'(i * 32'h0101_0101), "burst read back");

    // LLC way 0 as scratchpad; DMA copies a 3 x 32-byte block from DRAM (row stride 0x100)
    // into the scratchpad (row stride 0x40).
    reg_write(rb(RegIdxChip, 0), 32'h1);
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < 4; i++) i_core.buffer[i] = 64'(r * 16 + i) * 64'h0001_0001_0001_0001;
      i_core.write_burst(DramBase + 32'h4000 + 32'(r) * 32'h100, 3, '1, resp);
    end
    reg_write(rb(RegIdxDma, 8'h00), DramBase + 32'h4000);
    reg_write(rb(RegIdxDma, 8'h04), SpmBase + 32'h200);
    reg_write(rb(RegIdxDma, 8'h08), 32'd32);
    reg_write(rb(RegIdxDma, 8'h0C), 32'h100);
    reg_write(rb(RegIdxDma, 8'h10), 32'h40);
    reg_write(rb(RegIdxDma, 8'h14), 32'd3);
    reg_write(rb(RegIdxDma, 8'h18), 32'd1);
    // The core keeps working while the DMA runs.
    i_core.read(DramBase + 32'h1008, d);
    check(d == 64'h1000_0000_0101_0101, "core read during DMA");
    // Still busy after the core's read completed: the two shared the crossbar.
    reg_read(rb(RegIdxDma, 8'h1C), v);
    n_both_active += int'(v[0]);
    do reg_read(rb(RegIdxDma, 8'h1C), v); while (v[0]);
    check(v[31:16] == 16'd1 && !v[1], $sformatf("DMA status %h", v));
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < 4; i++) begin
        i_core.read(SpmBase + 32'h200 + 32'(r) * 32'h40 + 32'(i) * 8, d);
        check(d == 64'(r * 16 + i) * 64'h0001_0001_0001_0001, $sformatf("DMA 2D r%0d i%0d", r, i));
      end
    // The row gaps in the scratchpad stay untouched by the 2D copy.
    i_core.write(SpmBase + 32'h220, 64'h5555);
    i_core.read(SpmBase + 32'h220, d);
    check(d == 64'h5555, "scratchpad gap writable");

    // All ways scratchpad: DRAM accesses bypass the cache.
    reg_write(rb(RegIdxChip, 0), 32'hF);
    i_core.read(DramBase + 32'h0080_0040, d);
    check(d == 64'hFACE_B00C_DEAD_BEEF, "bypass read");
    reg_write(rb(RegIdxChip, 0), 32'h0);

    // UART loopback; the receive interrupt goes through the PLIC (source 1).
    reg_write(rb(RegIdxPlic, 8'h04), 32'd1);
    reg_write(rb(RegIdxPlic, 12'h100), 32'h2);
    reg_write(rb(RegIdxUart, 8'hC), 32'd8);
    reg_write(rb(RegIdxUart, 0), 32'h5A);
    do reg_read(rb(RegIdxUart, 8), v); while (!v[1]);
    repeat (2) @(posedge clk);
    check(meip, "PLIC raises the external interrupt");
    reg_read(rb(RegIdxPlic, 12'h204), v);
    check(v == 32'd1, $sformatf("PLIC claim %0d", v));
    reg_read(rb(RegIdxUart, 4), v);
    check(v == 32'h5A, $sformatf("UART loopback %h", v));
    reg_write(rb(RegIdxPlic, 12'h204), 32'd1);
    repeat (2) @(posedge clk);
    check(!meip, "no external interrupt after completion");

    // SPI byte with MOSI looped back to MISO.
    reg_write(rb(RegIdxSpi, 0), 32'h1);
    reg_write(rb(RegIdxSpi, 8), 32'hC3);
    do reg_read(rb(RegIdxSpi, 8'h10), v); while (v[0]);
    reg_read(rb(RegIdxSpi, 8'hC), v);
    check(v == 32'hC3, $sformatf("SPI loopback %h", v));
    reg_write(rb(RegIdxSpi, 0), 32'h0);

    // I2C address byte to an empty bus: START, byte, NACK, STOP.
    reg_write(rb(RegIdxI2c, 0), 32'd1);
    reg_write(rb(RegIdxI2c, 4), 32'h0000_0CA0);
    do reg_read(rb(RegIdxI2c, 8), v); while (v[0]);
    check(v[1], "I2C reports NACK on an empty bus");
    check(!i2c_scl_oe && !i2c_sda_oe, "I2C bus released");

    // VGA: 16x2 pixels from a framebuffer in the scratchpad, one pixel per clock.
    reg_write(rb(RegIdxChip, 0), 32'h1);
    for (int w = 0; w < 4; w++) begin
      for (int k = 0; k < 8; k++) d[8*k +: 8] = 8'(w * 8 + k + 1);
      i_core.write(SpmBase + 32'h300 + 32'(w * 8), d);
    end
    reg_write(rb(RegIdxVga, 8'h04), SpmBase + 32'h300);
    reg_write(rb(RegIdxVga, 8'h08), 32'd0);
    reg_write(rb(RegIdxVga, 8'h0C), 32'd16);
    reg_write(rb(RegIdxVga, 8'h10), 32'd2);
    reg_write(rb(RegIdxVga, 8'h14), 32'd2);
    reg_write(rb(RegIdxVga, 8'h18), 32'd8);
    reg_write(rb(RegIdxVga, 8'h1C), 32'd2);
    reg_write(rb(RegIdxVga, 8'h20), 32'd1);
    reg_write(rb(RegIdxVga, 8'h24), 32'd1);
    reg_write(rb(RegIdxVga, 8'h28), 32'd1);
    vga_seen.delete();
    reg_write(rb(RegIdxVga, 8'h00), 32'd1);
    repeat (400) @(posedge clk);
    reg_write(rb(RegIdxVga, 8'h00), 32'd0);
    reg_read(rb(RegIdxVga, 8'h2C), v);
    check(v[15:0] >= 2 && v[31:16] == 0, $sformatf("VGA status %h: frames, no underrun", v));
    check(vga_seen.size() >= 32, "VGA pixels shown");
    for (int k = 0; k < 32 && k < vga_seen.size(); k++)
      check(vga_seen[k] == 8'(k + 1), $sformatf("VGA pixel %0d is %h", k, vga_seen[k]));
    reg_write(rb(RegIdxChip, 0), 32'h0);

    // GPIO: drive 0xA5, read it back through the pads; give pins 0/1 to USB port 0.
    reg_write(rb(RegIdxGpio, 0), 32'hA5);
    reg_write(rb(RegIdxGpio, 4), 32'hFF);
    repeat (3) @(posedge clk);
    reg_read(rb(RegIdxGpio, 8), v);
    check(v == 32'hA5, $sformatf("GPIO in %h", v));
    reg_write(rb(RegIdxGpio, 8'hC), 32'h1);
    #1 check(gpio_o[1:0] == 2'b01 && gpio_o[7:2] == 6'b101001, "USB port 0 on pins 0/1");
    check(usb_dp_o[0] == 1'b1 && usb_dm_o[0] == 1'b0, "USB port 0 sees its pins");

    // Chip-to-chip link looped back onto this chip: the window 0x2000_0000 with page 8 reaches
    // this chip's own DRAM through the link's initiator port.
    i_core.write(C2cBase + 32'h600, 64'h0123_4567_89AB_CDEF);
    i_core.read(DramBase + 32'h600, d);
    check(d == 64'h0123_4567_89AB_CDEF, $sformatf("write over the link reached DRAM: %h", d));
    i_core.write(DramBase + 32'h608, 64'h0F0E_0D0C_0B0A_0908);
    i_core.read(C2cBase + 32'h608, d);
    check(d == 64'h0F0E_0D0C_0B0A_0908, $sformatf("read over the link: %h", d));
    reg_read(rb(RegIdxC2c, 4), v);
    n_c2c = int'(v);
    reg_read(rb(RegIdxC2c, 8), v);
    check(n_c2c == int'(v), "link frames sent and received match");

    // Timer and software interrupt.
    reg_read(rb(RegIdxClint, 8'h10), v);
    reg_write(rb(RegIdxClint, 8'hC), 32'h0);
    reg_write(rb(RegIdxClint, 8'h8), v + 32'd200);
    check(!mtip, "timer not yet due");
    repeat (220) @(posedge clk);
    check(mtip, "timer interrupt");
    reg_write(rb(RegIdxClint, 0), 32'h1);
    check(msip, "software interrupt");
    reg_write(rb(RegIdxClint, 0), 32'h0);

    // Decode errors: hole in the AXI map and an unpopulated Regbus window.
    i_core.read_burst(32'h4000_0000, 1, resp);
    check(resp == RespDecErr, "AXI decode error");
    i_core.read_burst(rb(12, 0), 0, resp);
    check(resp == RespSlvErr, "Regbus hole answers with error");

    // Every mechanism must have happened.
    check(n_hit > 0, "LLC hit");
    check(n_miss > 0, "LLC miss");
    check(n_spm > 0, "scratchpad access");
    check(n_bypass > 0, "LLC bypass");
    check(n_both_active > 0, "core and DMA active together");
    check(n_hyper_tx > 0, "HyperBus transactions");
    check(n_uart_irq > 0, "UART receive interrupt");
    check(n_dma_irq > 0, "DMA done interrupt");
    check(n_mtip > 0 && n_msip > 0, "CLINT interrupts");
    check(n_decerr > 0 && n_slverr > 0, "error responses");
    check(n_meip > 0, "PLIC external interrupt");
    check(n_sck == 8, $sformatf("%0d SPI clock cycles", n_sck));
    check(n_i2c_start > 0, "I2C START condition");
    check(n_vga_px > 0, "VGA pixels from fetched framebuffer");
    check(n_c2c > 0, "chip-to-chip frames");
    $display("hit=%0d miss=%0d spm=%0d bypass=%0d both=%0d hyper=%0d uart=%0d dma=%0d",
             n_hit, n_miss, n_spm, n_bypass, n_both_active, n_hyper_tx, n_uart_irq, n_dma_irq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
