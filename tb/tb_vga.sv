// Testbench of the VGA controller with a small display format (32x6 visible pixels) and a
// framebuffer in a simulated AXI memory whose rows cross a 4 KiB page. A checker locks onto
// the sync pulses, walks the pixel positions on its own and compares every visible pixel of
// two frames with the byte the testbench wrote at FB_BASE + y*HVIS + x. Also checks the sync
// pulse widths, the frame counter, and, with the memory cut off, black pixels and the
// underrun counter.
module tb_vga;
  import basilisk_pkg::*;

  localparam int HVIS = 32, HFP = 4, HSYNC = 6, HBP = 6, VVIS = 6, VFP = 2, VSYNC = 2, VBP = 2;
  localparam int DIV = 1, HTOT = HVIS + HFP + HSYNC + HBP, VTOT = VVIS + VFP + VSYNC + VBP;
  localparam logic [31:0] FB = 32'h0FF0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  axi_req_t vreq, mreq;
  axi_rsp_t vrsp, mrsp;
  logic hs_n, vs_n;
  logic [2:0] r, g;
  logic [1:0] b;
  logic cut = 1'b0;
  int checks = 0, failures = 0;

  vga #(.MaxWidth(64)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .axi_req_o(vreq), .axi_rsp_i(vrsp), .hsync_no(hs_n), .vsync_no(vs_n), .red_o(r),
    .green_o(g), .blue_o(b));
  axi_sim_mem #(.AW(10)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));
  reg_drv i_drv (.clk_i(clk), .req_o(req), .rsp_i(rsp));

  always_comb begin
    mreq = vreq;
    vrsp = mrsp;
    if (cut) begin mreq.ar_valid = 1'b0; vrsp.ar_ready = 1'b0; end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] fb_byte(int a);
    return 8'((a * 37 + 11) ^ (a >> 5));
  endfunction

  // Pixel checker: the line number follows the sync pulses; after each horizontal sync it
  // waits out the blanking and walks the visible pixels of the next line one tick at a time.
  int  y = -1000, n_pix = 0, n_bad = 0;
  bit  expect_black = 1'b0;
  always @(negedge vs_n) y = VVIS + VFP - 1;
  always @(negedge hs_n) begin
    automatic int line;
    if (y >= 0) y = (y + 1) % VTOT;
    repeat ((HTOT - HVIS - HFP) * (DIV + 1)) @(posedge clk);
    #2;
    line = (y + 1) % VTOT;
    if (y >= 0 && line < VVIS) begin
      for (int px = 0; px < HVIS; px++) begin
        automatic logic [7:0] want = expect_black ? 8'h00 : fb_byte(line * HVIS + px);
        n_pix++;
        if ({r, g, b} != want) begin
          n_bad++;
          if (n_bad < 5) $display("pixel (%0d,%0d) %h want %h", px, line, {r, g, b}, want);
        end
        repeat (DIV + 1) @(posedge clk);
        #2;
      end
    end
  end

  // Sync widths in clock cycles.
  int hs_len = 0, vs_len = 0, hs_start = 0, vs_start = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge hs_n) hs_start = cyc;
  always @(posedge hs_n) hs_len = cyc - hs_start;
  always @(negedge vs_n) vs_start = cyc;
  always @(posedge vs_n) vs_len = cyc - vs_start;

  initial begin
    logic [31:0] v;
    int frames0;
    for (int w = 0; w < 1024; w++) begin
      automatic logic [63:0] d;
      for (int k = 0; k < 8; k++) d[8*k +: 8] = fb_byte(w * 8 + k - int'(FB));
      i_mem.mem[w] = d;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    i_drv.read(32'h0C, v);
    check(v == 640, "reset HVIS is 640");
    i_drv.read(32'h1C, v);
    check(v == 480, "reset VVIS is 480");
    i_drv.write(32'h04, FB);
    i_drv.write(32'h08, DIV);
    i_drv.write(32'h0C, HVIS);
    i_drv.write(32'h10, HFP);
    i_drv.write(32'h14, HSYNC);
    i_drv.write(32'h18, HBP);
    i_drv.write(32'h1C, VVIS);
    i_drv.write(32'h20, VFP);
    i_drv.write(32'h24, VSYNC);
    i_drv.write(32'h28, VBP);
    i_drv.write(32'h00, 32'd1);
    repeat (3 * VTOT * HTOT * (DIV + 1)) @(posedge clk);
    check(n_pix >= 2 * HVIS * VVIS, $sformatf("%0d pixels compared", n_pix));
    check(n_bad == 0, $sformatf("%0d wrong pixels", n_bad));
    check(hs_len == HSYNC * (DIV + 1), $sformatf("hsync %0d cycles", hs_len));
    check(vs_len == VSYNC * HTOT * (DIV + 1), $sformatf("vsync %0d cycles", vs_len));
    i_drv.read(32'h2C, v);
    check(v[15:0] >= 2 && v[31:16] == 0, $sformatf("status %h: frames, no underrun", v));
    frames0 = v[15:0];
    check(i_mem.n_reads > 0, "framebuffer read through AXI");
    // Cut the memory off: after the lines already buffered, black pixels and underruns.
    cut = 1'b1;
    repeat (VTOT * HTOT * (DIV + 1)) @(posedge clk);
    expect_black = 1'b1;
    n_pix = 0; n_bad = 0;
    repeat (VTOT * HTOT * (DIV + 1)) @(posedge clk);
    check(n_pix > 0 && n_bad == 0, $sformatf("black screen without data (%0d bad)", n_bad));
    i_drv.read(32'h2C, v);
    check(v[31:16] >= HVIS * VVIS, $sformatf("%0d underruns counted", v[31:16]));
    check(v[15:0] > frames0, "frames keep counting");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
