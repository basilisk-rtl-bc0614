// Testbench of the SPI host: a device model on the bus records what the host shifts out on
// rising SCK edges and presents its own byte, changing bits after falling edges. Checks
// standard and quad bytes in both directions, chip-select control, the number of SCK cycles
// per byte and the SCK half period of DIV+1 clock cycles.
module tb_spi_host;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t   req;
  reg_rsp_t   rsp;
  logic       sck;
  logic [1:0] cs_n;
  logic [3:0] dq_o, dq_oe, dq_i;
  int checks = 0, failures = 0;

  spi_host dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp), .sck_o(sck),
                .cs_no(cs_n), .dq_o(dq_o), .dq_oe_o(dq_oe), .dq_i(dq_i));
  reg_drv i_drv (.clk_i(clk), .req_o(req), .rsp_i(rsp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Device model.
  logic       dev_quad = 1'b0;
  logic [7:0] dev_out = '0, dev_in = '0;
  int         dev_idx = 0, n_rise = 0;
  always @(posedge sck) begin
    n_rise++;
    if (dev_quad) dev_in = {dev_in[3:0], dq_oe == 4'hF ? dq_o : 4'h0};
    else          dev_in = {dev_in[6:0], dq_o[0]};
  end
  always @(negedge sck) dev_idx++;
  always_comb begin
    if (dev_quad) dq_i = (dev_idx == 0) ? dev_out[7:4] : dev_out[3:0];
    else          dq_i = {2'b00, (dev_idx < 8) ? dev_out[7 - dev_idx] : 1'b0, 1'b0};
  end

  // SCK half period measured in clock cycles.
  int last_edge = 0, cyc = 0, half = 0;
  always @(posedge clk) cyc++;
  always @(posedge sck) half = cyc - last_edge;
  always @(negedge sck) last_edge = cyc;

  task automatic byte_xfer(logic quad, logic qread, logic [7:0] tx, logic [7:0] dev_byte,
                           output logic [7:0] rx);
    logic [31:0] v;
    dev_quad = quad; dev_out = dev_byte; dev_idx = 0; n_rise = 0;
    i_drv.write(32'h8, {22'd0, qread, quad, tx});
    do i_drv.read(32'h10, v); while (v[0]);
    i_drv.read(32'hC, v);
    rx = v[7:0];
  endtask

  initial begin
    logic [7:0] rx;
    logic [31:0] v;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(cs_n == 2'b11 && !sck, "idle: chip selects high, SCK low");
    i_drv.write(32'h0, 32'h1);
    check(cs_n == 2'b10, "chip select 0 active");
    // Standard byte, both directions.
    byte_xfer(1'b0, 1'b0, 8'hA5, 8'h3C, rx);
    check(dev_in == 8'hA5, $sformatf("device received %h", dev_in));
    check(rx == 8'h3C, $sformatf("host received %h", rx));
    check(n_rise == 8, $sformatf("%0d SCK cycles for a standard byte", n_rise));
    check(half == 4, $sformatf("SCK high for %0d cycles at DIV=3", half));
    // Quad write, then quad read.
    byte_xfer(1'b1, 1'b0, 8'h9E, 8'h00, rx);
    check(dev_in == 8'h9E, $sformatf("quad write: device received %h", dev_in));
    check(n_rise == 2, $sformatf("%0d SCK cycles for a quad byte", n_rise));
    byte_xfer(1'b1, 1'b1, 8'h00, 8'hD7, rx);
    check(rx == 8'hD7, $sformatf("quad read: host received %h", rx));
    check(dq_oe == 4'h0, "quad read leaves the lines to the device");
    // Slower clock on the other chip select.
    i_drv.write(32'h0, 32'h2);
    i_drv.write(32'h4, 32'd7);
    byte_xfer(1'b0, 1'b0, 8'h5A, 8'hC3, rx);
    check(cs_n == 2'b01, "chip select 1 active");
    check(dev_in == 8'h5A && rx == 8'hC3, "standard byte at DIV=7");
    check(half == 8, $sformatf("SCK high for %0d cycles at DIV=7", half));
    i_drv.write(32'h0, 32'h0);
    check(cs_n == 2'b11, "chip selects released");
    i_drv.read(32'h18, v);
    check(i_drv.last_error, "unmapped offset errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
