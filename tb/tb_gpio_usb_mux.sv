// Testbench of the GPIO / USB pin multiplexer: GPIO output, enable and synchronised input
// registers, and per-port hand-over of pin pairs to the USB controller in both directions.
module tb_gpio_usb_mux;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  logic [3:0] u_dp_i, u_dm_i, u_oe_i, u_dp_o, u_dm_o;
  logic [7:0] pad_o, pad_oe, pad_i;
  int checks = 0, failures = 0;

  gpio_usb_mux dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .usb_dp_i(u_dp_i), .usb_dm_i(u_dm_i), .usb_oe_i(u_oe_i), .usb_dp_o(u_dp_o),
    .usb_dm_o(u_dm_o), .pad_o(pad_o), .pad_oe_o(pad_oe), .pad_i(pad_i));
  reg_drv i_drv (.clk_i(clk), .req_o(req), .rsp_i(rsp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    u_dp_i = 4'b1010; u_dm_i = 4'b0101; u_oe_i = 4'b1100; pad_i = 8'h00;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(pad_oe == 8'h00, "all pins input after reset");
    i_drv.write(32'h0, 32'h5A);
    i_drv.write(32'h4, 32'hF0);
    check(pad_o == 8'h5A && pad_oe == 8'hF0, "GPIO out and enable");
    pad_i = 8'hC3;
    repeat (3) @(posedge clk);
    i_drv.read(32'h8, v);
    check(v == 32'hC3, $sformatf("GPIO in %h", v));
    check(u_dp_o == 4'hF && u_dm_o == 4'h0, "USB sees idle J state on unassigned ports");
    // Ports 1 and 3 take pins 2/3 and 6/7.
    i_drv.write(32'hC, 32'b1010);
    #1;
    check(pad_o == {u_dm_i[3], u_dp_i[3], 2'b01, u_dm_i[1], u_dp_i[1], 2'b10},
          $sformatf("pads with USB ports 1,3: %b", pad_o));
    check(pad_oe == {{2{u_oe_i[3]}}, 2'b11, {2{u_oe_i[1]}}, 2'b00}, "pad enables with USB");
    check(u_dp_o[1] == pad_i[2] && u_dm_o[1] == pad_i[3] && u_dp_o[3] == pad_i[6] &&
          u_dm_o[3] == pad_i[7], "USB inputs from the pads");
    check(u_dp_o[0] == 1'b1 && u_dp_o[2] == 1'b1, "unassigned ports idle");
    i_drv.read(32'hC, v);
    check(v == 32'b1010, "USB_SEL readback");
    i_drv.read(32'h10, v);
    check(i_drv.last_error, "unmapped offset -> error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
