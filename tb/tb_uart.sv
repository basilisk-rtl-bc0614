// Testbench of the UART: frames sent by the transmitter are decoded by an independent
// receiver model (bit period, start, data LSB first, stop), frames from a model transmitter are
// received, plus loopback, status bits, overrun and the receive interrupt.
module tb_uart;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  logic tx, rx, irq, loop = 1'b0, model_tx = 1'b1;
  int checks = 0, failures = 0;

  assign rx = loop ? tx : model_tx;

  uart dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp), .tx_o(tx), .rx_i(rx),
            .irq_o(irq));
  reg_drv i_drv (.clk_i(clk), .req_o(req), .rsp_i(rsp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Receiver model: waits for the start edge, measures the start bit length, samples mid-bit.
  task automatic model_rx(input int div, output logic [7:0] data, output int start_len);
    int n = 0;
    @(negedge tx);
    while (tx == 1'b0) begin @(posedge clk); #1; n++; end
    start_len = n;
    repeat (div / 2) @(posedge clk);
    for (int b = 0; b < 8; b++) begin data[b] = tx; repeat (div) @(posedge clk); end
    check(tx == 1'b1, "stop bit high");
  endtask

  task automatic model_send(input int div, input logic [7:0] data);
    model_tx = 1'b0; repeat (div) @(posedge clk);
    for (int b = 0; b < 8; b++) begin model_tx = data[b]; repeat (div) @(posedge clk); end
    model_tx = 1'b1; repeat (div) @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    logic [7:0] d;
    int len;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    i_drv.read(32'hC, v);
    check(v == 32'd16, "divider reset value");
    i_drv.write(32'hC, 32'd10);
    // Transmit, decoded by the model.
    fork
      model_rx(10, d, len);
      i_drv.write(32'h0, 32'hA7);
    join
    check(d == 8'hA7, $sformatf("tx byte %h", d));
    check(len == 10, $sformatf("bit period %0d cycles", len));
    i_drv.read(32'h8, v);
    check(v[0] == 1'b1, "tx busy while sending");
    repeat (100) @(posedge clk);
    i_drv.read(32'h8, v);
    check(v[0] == 1'b0, "tx idle after frame");
    // Receive from the model.
    check(!irq, "no irq before reception");
    model_send(10, 8'h3C);
    repeat (5) @(posedge clk);
    check(irq, "receive interrupt");
    i_drv.read(32'h8, v);
    check(v[1] == 1'b1 && v[2] == 1'b0, "rx valid, no overrun");
    i_drv.read(32'h4, v);
    check(v == 32'h3C, $sformatf("rx byte %h", v));
    check(!irq, "irq cleared by read");
    // Two bytes without reading: overrun.
    model_send(10, 8'h11);
    model_send(10, 8'h22);
    repeat (5) @(posedge clk);
    i_drv.read(32'h8, v);
    check(v[2] == 1'b1, "overrun flagged");
    i_drv.read(32'h4, v);
    check(v == 32'h22, "newest byte kept");
    // Loopback at another rate.
    loop = 1'b1;
    i_drv.write(32'hC, 32'd7);
    i_drv.write(32'h0, 32'hE1);
    repeat (100) @(posedge clk);
    i_drv.read(32'h4, v);
    check(v == 32'hE1, $sformatf("loopback byte %h", v));
    i_drv.read(32'h20, v);
    check(i_drv.last_error, "unmapped offset -> error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
