// Testbench of the CLINT: mtime counting on rtc ticks, timer interrupt at mtime >= mtimecmp
// (cycle exact), 64-bit halves, software interrupt bit, and the reset values.
module tb_clint;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, rtc = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  logic mtip, msip;
  int checks = 0, failures = 0;

  clint dut (.clk_i(clk), .rst_ni(rst_n), .rtc_i(rtc), .reg_req_i(req), .reg_rsp_o(rsp),
             .mtip_o(mtip), .msip_o(msip));
  reg_drv i_drv (.clk_i(clk), .req_o(req), .rsp_i(rsp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v, hi;
    int n;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(!mtip && !msip, "no interrupt after reset");
    i_drv.read(32'h10, v);
    check(v == 0, "mtime stays without rtc ticks");
    i_drv.read(32'hC, v);
    check(v == 32'hFFFF_FFFF, "mtimecmp reset high");
    // 40 rtc ticks.
    for (int i = 0; i < 40; i++) begin rtc = 1'b1; @(posedge clk); #1 rtc = 1'b0; @(posedge clk); #1; end
    i_drv.read(32'h10, v);
    check(v == 40, $sformatf("mtime %0d after 40 ticks", v));
    // Count every cycle: compare at mtime + 30.
    rtc = 1'b1;
    i_drv.write(32'hC, 32'h0);
    i_drv.read(32'h10, v);
    i_drv.write(32'h8, v + 32'd30);
    n = 0;
    while (!mtip) begin @(posedge clk); #1 n++; end
    check(n >= 25 && n <= 28, $sformatf("timer fired after %0d cycles", n));
    // Carry into the high half.
    i_drv.write(32'h10, 32'hFFFF_FFF0);
    i_drv.write(32'h14, 32'h0000_0001);
    repeat (40) @(posedge clk);
    i_drv.read(32'h14, hi);
    check(hi == 32'd2, "mtime carries into the high word");
    i_drv.write(32'hC, 32'h0000_0003);
    #1 check(!mtip, "mtimecmp in the future clears mtip");
    // Software interrupt.
    i_drv.write(32'h0, 32'h1);
    check(msip, "msip set");
    i_drv.read(32'h0, v);
    check(v == 32'h1, "msip readback");
    i_drv.write(32'h0, 32'h0);
    check(!msip, "msip cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
