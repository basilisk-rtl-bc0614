// Testbench of the SoC control registers: way mask output and readback, boot mode pins,
// scratch register, reset values and error on unmapped offsets.
module tb_soc_regs;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  logic [1:0] boot_mode = 2'b01;
  logic [3:0] spm_ways;
  int checks = 0, failures = 0;

  soc_regs dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
                .boot_mode_i(boot_mode), .spm_ways_o(spm_ways));
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
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(spm_ways == 4'b0000, "all ways cache after reset");
    i_drv.write(32'h0, 32'h0000_0005);
    check(spm_ways == 4'b0101, "way mask output");
    i_drv.read(32'h0, v);
    check(v == 32'h5, "way mask readback");
    i_drv.read(32'h4, v);
    check(v == 32'h1, "boot mode");
    boot_mode = 2'b11;
    i_drv.read(32'h4, v);
    check(v == 32'h3, "boot mode follows pins");
    i_drv.write(32'h4, 32'h0);
    i_drv.read(32'h4, v);
    check(v == 32'h3, "boot mode read only");
    i_drv.write(32'h8, 32'hDEAD_0001);
    i_drv.read(32'h8, v);
    check(v == 32'hDEAD_0001, "scratch");
    i_drv.read(32'h10, v);
    check(i_drv.last_error, "unmapped offset -> error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
