// Testbench of the AXI4-to-Regbus bridge against a Regbus register model with wait states.
//
// Checks that each 64-bit beat becomes one 32-bit access on the half chosen by address bit 2,
// with the matching strobes; reads return the register in both halves; bursts are split into
// beats; a Regbus error turns into SLVERR.
module tb_axi_to_reg;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axi_req_t req;
  axi_rsp_t rsp;
  reg_req_t rreq;
  reg_rsp_t rrsp;
  int checks = 0, failures = 0;

  axi_to_reg dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp),
                  .reg_req_o(rreq), .reg_rsp_i(rrsp));
  axi_sim_mst i_mst (.clk_i(clk), .req_o(req), .rsp_i(rsp));
  reg_sim_tgt #(.WaitCycles(2), .Tag(32'h5000_0000)) i_tgt (.clk_i(clk), .req_i(rreq),
                                                          .rsp_o(rrsp));

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
    data_t d;
    axi_resp_e resp;
    int n0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);
    // Lower half, full strobe.
    i_mst.write(32'h0300_0010, 64'hAAAA_AAAA_1234_5678, 8'h0F);
    check(i_tgt.regs[4] == 32'h1234_5678, "lower-half write");
    // Upper half with partial strobes.
    i_mst.write(32'h0300_0014, 64'h00CC_0000_FFFF_FFFF, 8'b0100_0000);
    check(i_tgt.regs[5] == ((32'h5000_0000 ^ 32'd5) & 32'hFF00_FFFF | 32'h00CC_0000),
          "upper-half byte write");
    i_mst.read(32'h0300_0010, d);
    check(d == {32'h1234_5678, 32'h1234_5678}, "read lower");
    i_mst.read(32'h0300_0020, d);
    check(d[31:0] == (32'h5000_0000 ^ 32'd8), "read untouched");
    // Burst of four beats = four accesses.
    n0 = i_tgt.n_acc;
    for (int i = 0; i < 4; i++) i_mst.buffer[i] = {32'(i), 32'h0B00 + 32'(i)};
    i_mst.write_burst(32'h0300_0040, 3, 8'h0F, resp);
    check(resp == RespOkay && i_tgt.n_acc == n0 + 4, "burst write split into beats");
    for (int i = 0; i < 4; i++) check(i_tgt.regs[16 + 2 * i] == 32'h0B00 + 32'(i), "burst data");
    i_mst.read_burst(32'h0300_0040, 3, resp);
    for (int i = 0; i < 4; i++) check(i_mst.buffer[i][31:0] == 32'h0B00 + 32'(i), "burst read");
    // Error.
    i_mst.read_burst(32'h0300_0200, 0, resp);
    check(resp == RespSlvErr, "read error -> SLVERR");
    i_mst.write_burst(32'h0300_0208, 0, '1, resp);
    check(resp == RespSlvErr, "write error -> SLVERR");
    i_mst.read(32'h0300_0010, d);
    check(i_mst.last_resp == RespOkay && d[31:0] == 32'h1234_5678, "ok after error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
