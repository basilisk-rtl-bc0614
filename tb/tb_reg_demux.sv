// Testbench of the Regbus demultiplexer: each 4 KiB window reaches only its own target, the
// response comes from that target, and a window without a target answers with error.
module tb_reg_demux;
  import basilisk_pkg::*;

  localparam int unsigned N = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  reg_req_t [N-1:0] treq;
  reg_rsp_t [N-1:0] trsp;
  int checks = 0, failures = 0;

  reg_demux #(.NumPorts(N)) dut (.req_i(req), .rsp_o(rsp), .req_o(treq), .rsp_i(trsp));

  for (genvar p = 0; p < N; p++) begin : gen_tgt
    reg_sim_tgt #(.WaitCycles(p % 3), .Tag(32'(p) << 24)) i_tgt (.clk_i(clk), .req_i(treq[p]),
                                                                .rsp_o(trsp[p]));
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(addr_t a, logic we, logic [31:0] wd, output logic [31:0] rd,
                        output logic err);
    req = '{addr: a, write: we, wdata: wd, wstrb: 4'hF, valid: 1'b1};
    #1;
    for (int p = 0; p < N; p++)
      check(treq[p].valid == (a[15:12] == 4'(p)), "valid only at the selected target");
    while (!rsp.ready) begin @(posedge clk); #1; end
    rd = rsp.rdata; err = rsp.error;
    @(posedge clk); #1 req.valid = 1'b0;
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    logic err;
    req = '0;
    @(posedge clk); #1;
    for (int p = 0; p < N; p++) begin
      access(RegbusBase + addr_t'(p * 32'h1000 + 8), 1'b0, '0, rd, err);
      check(!err && rd == ((32'(p) << 24) ^ 32'd2), $sformatf("read target %0d", p));
      access(RegbusBase + addr_t'(p * 32'h1000 + 12), 1'b1, 32'hAB00 + 32'(p), rd, err);
    end
    check(gen_tgt[0].i_tgt.regs[3] == 32'hAB00 && gen_tgt[1].i_tgt.regs[3] == 32'hAB01 &&
          gen_tgt[2].i_tgt.regs[3] == 32'hAB02 && gen_tgt[3].i_tgt.regs[3] == 32'hAB03 &&
          gen_tgt[4].i_tgt.regs[3] == 32'hAB04, "writes reached their own target");
    check(gen_tgt[2].i_tgt.n_acc == 2, "target 2 saw two accesses");
    access(RegbusBase + 32'h7000, 1'b0, '0, rd, err);
    check(err, "unpopulated window -> error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
