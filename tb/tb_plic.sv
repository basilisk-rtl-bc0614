// Testbench of the PLIC: priority and threshold masking, highest-priority claim with lowest-ID
// tie break, claim/complete gating of a level source, enable masking and register read-back.
// Expected IDs are worked out by the testbench from the priorities it writes.
module tb_plic;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t   req;
  reg_rsp_t   rsp;
  logic [7:0] src = '0;
  logic       irq;
  int checks = 0, failures = 0;

  plic dut (.clk_i(clk), .rst_ni(rst_n), .irq_src_i(src), .reg_req_i(req), .reg_rsp_o(rsp),
            .irq_o(irq));
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

  // Reference: highest priority above threshold among pending & enabled, lowest ID on ties.
  function automatic int ref_claim(int prio[8], logic [7:0] pend, logic [7:0] en, int th);
    int best = 0, bp = th;
    for (int i = 1; i < 8; i++) if (pend[i] && en[i] && prio[i] > bp) begin best = i; bp = prio[i]; end
    return best;
  endfunction

  initial begin
    logic [31:0] v;
    int prio[8];
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(!irq, "no interrupt after reset");
    prio = '{0, 1, 5, 3, 5, 2, 7, 4};
    for (int i = 1; i < 8; i++) i_drv.write(32'(4 * i), 32'(prio[i]));
    i_drv.read(32'h8, v);
    check(v == 5, "priority read-back");
    // Raise sources 1, 2, 4, 6; enable all but 6.
    src = 8'b0101_0110;
    i_drv.write(32'h100, 32'hFF);
    i_drv.read(32'h100, v);
    check(v == 32'hFE, "enable bit 0 cannot be set");
    i_drv.write(32'h100, 32'hBF);
    i_drv.read(32'h80, v);
    check(v[7:0] == 8'b0101_0110, $sformatf("pending %b", v[7:0]));
    check(irq, "interrupt raised");
    // Threshold 5 hides everything enabled (best enabled priority is 5).
    i_drv.write(32'h200, 32'd5);
    @(negedge clk) check(!irq, "threshold masks priority 5");
    @(posedge clk);
    i_drv.read(32'h204, v);
    check(v == 0, "claim with nothing eligible returns 0");
    i_drv.write(32'h200, 32'd0);
    // Claim: sources 2 and 4 both priority 5, so 2 first.
    i_drv.read(32'h204, v);
    check(v == ref_claim(prio, 8'b0101_0110, 8'hBF, 0), $sformatf("first claim %0d", v));
    // Source 2 stays high but is claimed: next claim gives 4.
    i_drv.read(32'h204, v);
    check(v == 4, $sformatf("second claim %0d", v));
    i_drv.read(32'h204, v);
    check(v == 1, $sformatf("third claim %0d", v));
    i_drv.read(32'h204, v);
    check(v == 0, "all claimed");
    @(negedge clk) check(!irq, "no interrupt while all are claimed");
    @(posedge clk);
    // Complete 2 while its line is still high: pending again.
    i_drv.write(32'h204, 32'd2);
    repeat (2) @(posedge clk);
    @(negedge clk) check(irq, "completed level source pends again");
    @(posedge clk);
    i_drv.read(32'h204, v);
    check(v == 2, $sformatf("re-claim of source 2: %0d", v));
    // Source 4 drops and completes: stays idle.
    src[4] = 1'b0;
    i_drv.write(32'h204, 32'd4);
    repeat (2) @(posedge clk);
    i_drv.read(32'h80, v);
    check(v[4] == 1'b0, "dropped source does not pend after complete");
    // Enable 6: priority 7 wins.
    i_drv.write(32'h100, 32'hFF);
    i_drv.read(32'h204, v);
    check(v == 6, "highest priority source claimed");
    i_drv.read(32'h300, v);
    check(i_drv.last_error, "unmapped offset errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
