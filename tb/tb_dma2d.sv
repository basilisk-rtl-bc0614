// Testbench of the 2D DMA engine against an AXI4 memory model with random back-pressure.
//
// Checks a 1D copy longer than one burst (burst count), a 2D copy with different source and
// destination strides (rows land where they should, gaps stay untouched), splitting at a 4 KiB
// boundary, the status register, the completion counter and the done interrupt.
module tb_dma2d;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  axi_req_t areq;
  axi_rsp_t arsp;
  logic irq;
  int n_irq = 0;
  int checks = 0, failures = 0;

  dma2d dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp), .axi_req_o(areq),
             .axi_rsp_i(arsp), .irq_o(irq));
  reg_drv i_drv (.clk_i(clk), .req_o(req), .rsp_i(rsp));
  axi_sim_mem #(.AW(12), .Seed(7)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(areq),
                                          .rsp_o(arsp));

  always @(negedge clk) n_irq += int'(irq);

  // Bursts crossing a 4 KiB boundary are illegal in AXI4.
  always @(posedge clk) if (areq.ar_valid && arsp.ar_ready)
    if ((areq.ar.addr & 32'hFFF) + ((32'(areq.ar.len) + 1) << 3) > 32'h1000) begin
      failures++; $display("FAIL: read burst crosses 4 KiB");
    end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(addr_t src, addr_t dst, int len, int ss, int ds, int reps);
    logic [31:0] v;
    i_drv.write(32'h00, src);
    i_drv.write(32'h04, dst);
    i_drv.write(32'h08, 32'(len));
    i_drv.write(32'h0C, 32'(ss));
    i_drv.write(32'h10, 32'(ds));
    i_drv.write(32'h14, 32'(reps));
    i_drv.write(32'h18, 32'h1);
    do i_drv.read(32'h1C, v); while (v[0]);
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
    int r0;
    for (int i = 0; i < 4096; i++) i_mem.mem[i] = 64'hA000_0000_0000_0000 + 64'(i);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // 1D: 20 words from word 0 to word 1024: bursts of 16 and 4.
    r0 = i_mem.n_reads;
    run(32'h0, 32'h2000, 160, 0, 0, 1);
    for (int i = 0; i < 20; i++) check(i_mem.mem[1024 + i] == 64'hA000_0000_0000_0000 + 64'(i),
                                       "1D copy data");
    check(i_mem.mem[1044] == 64'hA000_0000_0000_0000 + 64'd1044, "1D copy stops at LEN");
    check(i_mem.n_reads == r0 + 2, $sformatf("1D copy in %0d bursts", i_mem.n_reads - r0));
    // 2D: 4 rows of 3 words, source stride 0x80 (16 words), destination stride 0x20 (4 words).
    run(32'h400, 32'h3000, 24, 32'h80, 32'h20, 4);
    for (int r = 0; r < 4; r++) begin
      for (int i = 0; i < 3; i++)
        check(i_mem.mem[1536 + 4 * r + i] == 64'hA000_0000_0000_0000 + 64'(128 + 16 * r + i),
              $sformatf("2D row %0d word %0d", r, i));
      check(i_mem.mem[1536 + 4 * r + 3] == 64'hA000_0000_0000_0000 + 64'(1536 + 4 * r + 3),
            "2D gap untouched");
    end
    // Across a 4 KiB boundary: 4 words from 0xFF0.
    r0 = i_mem.n_reads;
    run(32'hFF0, 32'h3800, 32, 0, 0, 1);
    for (int i = 0; i < 4; i++)
      check(i_mem.mem[1792 + i] == 64'hA000_0000_0000_0000 + 64'(510 + i), "4 KiB split data");
    check(i_mem.n_reads == r0 + 2, "split into two bursts");
    i_drv.read(32'h1C, v);
    check(v[31:16] == 16'd3 && v[1:0] == 2'b00, $sformatf("status %h", v));
    check(n_irq == 3, $sformatf("done interrupts %0d", n_irq));
    i_drv.read(32'h20, v);
    check(i_drv.last_error, "unmapped offset -> error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
