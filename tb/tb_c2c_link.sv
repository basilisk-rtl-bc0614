// Testbench of the chip-to-chip link: two link instances on unrelated clocks are wired lane to
// lane. Chip A's simulated core writes and reads chip B's memory through A's target port and
// B's initiator port, while chip B does the same towards chip A. Checks data in both
// directions, the address page translation, bursts that are too long (SLVERR), the one bit per
// clock cycle rate with one bit on each forwarded clock edge, and the frame counters.
module tb_c2c_link;
  import basilisk_pkg::*;

  logic clk_a = 1'b0, clk_b = 1'b0, rst_n = 1'b1;
  always #5 clk_a = ~clk_a;
  always #6 clk_b = ~clk_b;

  axi_req_t a_slv_req, a_mst_req, b_slv_req, b_mst_req;
  axi_rsp_t a_slv_rsp, a_mst_rsp, b_slv_rsp, b_mst_rsp;
  reg_req_t a_reg_req, b_reg_req;
  reg_rsp_t a_reg_rsp, b_reg_rsp;
  logic ab_clk, ab_data, ba_clk, ba_data;
  int checks = 0, failures = 0;

  c2c_link i_a (.clk_i(clk_a), .rst_ni(rst_n), .reg_req_i(a_reg_req), .reg_rsp_o(a_reg_rsp),
    .slv_req_i(a_slv_req), .slv_rsp_o(a_slv_rsp), .mst_req_o(a_mst_req), .mst_rsp_i(a_mst_rsp),
    .tx_clk_o(ab_clk), .tx_data_o(ab_data), .rx_clk_i(ba_clk), .rx_data_i(ba_data));
  c2c_link i_b (.clk_i(clk_b), .rst_ni(rst_n), .reg_req_i(b_reg_req), .reg_rsp_o(b_reg_rsp),
    .slv_req_i(b_slv_req), .slv_rsp_o(b_slv_rsp), .mst_req_o(b_mst_req), .mst_rsp_i(b_mst_rsp),
    .tx_clk_o(ba_clk), .tx_data_o(ba_data), .rx_clk_i(ab_clk), .rx_data_i(ab_data));

  axi_sim_mst i_core_a (.clk_i(clk_a), .req_o(a_slv_req), .rsp_i(a_slv_rsp));
  axi_sim_mst i_core_b (.clk_i(clk_b), .req_o(b_slv_req), .rsp_i(b_slv_rsp));
  axi_sim_mem #(.AW(10), .Seed(3)) i_mem_a (.clk_i(clk_a), .rst_ni(rst_n), .req_i(a_mst_req), .rsp_o(a_mst_rsp));
  axi_sim_mem #(.AW(10), .Seed(7)) i_mem_b (.clk_i(clk_b), .rst_ni(rst_n), .req_i(b_mst_req), .rsp_o(b_mst_rsp));
  reg_drv i_drv_a (.clk_i(clk_a), .req_o(a_reg_req), .rsp_i(a_reg_rsp));
  reg_drv i_drv_b (.clk_i(clk_b), .req_o(b_reg_req), .rsp_i(b_reg_rsp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk_a);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Addresses seen on chip B's interconnect.
  logic [3:0] b_pages [$];
  always @(negedge clk_b) if (b_mst_req.aw_valid && b_mst_rsp.aw_ready) b_pages.push_back(b_mst_req.aw.addr[31:28]);

  // Forwarded clock edges and data bits of A's lane during a window.
  int n_edges = 0, n_cyc = 0;
  bit count_on = 1'b0;
  always @(ab_clk) if (count_on) n_edges++;
  always @(posedge clk_a) if (count_on) n_cyc++;

  function automatic data_t pat(int s, int i);
    return {32'(s) ^ 32'hA5A5_0000, 32'(i * 32'h0101_0101 + s)};
  endfunction

  initial begin
    axi_resp_e resp;
    data_t d;
    logic [31:0] v;
    // A reset edge: the receivers are clocked by the other side's forwarded clock, which
    // stands still during reset, so they are reset asynchronously.
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk_a);
    #1 rst_n = 1'b1;
    repeat (5) @(posedge clk_a);
    i_drv_a.read(32'h0, v);
    check(v == 32'h8, "page resets to 8");
    fork
      begin : a_to_b
        for (int i = 0; i < 4; i++) i_core_a.buffer[i] = pat(1, i);
        i_core_a.write_burst(32'h2000_0100, 3, '1, resp);
        check(resp == RespOkay, "A->B burst write response");
        i_core_a.read_burst(32'h2000_0100, 3, resp);
        check(resp == RespOkay, "A->B burst read response");
        for (int i = 0; i < 4; i++) check(i_core_a.buffer[i] == pat(1, i), $sformatf("A->B beat %0d", i));
      end
      begin : b_to_a
        @(posedge clk_b);   // chip B's tasks start right after a rising edge of its own clock
        for (int i = 0; i < 8; i++) i_core_b.buffer[i] = pat(2, i);
        i_core_b.write_burst(32'h2000_0200, 7, '1, resp);
        check(resp == RespOkay, "B->A burst write response");
        i_core_b.read(32'h2000_0218, d);
        check(d == pat(2, 3), "B->A single read");
      end
    join
    for (int i = 0; i < 4; i++) check(i_mem_b.mem[32 + i] == pat(1, i), $sformatf("chip B memory word %0d", i));
    for (int i = 0; i < 8; i++) check(i_mem_a.mem[64 + i] == pat(2, i), $sformatf("chip A memory word %0d", i));
    // Page translation.
    i_drv_a.write(32'h0, 32'h3);
    i_core_a.write(32'h2000_0040, 64'h1234);
    check(b_pages.size() == 2 && b_pages[0] == 4'h8 && b_pages[1] == 4'h3,
          "remote address page from the PAGE register");
    // Too long for the link buffers.
    for (int i = 0; i < 17; i++) i_core_a.buffer[i] = '0;
    i_core_a.write_burst(32'h2000_0000, 16, '1, resp);
    check(resp == RespSlvErr, "17-beat write refused");
    i_core_a.read_burst(32'h2000_0000, 16, resp);
    check(resp == RespSlvErr, "17-beat read refused");
    // Rate: one forwarded clock edge, i.e. one bit, per clock cycle.
    count_on = 1'b1;
    repeat (200) @(posedge clk_a);
    count_on = 1'b0;
    check(n_edges >= n_cyc - 1 && n_edges <= n_cyc + 1, $sformatf("%0d edges in %0d cycles", n_edges, n_cyc));
    // Frame counters: A sent AW+4W, AR, AW+1W, and responses B, AR.. for B's requests.
    i_drv_a.read(32'h4, v);
    @(posedge clk_b);
    i_drv_b.read(32'h8, d[31:0]);
    check(v == d[31:0] && v > 0, $sformatf("frames sent by A %0d, received by B %0d", v, d[31:0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
