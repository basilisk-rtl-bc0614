// Testbench of the HyperBus controller with two HyperRAM chip models.
//
// Writes full and byte-masked words to both chips, checks the models' half-word arrays, reads
// back written and untouched words, and measures chip-select length and the data phase: eight
// bytes in eight consecutive cycles, i.e. two bytes per CK period.
module tb_hyperbus_ctrl;
  import basilisk_pkg::*;

  localparam int unsigned Lat = 6;
  localparam int unsigned ChipBytes = 8 * 1024 * 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mem_req_t req;
  mem_rsp_t rsp;
  logic [1:0] cs_n;
  logic ck, ck_n, rwds_o, rwds_oe, dq_oe, reset_n;
  logic [7:0] dq_o;
  logic [1:0] m_rwds, m_oe;
  logic [7:0] m_dq [2];
  logic rwds_i;
  logic [7:0] dq_i;

  int checks = 0, failures = 0;

  hyperbus_ctrl #(.Latency(Lat)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mem_req_i(req), .mem_rsp_o(rsp),
    .hyper_cs_no(cs_n), .hyper_ck_o(ck), .hyper_ck_no(ck_n), .hyper_rwds_o(rwds_o),
    .hyper_rwds_oe_o(rwds_oe), .hyper_rwds_i(rwds_i), .hyper_dq_o(dq_o),
    .hyper_dq_oe_o(dq_oe), .hyper_dq_i(dq_i), .hyper_reset_no(reset_n));

  for (genvar c = 0; c < 2; c++) begin : gen_chip
    hyperram_model #(.AW(12), .Latency(Lat)) i_ram (
      .clk_i(clk), .cs_ni(cs_n[c]), .ck_i(ck), .rwds_i(rwds_oe ? rwds_o : 1'b0), .dq_i(dq_o),
      .rwds_o(m_rwds[c]), .dq_o(m_dq[c]), .dq_oe_o(m_oe[c]));
  end
  // Board wiring: the selected chip drives the shared lines.
  assign rwds_i = cs_n[0] ? m_rwds[1] : m_rwds[0];
  assign dq_i   = cs_n[0] ? m_dq[1]   : m_dq[0];

  // Chip-select length and bytes moved in consecutive write-data cycles.
  int cs_len = 0, last_cs_len = 0, run = 0, max_run = 0;
  always @(posedge clk) begin
    if (!(&cs_n)) cs_len++;
    else if (cs_len != 0) begin last_cs_len = cs_len; cs_len = 0; end
    if (rwds_oe && dq_oe) begin run++; if (run > max_run) max_run = run; end
    else run = 0;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(input addr_t addr, input logic we, input data_t wdata, input strb_t strb,
                        output data_t rdata);
    req = '{addr: addr, we: we, wdata: wdata, wstrb: strb, valid: 1'b1};
    do @(posedge clk); while (!rsp.ready);
    #1 req.valid = 1'b0;
    do @(posedge clk); while (!rsp.rvalid);
    rdata = rsp.rdata;
    #1;
  endtask

  function automatic logic [15:0] half(int c, int h);
    return (c == 0) ? gen_chip[0].i_ram.mem[h] : gen_chip[1].i_ram.mem[h];
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t d;
    req = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(reset_n == 1'b1, "reset released");
    // Full write to chip 0 at byte offset 0x40 (half-word 0x20).
    access(DramBase + 32'h40, 1'b1, 64'h1122_3344_5566_7788, '1, d);
    check(last_cs_len == 6 + 4 * Lat + 8, $sformatf("write CS length %0d", last_cs_len));
    check(max_run == 8, "eight data bytes in eight cycles");
    check(half(0, 32'h20) == 16'h7788 && half(0, 32'h21) == 16'h5566 &&
          half(0, 32'h22) == 16'h3344 && half(0, 32'h23) == 16'h1122, "chip 0 half-words");
    check(gen_chip[1].i_ram.n_write == 0, "chip 1 not selected");
    // Masked write to chip 1: only bytes 0 and 5 written.
    access(DramBase + ChipBytes + 32'h100, 1'b1, 64'hAAAA_BBBB_CCCC_DDDD, 8'b0010_0001, d);
    check(gen_chip[1].i_ram.n_write == 1, "chip 1 selected");
    check(half(1, 32'h80) == {8'(((32'h80 * 3 + 1) >> 8)), 8'hDD}, "masked byte 0");
    check(half(1, 32'h81) == 16'(32'h81 * 3 + 1), "masked half-word 1 untouched");
    check(half(1, 32'h82) == {8'hBB, 8'(32'h82 * 3 + 1)}, "masked byte 5");
    // Read back.
    access(DramBase + 32'h40, 1'b0, '0, '0, d);
    check(d == 64'h1122_3344_5566_7788, $sformatf("read chip 0 %h", d));
    access(DramBase + ChipBytes + 32'h100, 1'b0, '0, '0, d);
    check(d == {16'(32'h83 * 3 + 1), 8'hBB, 8'(32'h82 * 3 + 1), 16'(32'h81 * 3 + 1),
                8'(((32'h80 * 3 + 1) >> 8)), 8'hDD}, $sformatf("read chip 1 %h", d));
    // Untouched word: initial model contents.
    access(DramBase + 32'h208, 1'b0, '0, '0, d);
    check(d == {16'(32'h107 * 3 + 1), 16'(32'h106 * 3 + 1), 16'(32'h105 * 3 + 1),
                16'(32'h104 * 3 + 1)}, $sformatf("read untouched %h", d));
    check(last_cs_len == 6 + 4 * Lat + 8, $sformatf("read CS length %0d", last_cs_len));
    check(gen_chip[0].i_ram.n_read == 2 && gen_chip[1].i_ram.n_read == 1, "read counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
