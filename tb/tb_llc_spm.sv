// Testbench of the last-level cache with scratchpad ways.
//
// Checks read misses and hits (DRAM port traffic counted), write-through, byte strobes,
// bursts, eviction among the cache ways, scratchpad reads and writes per way, SLVERR for a
// way not in scratchpad mode, invalidation when a way changes role, full bypass with all ways
// as scratchpad, and the 3-cycle hit latency.
module tb_llc_spm;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axi_req_t req;
  axi_rsp_t rsp;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic [3:0] spm_ways;
  logic hit, miss, spm_acc, bypass;
  int n_hit = 0, n_miss = 0, n_spm = 0, n_bypass = 0;

  int checks = 0, failures = 0;

  llc_spm dut (
    .clk_i(clk), .rst_ni(rst_n), .spm_ways_i(spm_ways), .axi_req_i(req), .axi_rsp_o(rsp),
    .mem_req_o(mreq), .mem_rsp_i(mrsp), .hit_o(hit), .miss_o(miss), .spm_access_o(spm_acc),
    .bypass_o(bypass));
  axi_sim_mst i_mst (.clk_i(clk), .req_o(req), .rsp_i(rsp));
  mem_port_model #(.AW(14)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));

  always @(posedge clk) begin
    n_hit += int'(hit); n_miss += int'(miss); n_spm += int'(spm_acc); n_bypass += int'(bypass);
  end

  // Cycles from AR handshake to first R valid.
  int ar_cycle = 0, cyc = 0, last_lat = 0;
  always @(posedge clk) begin
    cyc++;
    if (req.ar_valid && rsp.ar_ready) ar_cycle = cyc;
    if (rsp.r_valid && req.r_ready && ar_cycle != 0) begin last_lat = cyc - ar_cycle; ar_cycle = 0; end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic data_t init_val(int unsigned i);
    return {32'hD0D0_0000 | 32'(i), 32'(i * 7)};
  endfunction

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t d;
    axi_resp_e resp;
    int r0, w0;
    spm_ways = 4'b0000;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // Read miss then hit.
    r0 = i_mem.n_reads;
    i_mst.read(DramBase + 32'h80, d);
    check(d == init_val(16), "miss data");
    check(i_mem.n_reads == r0 + 1, "miss goes to DRAM");
    i_mst.read(DramBase + 32'h80, d);
    check(d == init_val(16), "hit data");
    check(i_mem.n_reads == r0 + 1, "hit stays on chip");
    check(last_lat == 3, $sformatf("hit latency %0d", last_lat));

    // Write-through with byte strobes on a cached word.
    w0 = i_mem.n_writes;
    i_mst.write(DramBase + 32'h80, 64'hFFFF_FFFF_FFFF_FFFF, 8'b0000_1111);
    check(i_mem.n_writes == w0 + 1, "write-through");
    check(i_mem.mem[16] == {init_val(16)[63:32], 32'hFFFF_FFFF}, "DRAM updated");
    r0 = i_mem.n_reads;
    i_mst.read(DramBase + 32'h80, d);
    check(d == {init_val(16)[63:32], 32'hFFFF_FFFF}, "cached copy updated");
    check(i_mem.n_reads == r0, "updated word still hits");

    // Burst read: misses, then hits.
    r0 = i_mem.n_reads;
    i_mst.read_burst(DramBase + 32'h1000, 7, resp);
    for (int i = 0; i < 8; i++) check(i_mst.buffer[i] == init_val(512 + i), "burst miss data");
    check(i_mem.n_reads == r0 + 8, "burst misses");
    i_mst.read_burst(DramBase + 32'h1000, 7, resp);
    for (int i = 0; i < 8; i++) check(i_mst.buffer[i] == init_val(512 + i), "burst hit data");
    check(i_mem.n_reads == r0 + 8, "burst hits");

    // Five tags on one set with four cache ways: the first one is evicted.
    for (int t = 0; t < 5; t++) i_mst.read(DramBase + 32'h2008 + 32'(t) * 32'h4000, d);
    r0 = i_mem.n_reads;
    for (int t = 1; t < 5; t++) begin
      i_mst.read(DramBase + 32'h2008 + 32'(t) * 32'h4000, d);
      check(d == init_val(32'h401 + t * 32'h800), "conflict set data");
    end
    check(i_mem.n_reads == r0, "four most recent tags still cached");
    i_mst.read(DramBase + 32'h2008, d);
    check(i_mem.n_reads == r0 + 1 && d == init_val(32'h401), "oldest tag evicted");

    // Scratchpad access to a cache way is an error.
    i_mst.read_burst(SpmBase, 0, resp);
    check(resp == RespSlvErr, "SPM read of cache way -> SLVERR");

    // Ways 0 and 1 as scratchpad.
    spm_ways = 4'b0011;
    i_mst.write(SpmBase + 32'h10, 64'h0123_4567_89AB_CDEF);
    i_mst.write(SpmBase + 32'h4000 + 32'h18, 64'hFEDC_BA98_7654_3210);
    i_mst.read(SpmBase + 32'h10, d);
    check(d == 64'h0123_4567_89AB_CDEF, "SPM way 0");
    i_mst.read(SpmBase + 32'h4018, d);
    check(d == 64'hFEDC_BA98_7654_3210, "SPM way 1");
    for (int i = 0; i < 4; i++) i_mst.buffer[i] = 64'(i) * 64'h1111;
    i_mst.write_burst(SpmBase + 32'h4100, 3, '1, resp);
    check(resp == RespOkay, "SPM burst write ok");
    i_mst.read_burst(SpmBase + 32'h4100, 3, resp);
    for (int i = 0; i < 4; i++) check(i_mst.buffer[i] == 64'(i) * 64'h1111, "SPM burst data");
    i_mst.read_burst(SpmBase + 32'h8000, 0, resp);
    check(resp == RespSlvErr, "SPM way 2 not enabled -> SLVERR");
    i_mst.write_burst(SpmBase + 32'hC000, 0, '1, resp);
    check(resp == RespSlvErr, "SPM write way 3 -> SLVERR");

    // Caching still works with two ways; DRAM data correct after role changes.
    i_mst.read(DramBase + 32'h80, d);
    check(d == {init_val(16)[63:32], 32'hFFFF_FFFF}, "DRAM read with 2 cache ways");

    // All ways scratchpad: every DRAM access bypasses.
    spm_ways = 4'b1111;
    r0 = i_mem.n_reads;
    i_mst.read(DramBase + 32'h88, d);
    i_mst.read(DramBase + 32'h88, d);
    check(d == init_val(17) && i_mem.n_reads == r0 + 2, "bypass with all ways scratchpad");
    i_mst.read(SpmBase + 32'h10, d);
    check(d == 64'h0123_4567_89AB_CDEF, "SPM content kept");

    // Back to all cache: lines from before must be gone (ways 0/1 were reused).
    spm_ways = 4'b0000;
    r0 = i_mem.n_reads;
    i_mst.read(DramBase + 32'h1000, d);
    check(d == init_val(512), "data after role change");

    check(n_hit > 0 && n_miss > 0 && n_spm > 0 && n_bypass > 0, "all LLC paths used");
    $display("hits=%0d misses=%0d spm=%0d bypass=%0d", n_hit, n_miss, n_spm, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
