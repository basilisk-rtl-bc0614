// Testbench of the AXI4 crossbar: three initiators, three memory targets and the error target.
//
// All initiators write and read back bursts to all targets at the same time, so arbitration,
// locking and parallel paths are exercised. Target memories are checked through their arrays,
// read data against the written values; unmapped addresses must return DECERR.
module tb_axi_xbar;
  import basilisk_pkg::*;

  localparam int unsigned NM = 3, NS = 3;
  localparam addr_t SlvBase [NS] = '{DramBase, RegbusBase, 32'h2000_0000};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axi_req_t [NM-1:0] mreq;
  axi_rsp_t [NM-1:0] mrsp;
  axi_req_t [NS-1:0] sreq;
  axi_rsp_t [NS-1:0] srsp;

  int checks = 0, failures = 0;
  int contention = 0, parallel_beats = 0;

  axi_xbar #(.NumMst(NM), .NumSlv(NS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
    .slv_req_o(sreq), .slv_rsp_i(srsp));

  for (genvar m = 0; m < NM; m++) begin : gen_mst
    axi_sim_mst #(.Id(id_t'(m))) i_mst (.clk_i(clk), .req_o(mreq[m]), .rsp_i(mrsp[m]));
  end
  for (genvar s = 0; s < NS; s++) begin : gen_mem
    axi_sim_mem #(.AW(10), .Seed(s)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(sreq[s]),
                                           .rsp_o(srsp[s]));
  end

  function automatic data_t pattern(int m, int s, int i);
    return {8'(m), 8'(s), 16'(i), 32'hC0DE_0000 + 32'(m * 256 + s * 16 + i)};
  endfunction

  function automatic int tgt_of(addr_t a);
    if (a >= RegbusBase && a < RegbusEnd) return 1;
    if ((a >= DramBase && a < DramEnd) || (a >= SpmBase && a < SpmEnd)) return 0;
    if (a >= 32'h2000_0000 && a < 32'h3000_0000) return 2;
    return 3;
  endfunction

  // Mechanism counters: two initiators asking for the same target, and W beats accepted by
  // two targets in the same cycle.
  always @(posedge clk) if (rst_n) begin
    int hs = 0;
    for (int a = 0; a < NM; a++)
      for (int b = a + 1; b < NM; b++)
        if (mreq[a].aw_valid && mreq[b].aw_valid &&
            tgt_of(mreq[a].aw.addr) == tgt_of(mreq[b].aw.addr)) contention++;
    for (int s = 0; s < NS; s++) if (sreq[s].w_valid && srsp[s].w_ready) hs++;
    if (hs > 1) parallel_beats++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_master(int m);
    axi_resp_e resp;
    for (int k = 0; k < NS; k++) begin
      int s = (m + k) % NS;
      addr_t base = SlvBase[s] + addr_t'(m * 32'h100);
      for (int i = 0; i < 8; i++) case (m)
        0: gen_mst[0].i_mst.buffer[i] = pattern(m, s, i);
        1: gen_mst[1].i_mst.buffer[i] = pattern(m, s, i);
        default: gen_mst[2].i_mst.buffer[i] = pattern(m, s, i);
      endcase
      case (m)
        0: gen_mst[0].i_mst.write_burst(base, 7, '1, resp);
        1: gen_mst[1].i_mst.write_burst(base, 7, '1, resp);
        default: gen_mst[2].i_mst.write_burst(base, 7, '1, resp);
      endcase
      check(resp == RespOkay, $sformatf("write resp m%0d s%0d", m, s));
    end
    for (int k = 0; k < NS; k++) begin
      int s = (m + 2 * k + 1) % NS;
      addr_t base = SlvBase[s] + addr_t'(m * 32'h100);
      data_t got [8];
      case (m)
        0: begin gen_mst[0].i_mst.read_burst(base, 7, resp);
           for (int i = 0; i < 8; i++) got[i] = gen_mst[0].i_mst.buffer[i]; end
        1: begin gen_mst[1].i_mst.read_burst(base, 7, resp);
           for (int i = 0; i < 8; i++) got[i] = gen_mst[1].i_mst.buffer[i]; end
        default: begin gen_mst[2].i_mst.read_burst(base, 7, resp);
           for (int i = 0; i < 8; i++) got[i] = gen_mst[2].i_mst.buffer[i]; end
      endcase
      check(resp == RespOkay, $sformatf("read resp m%0d s%0d", m, s));
      for (int i = 0; i < 8; i++)
        check(got[i] == pattern(m, s, i), $sformatf("read data m%0d s%0d i%0d", m, s, i));
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    axi_resp_e resp;
    data_t d;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);
    fork
      run_master(0);
      run_master(1);
      run_master(2);
    join
    // All initiators write the same target at once: arbitration must serialise them.
    fork
      gen_mst[0].i_mst.write(SlvBase[2] + 32'h800, 64'hA0);
      gen_mst[1].i_mst.write(SlvBase[2] + 32'h808, 64'hA1);
      gen_mst[2].i_mst.write(SlvBase[2] + 32'h810, 64'hA2);
    join
    for (int m = 0; m < NM; m++) check(gen_mem[2].i_mem.mem[256 + m] == 64'(32'hA0 + m),
                                       "concurrent writes to one target");
    // Backdoor check of the target memories: initiator m wrote words at offset m*0x100.
    for (int m = 0; m < NM; m++)
      for (int i = 0; i < 8; i++) begin
        check(gen_mem[0].i_mem.mem[m * 32 + i] == pattern(m, 0, i), "mem0 content");
        check(gen_mem[1].i_mem.mem[m * 32 + i] == pattern(m, 1, i), "mem1 content");
        check(gen_mem[2].i_mem.mem[m * 32 + i] == pattern(m, 2, i), "mem2 content");
      end
    check(gen_mem[0].i_mem.n_writes == 3 && gen_mem[1].i_mem.n_writes == 3 &&
          gen_mem[2].i_mem.n_writes == 6, "each target saw three write bursts");
    // Unmapped address: decode error on both directions.
    gen_mst[1].i_mst.buffer[0] = 64'h1;
    gen_mst[1].i_mst.buffer[1] = 64'h2;
    gen_mst[1].i_mst.write_burst(32'h4000_0000, 1, '1, resp);
    check(resp == RespDecErr, "unmapped write DECERR");
    gen_mst[1].i_mst.read_burst(32'h4000_0000, 3, resp);
    check(resp == RespDecErr, "unmapped read DECERR");
    // The error target must not disturb a following access.
    gen_mst[1].i_mst.read(SlvBase[1] + 32'h100, d);
    check(d == pattern(1, 1, 0), "access after DECERR");
    check(contention > 0, "initiators contended for a target");
    check(parallel_beats > 0, "two targets accepted beats in the same cycle");
    $display("contention=%0d parallel_beats=%0d", contention, parallel_beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
