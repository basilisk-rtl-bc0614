// Testbench of the I2C host against a small EEPROM-like device model at address 0x50 on an
// open-drain bus. The device detects START/STOP, acknowledges its address, takes a pointer
// byte then data bytes, and returns data on reads until the host answers NACK. Checks
// writes, a pointer write followed by a repeated-START read, ACK/NACK reporting for a wrong
// address, START/STOP counts, the SCL period of 4*(DIV+1) cycles, and clock stretching.
module tb_i2c_host;
  import basilisk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  logic scl_oe, sda_oe, dev_sda_low = 1'b0, dev_scl_low = 1'b0;
  logic scl, sda;
  assign scl = !scl_oe && !dev_scl_low;
  assign sda = !sda_oe && !dev_sda_low;
  int checks = 0, failures = 0;

  i2c_host dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
                .scl_oe_o(scl_oe), .scl_i(scl), .sda_oe_o(sda_oe), .sda_i(sda));
  reg_drv i_drv (.clk_i(clk), .req_o(req), .rsp_i(rsp));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Device model.
  typedef enum {DIdle, DAddr, DWrite, DRead, DIgnore} dstate_e;
  dstate_e    dst = DIdle;
  int         bitn = 0, n_start = 0, n_stop = 0, ptr = 0;
  logic [7:0] sh = '0, mem [8];
  logic       first_wr = 1'b0, got_nack = 1'b0, is_match = 1'b0;

  always @(negedge sda) if (scl) begin dst = DAddr; bitn = 0; n_start++; dev_sda_low = 1'b0; end
  always @(posedge sda) if (scl) begin dst = DIdle; n_stop++; dev_sda_low = 1'b0; end
  always @(posedge scl) begin
    if (dst == DAddr || dst == DWrite) begin if (bitn < 8) sh = {sh[6:0], sda}; end
    else if (dst == DRead && bitn == 8) got_nack = sda;
    if (dst != DIdle) bitn++;
  end
  always @(negedge scl) begin
    if (dst != DIdle && dst != DIgnore) begin
      if (bitn == 8) begin
        if (dst == DAddr) begin
          is_match = (sh[7:1] == 7'h50);
          dev_sda_low = is_match;
        end else if (dst == DWrite) begin
          if (first_wr) begin ptr = int'(sh[2:0]); first_wr = 1'b0; end
          else begin mem[ptr] = sh; ptr = (ptr + 1) % 8; end
          dev_sda_low = 1'b1;
        end else begin
          dev_sda_low = 1'b0;   // host acknowledges
        end
      end else if (bitn == 9) begin
        bitn = 0;
        dev_sda_low = 1'b0;
        if (dst == DAddr) begin
          if (!is_match) dst = DIgnore;
          else if (sh[0]) begin dst = DRead; sh = mem[ptr]; ptr = (ptr + 1) % 8; dev_sda_low = !sh[7]; end
          else begin dst = DWrite; first_wr = 1'b1; end
        end else if (dst == DRead) begin
          if (got_nack) dst = DIgnore;
          else begin sh = mem[ptr]; ptr = (ptr + 1) % 8; dev_sda_low = !sh[7]; end
        end
      end else if (dst == DRead) begin
        dev_sda_low = !sh[7 - bitn];
      end
    end
  end

  // SCL period.
  int cyc = 0, last_rise = 0, period = 0, last_fall = 0, max_low = 0;
  always @(posedge clk) cyc++;
  always @(posedge scl) begin
    period = cyc - last_rise; last_rise = cyc;
    if (cyc - last_fall > max_low) max_low = cyc - last_fall;
  end

  always @(negedge scl) last_fall = cyc;

  // Command: {nack[12], stop[11], start[10], read[9], data[7:0]}.
  task automatic cmd(logic start, logic stop, logic rd, logic nack, logic [7:0] data);
    logic [31:0] v;
    i_drv.write(32'h4, {19'd0, nack, stop, start, rd, 1'b0, data});
    do i_drv.read(32'h8, v); while (v[0]);
  endtask

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(scl && sda, "bus idle after reset");
    // Write 0x11, 0x22, 0x33 at pointer 2.
    cmd(1, 0, 0, 0, 8'hA0);
    i_drv.read(32'h8, v);
    check(!v[1], "device acknowledges its address");
    check(period == 20, $sformatf("SCL period %0d cycles at DIV=4", period));
    cmd(0, 0, 0, 0, 8'h02);
    cmd(0, 0, 0, 0, 8'h11);
    cmd(0, 0, 0, 0, 8'h22);
    cmd(0, 1, 0, 0, 8'h33);
    check(mem[2] == 8'h11 && mem[3] == 8'h22 && mem[4] == 8'h33, "device holds the written bytes");
    check(n_start == 1 && n_stop == 1, $sformatf("starts %0d stops %0d", n_start, n_stop));
    check(scl && sda, "bus released after STOP");
    // Pointer write, repeated START, read two bytes (ACK then NACK + STOP).
    i_drv.write(32'h0, 32'd2);
    cmd(1, 0, 0, 0, 8'hA0);
    cmd(0, 0, 0, 0, 8'h03);
    check(!scl, "host holds SCL between commands");
    cmd(1, 0, 0, 0, 8'hA1);
    check(period == 12, $sformatf("SCL period %0d cycles at DIV=2", period));
    cmd(0, 0, 1, 0, 8'h00);
    i_drv.read(32'hC, v);
    check(v[7:0] == 8'h22, $sformatf("first read byte %h", v[7:0]));
    cmd(0, 1, 1, 1, 8'h00);
    i_drv.read(32'hC, v);
    check(v[7:0] == 8'h33, $sformatf("second read byte %h", v[7:0]));
    check(got_nack, "host answered the last byte with NACK");
    check(n_start == 3 && n_stop == 2, $sformatf("starts %0d stops %0d", n_start, n_stop));
    // Wrong address: NACK seen.
    cmd(1, 1, 0, 0, 8'hA4);
    i_drv.read(32'h8, v);
    check(v[1], "NACK reported for a wrong address");
    // Clock stretching: the device holds SCL low for 100 cycles after the next START.
    max_low = 0;
    fork
      cmd(1, 1, 0, 0, 8'hA0);
      begin
        @(negedge scl);
        @(posedge clk);
        dev_scl_low = 1'b1;
        repeat (100) @(posedge clk);
        dev_scl_low = 1'b0;
      end
    join
    check(max_low > 100, $sformatf("SCL low for %0d cycles while stretched", max_low));
    i_drv.read(32'h8, v);
    check(!v[1] && scl && sda, "stretched byte acknowledged, bus released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
