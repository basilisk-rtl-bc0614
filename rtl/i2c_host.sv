// I2C host (controller) with byte-level commands and open-drain outputs.
//
// One command moves an optional START (or repeated START), one byte, and an optional STOP.
// A write byte is shifted out MSB first and the device's acknowledge is recorded; a read byte
// is shifted in and answered with ACK or, if the command asks for it, NACK. Every bit takes
// four quarter periods of DIV+1 clock cycles each: SCL low while SDA changes, SCL high for two
// quarters with SDA sampled at the end of the second, SCL low again. A device that holds SCL
// low (clock stretching) stalls the host in the high phase until SCL is seen high. Between
// commands without STOP the host keeps SCL low, so it owns the bus.
//
// The pins are open drain: scl_oe_o / sda_oe_o = 1 pulls the line low, 0 releases it;
// scl_i / sda_i are the line levels.
//
// Registers (Regbus): 0x0 DIV (reset 4), 0x4 CMD: write {nack[12], stop[11], start[10],
// read[9], data[7:0]} to run a command (ignored while busy), 0x8 STATUS {nack_seen[1], busy[0]},
// 0xC RXDATA. Accesses are answered in the same cycle.
//
// From the SoC description: an I2C interface (used to boot from an I2C EEPROM). The command
// interface, register map and timing are own choices; the bus protocol is standard I2C.
module i2c_host import basilisk_pkg::*; (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     scl_oe_o,
  input  logic     scl_i,
  output logic     sda_oe_o,
  input  logic     sda_i
);

  typedef enum logic [1:0] {Idle, Start, Bits, Stop} state_e;

  state_e      state_q;
  logic [15:0] div_q, cnt_q;
  logic [1:0]  qtr_q;
  logic [3:0]  bit_q;        // 0..8, bit 8 is the acknowledge
  logic [7:0]  sh_q, rx_q;
  logic        rd_q, stop_q, nack_q, nack_seen_q;
  logic        scl_low_q, sda_low_q;

  logic [1:0] reg_off;
  logic       cmd;
  assign reg_off = reg_req_i.addr[3:2];
  assign cmd     = reg_req_i.valid && reg_req_i.write && (reg_off == 2'd1) && (state_q == Idle);

  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    unique case (reg_off)
      2'd0: reg_rsp_o.rdata = 32'(div_q);
      2'd1: reg_rsp_o.rdata = '0;
      2'd2: reg_rsp_o.rdata = {30'd0, nack_seen_q, state_q != Idle};
      2'd3: reg_rsp_o.rdata = 32'(rx_q);
    endcase
    if (reg_req_i.addr[11:4] != '0) reg_rsp_o.error = 1'b1;
  end

  // A quarter ends when the counter runs out; in a high phase only once SCL really is high.
  logic qtr_end, scl_high_phase;
  assign scl_high_phase = (state_q == Bits && (qtr_q == 2'd1 || qtr_q == 2'd2)) ||
                          (state_q == Start && (qtr_q == 2'd1 || qtr_q == 2'd2)) ||
                          (state_q == Stop && qtr_q != 2'd0);
  assign qtr_end = (cnt_q == '0) && (!scl_high_phase || scl_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= Idle;
      div_q       <= 16'd4;
      cnt_q       <= '0;
      qtr_q       <= '0;
      bit_q       <= '0;
      sh_q        <= '0;
      rx_q        <= '0;
      rd_q        <= 1'b0;
      stop_q      <= 1'b0;
      nack_q      <= 1'b0;
      nack_seen_q <= 1'b0;
      scl_low_q   <= 1'b0;
      sda_low_q   <= 1'b0;
    end else begin
      if (reg_req_i.valid && reg_req_i.write && reg_off == 2'd0) div_q <= reg_req_i.wdata[15:0];
      if (cnt_q != '0) cnt_q <= cnt_q - 16'd1;
      unique case (state_q)
        Idle: if (cmd) begin
          sh_q   <= reg_req_i.wdata[7:0];
          rd_q   <= reg_req_i.wdata[9];
          stop_q <= reg_req_i.wdata[11];
          nack_q <= reg_req_i.wdata[12];
          qtr_q  <= '0;
          bit_q  <= '0;
          cnt_q  <= div_q;
          state_q <= reg_req_i.wdata[10] ? Start : Bits;
          if (reg_req_i.wdata[10]) sda_low_q <= 1'b0;   // release SDA, SCL stays as it is
        end
        // START: SDA released, SCL released, SDA low (the START), SCL low.
        Start: if (qtr_end) begin
          cnt_q <= div_q;
          qtr_q <= qtr_q + 2'd1;
          unique case (qtr_q)
            2'd0: scl_low_q <= 1'b0;
            2'd1: sda_low_q <= 1'b1;
            2'd2: scl_low_q <= 1'b1;
            2'd3: state_q <= Bits;
          endcase
        end
        // One bit: quarter 0 SCL low and SDA set, 1-2 SCL high, sample at the end of 2, 3 low.
        Bits: begin
          if (qtr_q == 2'd0 && cnt_q == div_q) begin
            if (bit_q < 4'd8) sda_low_q <= rd_q ? 1'b0 : !sh_q[7];
            else              sda_low_q <= rd_q ? !nack_q : 1'b0;
          end
          if (qtr_end) begin
            cnt_q <= div_q;
            qtr_q <= qtr_q + 2'd1;
            unique case (qtr_q)
              2'd0: scl_low_q <= 1'b0;
              2'd1: ;
              2'd2: begin
                scl_low_q <= 1'b1;
                if (bit_q < 4'd8) sh_q <= {sh_q[6:0], sda_i};
                else if (!rd_q)   nack_seen_q <= sda_i;
              end
              2'd3: begin
                if (bit_q == 4'd8) begin
                  if (rd_q) rx_q <= sh_q;
                  if (stop_q) state_q <= Stop;
                  else begin state_q <= Idle; sda_low_q <= 1'b0; end
                end
                bit_q <= bit_q + 4'd1;
              end
            endcase
          end
        end
        // STOP: SDA low with SCL low, SCL released, SDA released (the STOP).
        Stop: begin
          if (qtr_q == 2'd0) sda_low_q <= 1'b1;
          if (qtr_end) begin
            cnt_q <= div_q;
            qtr_q <= qtr_q + 2'd1;
            unique case (qtr_q)
              2'd0: scl_low_q <= 1'b0;
              2'd1: sda_low_q <= 1'b0;
              2'd2: ;
              2'd3: state_q <= Idle;
            endcase
          end
        end
      endcase
    end
  end

  assign scl_oe_o = scl_low_q;
  assign sda_oe_o = sda_low_q;

endmodule
