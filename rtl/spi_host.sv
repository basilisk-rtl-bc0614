// SPI host with standard (one-bit) and quad (four-bit) transfers, mode 0 (CPOL=0, CPHA=0).
//
// Software moves one byte per command. In standard mode the byte is shifted out MSB first on
// dq[0] (MOSI) while dq[1] (MISO) is sampled, 8 SCK cycles per byte. In quad mode the four
// data lines carry a nibble per SCK cycle, high nibble first, 2 SCK cycles per byte; the
// command says whether the host drives the lines (quad write) or samples them (quad read).
// Output data changes on the falling SCK edge (and before the first rising one); input is
// sampled on the rising edge. SCK's half period is DIV+1 clock cycles. The chip selects are
// under software control, so a flash command of several bytes keeps CS low between bytes.
//
// Registers (Regbus): 0x0 CS (bit c low = chip select c active is written as bit c = 1),
// 0x4 DIV (reset 3), 0x8 TXCMD: write {quad_read[9], quad[8], data[7:0]} to start a byte,
// 0xC RXDATA (received byte), 0x10 STATUS {busy}. Writes to TXCMD while busy are ignored.
// Accesses are answered in the same cycle.
//
// From the SoC description: a quad SPI interface (used to boot from SPI NOR flash). Register
// map, byte-wise command interface, mode 0 and the number of chip selects are own choices.
module spi_host import basilisk_pkg::*; #(
  parameter int unsigned NumCs = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  reg_req_t         reg_req_i,
  output reg_rsp_t         reg_rsp_o,
  output logic             sck_o,
  output logic [NumCs-1:0] cs_no,
  output logic [3:0]       dq_o,
  output logic [3:0]       dq_oe_o,
  input  logic [3:0]       dq_i
);

  logic [NumCs-1:0] cs_q;
  logic [15:0]      div_q, cnt_q;
  logic [7:0]       tx_q, rx_q;
  logic             busy_q, quad_q, qread_q, sck_q;
  logic [3:0]       edges_q;   // SCK cycles left in this byte

  logic [2:0] reg_off;
  logic       start;
  assign reg_off = reg_req_i.addr[4:2];
  assign start   = reg_req_i.valid && reg_req_i.write && (reg_off == 3'd2) && !busy_q;

  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    unique case (reg_off)
      3'd0: reg_rsp_o.rdata = 32'(cs_q);
      3'd1: reg_rsp_o.rdata = 32'(div_q);
      3'd2: reg_rsp_o.rdata = '0;
      3'd3: reg_rsp_o.rdata = 32'(rx_q);
      3'd4: reg_rsp_o.rdata = 32'(busy_q);
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cs_q    <= '0;
      div_q   <= 16'd3;
      cnt_q   <= '0;
      tx_q    <= '0;
      rx_q    <= '0;
      busy_q  <= 1'b0;
      quad_q  <= 1'b0;
      qread_q <= 1'b0;
      sck_q   <= 1'b0;
      edges_q <= '0;
    end else begin
      if (reg_req_i.valid && reg_req_i.write) begin
        if (reg_off == 3'd0) cs_q  <= reg_req_i.wdata[NumCs-1:0];
        if (reg_off == 3'd1) div_q <= reg_req_i.wdata[15:0];
      end
      if (start) begin
        busy_q  <= 1'b1;
        tx_q    <= reg_req_i.wdata[7:0];
        quad_q  <= reg_req_i.wdata[8];
        qread_q <= reg_req_i.wdata[9];
        edges_q <= reg_req_i.wdata[8] ? 4'd2 : 4'd8;
        cnt_q   <= div_q;
        sck_q   <= 1'b0;
      end else if (busy_q) begin
        if (cnt_q != '0) begin
          cnt_q <= cnt_q - 16'd1;
        end else begin
          cnt_q <= div_q;
          sck_q <= ~sck_q;
          if (!sck_q) begin
            // Rising edge: sample.
            rx_q <= quad_q ? {rx_q[3:0], dq_i} : {rx_q[6:0], dq_i[1]};
          end else begin
            // Falling edge: next output bits, or the end of the byte.
            tx_q    <= quad_q ? {tx_q[3:0], 4'b0} : {tx_q[6:0], 1'b0};
            edges_q <= edges_q - 4'd1;
            if (edges_q == 4'd1) busy_q <= 1'b0;
          end
        end
      end
    end
  end

  assign sck_o = sck_q;
  assign cs_no = ~cs_q;
  always_comb begin
    if (quad_q) begin
      dq_o    = tx_q[7:4];
      dq_oe_o = (busy_q && !qread_q) ? 4'hF : 4'h0;
    end else begin
      dq_o    = {3'b000, tx_q[7]};
      dq_oe_o = 4'b0001;
    end
  end

endmodule
