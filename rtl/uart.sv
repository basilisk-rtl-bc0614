// UART with one transmit and one receive holding register, 8 data bits, no parity, 1 stop bit.
//
// Registers (32-bit, Regbus): 0x0 TXDATA (write: send a byte, ignored while busy),
// 0x4 RXDATA (read: last received byte, clears rx_valid), 0x8 STATUS (bit 0 tx_busy,
// bit 1 rx_valid, bit 2 rx_overrun), 0xC DIV (clock cycles per bit, reset 16).
// The receiver samples each bit in its middle after seeing the start bit's falling edge;
// a frame whose stop bit is low is dropped. irq_o is high while a received byte waits.
// Regbus accesses are answered in the cycle they are made.
//
// From the SoC description: a UART for serial communication, also usable to preload code.
// The register map, single holding registers and the frame format are this design's own.
module uart import basilisk_pkg::*; (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     tx_o,
  input  logic     rx_i,
  output logic     irq_o
);

  logic [15:0] div_q;
  // Transmitter
  logic [9:0]  tx_shift_q;
  logic [3:0]  tx_bits_q;
  logic [15:0] tx_cnt_q;
  logic        tx_busy;
  // Receiver
  logic [2:0]  rx_sync_q;
  logic        rx_busy_q;
  logic [3:0]  rx_bits_q;
  logic [15:0] rx_cnt_q;
  logic [8:0]  rx_shift_q;
  logic [7:0]  rx_data_q;
  logic        rx_valid_q, rx_overrun_q;

  assign tx_busy = (tx_bits_q != 4'd0);
  assign tx_o    = tx_busy ? tx_shift_q[0] : 1'b1;
  assign irq_o   = rx_valid_q;

  logic [3:0] reg_off;
  assign reg_off = reg_req_i.addr[5:2];

  always_comb begin
    reg_rsp_o = '{rdata: '0, error: 1'b0, ready: 1'b1};
    unique case (reg_off)
      4'd0: reg_rsp_o.rdata = {31'd0, tx_busy};
      4'd1: reg_rsp_o.rdata = {24'd0, rx_data_q};
      4'd2: reg_rsp_o.rdata = {29'd0, rx_overrun_q, rx_valid_q, tx_busy};
      4'd3: reg_rsp_o.rdata = {16'd0, div_q};
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      div_q        <= 16'd16;
      tx_shift_q   <= '1;
      tx_bits_q    <= '0;
      tx_cnt_q     <= '0;
      rx_sync_q    <= '1;
      rx_busy_q    <= 1'b0;
      rx_bits_q    <= '0;
      rx_cnt_q     <= '0;
      rx_shift_q   <= '0;
      rx_data_q    <= '0;
      rx_valid_q   <= 1'b0;
      rx_overrun_q <= 1'b0;
    end else begin
      // Register writes and read side effects.
      if (reg_req_i.valid && reg_req_i.write) begin
        if (reg_off == 4'd0 && !tx_busy && reg_req_i.wstrb[0]) begin
          tx_shift_q <= {1'b1, reg_req_i.wdata[7:0], 1'b0};
          tx_bits_q  <= 4'd10;
          tx_cnt_q   <= div_q - 16'd1;
        end
        if (reg_off == 4'd3) div_q <= reg_req_i.wdata[15:0];
      end
      if (reg_req_i.valid && !reg_req_i.write && reg_off == 4'd1) begin
        rx_valid_q   <= 1'b0;
        rx_overrun_q <= 1'b0;
      end
      // Transmit: one bit every div_q cycles.
      if (tx_busy) begin
        if (tx_cnt_q == 16'd0) begin
          tx_cnt_q   <= div_q - 16'd1;
          tx_shift_q <= {1'b1, tx_shift_q[9:1]};
          tx_bits_q  <= tx_bits_q - 4'd1;
        end else tx_cnt_q <= tx_cnt_q - 16'd1;
      end
      // Receive.
      rx_sync_q <= {rx_sync_q[1:0], rx_i};
      if (!rx_busy_q) begin
        if (rx_sync_q[2] && !rx_sync_q[1]) begin
          rx_busy_q <= 1'b1;
          rx_bits_q <= 4'd0;
          rx_cnt_q  <= {1'b0, div_q[15:1]};  // to the middle of the start bit
        end
      end else if (rx_cnt_q == 16'd0) begin
        rx_cnt_q   <= div_q - 16'd1;
        rx_shift_q <= {rx_sync_q[1], rx_shift_q[8:1]};
        rx_bits_q  <= rx_bits_q + 4'd1;
        if (rx_bits_q == 4'd0 && rx_sync_q[1]) rx_busy_q <= 1'b0;  // false start
        if (rx_bits_q == 4'd9) begin
          rx_busy_q <= 1'b0;
          if (rx_sync_q[1]) begin  // valid stop bit
            rx_data_q  <= rx_shift_q[8:1];
            if (rx_valid_q) rx_overrun_q <= 1'b1;
            rx_valid_q <= 1'b1;
          end
        end
      end else rx_cnt_q <= rx_cnt_q - 16'd1;
    end
  end

endmodule
