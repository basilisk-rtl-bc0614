// Fully digital HyperBus controller for two HyperRAM DRAM chips.
//
// It turns single 64-bit word requests from the last-level cache into HyperBus transactions:
// chip select low, six command-address bytes, a fixed initial latency, eight data bytes, chip
// select high. HyperBus is double data rate on an 8-bit DQ bus with the clock CK and the
// read/write data strobe RWDS. The controller runs on a clock of twice the CK frequency and
// toggles CK every cycle, so each controller cycle is one CK edge and carries one byte: at a
// CK of 77 MHz this gives the 154 MB/s peak rate of the SoC. The chip is selected by the word's
// offset in the DRAM window (ChipBytes per chip).
//
// Command-address word (HyperBus): CA[47] read, CA[46] memory space (0), CA[45] linear burst
// (1), CA[44:16] upper half-word address, CA[2:0] lower half-word address. Data moves as 16-bit
// half-words, upper byte first. Writes drive RWDS as the byte mask (high = byte not written).
// Reads are captured on every RWDS transition from the device, so the device's data strobe
// rather than a cycle count times the capture.
//
// Timing: a write holds chip select for 6 + 4*Latency + 8 cycles, a read for 6 cycles plus the
// device latency plus 8 cycles; one idle cycle with chip select high separates transactions.
// The latency is fixed (always the doubled latency, counted from the end of the command).
//
// From the SoC description: two chips, fully digital, 154 MB/s peak. Own choices: the 2x clock
// scheme instead of a phase-shifted CK, fixed latency, one word per transaction, chip size.
module hyperbus_ctrl import basilisk_pkg::*; #(
  parameter int unsigned NumChips  = 2,
  parameter int unsigned ChipBytes = 8 * 1024 * 1024,
  parameter int unsigned Latency   = 6,
  parameter addr_t       DramAddr  = DramBase
) (
  input  logic                clk_i,          // twice the CK frequency
  input  logic                rst_ni,
  input  mem_req_t            mem_req_i,
  output mem_rsp_t            mem_rsp_o,
  output logic [NumChips-1:0] hyper_cs_no,
  output logic                hyper_ck_o,
  output logic                hyper_ck_no,
  output logic                hyper_rwds_o,
  output logic                hyper_rwds_oe_o,
  input  logic                hyper_rwds_i,
  output logic [7:0]          hyper_dq_o,
  output logic                hyper_dq_oe_o,
  input  logic [7:0]          hyper_dq_i,
  output logic                hyper_reset_no
);

  localparam int unsigned ChipW = (NumChips > 1) ? $clog2(NumChips) : 1;
  localparam int unsigned LatEdges = 4 * Latency;

  typedef enum logic [2:0] {Idle, Cmd, Wait, WrData, RdData, Done} state_e;

  state_e       state_q;
  logic [47:0]  ca_q;
  logic [7:0]   cnt_q;
  logic [ChipW-1:0] chip_q;
  logic         we_q;
  data_t        wdata_q, rdata_q;
  strb_t        wstrb_q;
  logic         rwds_prev_q;
  logic         ck_q;
  logic         rst_q;

  // CK toggles at the start of every cycle that carries a command, latency or data edge.
  logic next_active;
  always_comb begin
    unique case (state_q)
      Idle:    next_active = mem_req_i.valid && rst_q;
      Cmd,
      Wait:    next_active = 1'b1;
      WrData:  next_active = (cnt_q != 8'd7);
      RdData:  next_active = !((hyper_rwds_i != rwds_prev_q) && cnt_q == 8'd7);
      default: next_active = 1'b0;
    endcase
  end

  addr_t offset;
  logic [31:0] half_addr;
  assign offset    = mem_req_i.addr - DramAddr;
  assign half_addr = 32'((offset % addr_t'(ChipBytes)) >> 1);

  // Byte k of the transfer: half-word k/2, upper byte first.
  function automatic logic [2:0] byte_sel(logic [2:0] k);
    return {k[2:1], ~k[0]};
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= Idle;
      ca_q        <= '0;
      cnt_q       <= '0;
      chip_q      <= '0;
      we_q        <= 1'b0;
      wdata_q     <= '0;
      rdata_q     <= '0;
      wstrb_q     <= '0;
      rwds_prev_q <= 1'b0;
      ck_q        <= 1'b0;
      rst_q       <= 1'b0;
    end else begin
      rst_q       <= 1'b1;
      rwds_prev_q <= hyper_rwds_i;
      ck_q        <= next_active ? ~ck_q : 1'b0;
      unique case (state_q)
        Idle: if (mem_req_i.valid && rst_q) begin
          ca_q    <= {!mem_req_i.we, 1'b0, 1'b1, half_addr[31:3], 13'd0, half_addr[2:0]};
          chip_q  <= ChipW'(offset / addr_t'(ChipBytes));
          we_q    <= mem_req_i.we;
          wdata_q <= mem_req_i.wdata;
          wstrb_q <= mem_req_i.wstrb;
          cnt_q   <= '0;
          state_q <= Cmd;
        end
        Cmd: begin
          ca_q  <= ca_q << 8;
          cnt_q <= cnt_q + 8'd1;
          if (cnt_q == 8'd5) begin
            cnt_q   <= '0;
            state_q <= we_q ? Wait : RdData;
          end
        end
        Wait: begin
          cnt_q <= cnt_q + 8'd1;
          if (cnt_q == 8'(LatEdges - 1)) begin
            cnt_q   <= '0;
            state_q <= WrData;
          end
        end
        WrData: begin
          cnt_q <= cnt_q + 8'd1;
          if (cnt_q == 8'd7) state_q <= Done;
        end
        RdData: if (hyper_rwds_i != rwds_prev_q) begin
          rdata_q[8*byte_sel(cnt_q[2:0]) +: 8] <= hyper_dq_i;
          cnt_q <= cnt_q + 8'd1;
          if (cnt_q == 8'd7) state_q <= Done;
        end
        Done: state_q <= Idle;
        default: state_q <= Idle;
      endcase
    end
  end

  logic active;
  assign active = state_q inside {Cmd, Wait, WrData, RdData};

  always_comb begin
    hyper_cs_no = '1;
    if (active) hyper_cs_no[chip_q] = 1'b0;
  end

  assign hyper_ck_o      = ck_q;
  assign hyper_ck_no     = ~ck_q;
  assign hyper_dq_oe_o   = (state_q inside {Cmd, WrData});
  assign hyper_dq_o      = (state_q == Cmd) ? ca_q[47:40] : wdata_q[8*byte_sel(cnt_q[2:0]) +: 8];
  assign hyper_rwds_oe_o = (state_q == WrData);
  assign hyper_rwds_o    = (state_q == WrData) ? ~wstrb_q[byte_sel(cnt_q[2:0])] : 1'b0;
  assign hyper_reset_no  = rst_q;

  assign mem_rsp_o.ready  = (state_q == Idle) && rst_q;
  assign mem_rsp_o.rvalid = (state_q == Done);
  assign mem_rsp_o.rdata  = rdata_q;

endmodule
