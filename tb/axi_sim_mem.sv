// Simulation-only AXI4 target with a word-addressed memory of 2**AW words.
//
// Serves one write and one read at a time, INCR bursts of 64-bit beats. Ready signals are
// held back for a pseudo-random number of cycles (up to MaxStall) to exercise back-pressure.
// Counts accepted write and read transactions.
module axi_sim_mem import basilisk_pkg::*; #(
  parameter int unsigned AW       = 10,
  parameter int unsigned MaxStall = 3,
  parameter int unsigned Seed     = 1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o
);

  data_t mem [2**AW];
  int unsigned n_writes, n_reads;
  logic [31:0] lfsr;

  typedef enum logic [1:0] {WIdle, WData, WResp} w_e;
  w_e         w_state;
  axi_ax_t    aw_q, ar_q;
  logic       r_busy;
  logic [7:0] r_cnt;
  logic       stall;

  function automatic int unsigned widx(addr_t a);
    return int'((a >> 3) & ((1 << AW) - 1));
  endfunction

  assign stall = (MaxStall > 0) && (lfsr[1:0] == 2'b00);

  always_comb begin
    rsp_o          = '0;
    rsp_o.aw_ready = (w_state == WIdle) && !stall;
    rsp_o.w_ready  = (w_state == WData) && !stall;
    rsp_o.b_valid  = (w_state == WResp);
    rsp_o.b.id     = aw_q.id;
    rsp_o.ar_ready = !r_busy && !stall;
    rsp_o.r_valid  = r_busy && !stall;
    rsp_o.r.id     = ar_q.id;
    rsp_o.r.data   = mem[widx(ar_q.addr + addr_t'({r_cnt, 3'b000}))];
    rsp_o.r.last   = (r_cnt == ar_q.len);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_state  <= WIdle;
      r_busy   <= 1'b0;
      r_cnt    <= '0;
      aw_q     <= '0;
      ar_q     <= '0;
      lfsr     <= 32'hACE1 + Seed;
      n_writes <= 0;
      n_reads  <= 0;
    end else begin
      lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
      case (w_state)
        WIdle: if (req_i.aw_valid && rsp_o.aw_ready) begin
          aw_q <= req_i.aw; w_state <= WData; n_writes <= n_writes + 1;
        end
        WData: if (req_i.w_valid && rsp_o.w_ready) begin
          for (int b = 0; b < 8; b++)
            if (req_i.w.strb[b]) mem[widx(aw_q.addr)][8*b +: 8] <= req_i.w.data[8*b +: 8];
          aw_q.addr <= aw_q.addr + 8;
          if (req_i.w.last) w_state <= WResp;
        end
        WResp: if (req_i.b_ready) w_state <= WIdle;
        default: w_state <= WIdle;
      endcase
      if (!r_busy) begin
        if (req_i.ar_valid && rsp_o.ar_ready) begin
          ar_q <= req_i.ar; r_busy <= 1'b1; r_cnt <= '0; n_reads <= n_reads + 1;
        end
      end else if (rsp_o.r_valid && req_i.r_ready) begin
        if (r_cnt == ar_q.len) r_busy <= 1'b0;
        else r_cnt <= r_cnt + 1;
      end
    end
  end

endmodule
