// Simulation-only single-word memory behind the LLC's DRAM port.
//
// Accepts a request when idle and answers after Latency cycles with a one-cycle rvalid.
// Holds 2**AW 64-bit words, initialised to a pattern of the word index; counts reads and
// writes.
module mem_port_model import basilisk_pkg::*; #(
  parameter int unsigned AW      = 12,
  parameter int unsigned Latency = 5
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t req_i,
  output mem_rsp_t rsp_o
);

  data_t mem [2**AW];
  int unsigned n_reads, n_writes, cnt;
  logic busy;
  mem_req_t req_q;

  function automatic data_t init_val(int unsigned i);
    return {32'hD0D0_0000 | 32'(i), 32'(i * 7)};
  endfunction

  initial for (int unsigned i = 0; i < 2**AW; i++) mem[i] = init_val(i);

  function automatic int unsigned widx(addr_t a);
    return int'((a >> 3) & ((1 << AW) - 1));
  endfunction

  assign rsp_o.ready  = !busy;
  assign rsp_o.rvalid = busy && (cnt == Latency);
  assign rsp_o.rdata  = mem[widx(req_q.addr)];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy <= 1'b0; cnt <= 0; n_reads <= 0; n_writes <= 0; req_q <= '0;
    end else if (!busy) begin
      if (req_i.valid) begin
        busy <= 1'b1; cnt <= 0; req_q <= req_i;
        if (req_i.we) n_writes <= n_writes + 1;
        else n_reads <= n_reads + 1;
      end
    end else begin
      cnt <= cnt + 1;
      if (cnt == Latency) begin
        busy <= 1'b0;
        if (req_q.we)
          for (int b = 0; b < 8; b++)
            if (req_q.wstrb[b]) mem[widx(req_q.addr)][8*b +: 8] <= req_q.wdata[8*b +: 8];
      end
    end
  end

endmodule
