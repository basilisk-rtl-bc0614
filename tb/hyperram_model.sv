// Behavioural model of one HyperRAM chip, as seen by the HyperBus controller.
//
// Simulation only. It follows the controller's clocking: every cycle in which CK changes level
// is one bus edge. After chip select falls it takes six command-address bytes, counts 4*Latency
// latency edges and then moves eight data bytes, upper byte of each 16-bit half-word first.
// Writes honour RWDS as byte mask (high = keep); reads toggle RWDS with every byte driven.
// The memory holds 2**AW half-words; higher address bits are ignored.
module hyperram_model #(
  parameter int unsigned AW      = 16,
  parameter int unsigned Latency = 6
) (
  input  logic       clk_i,
  input  logic       cs_ni,
  input  logic       ck_i,
  input  logic       rwds_i,
  input  logic [7:0] dq_i,
  output logic       rwds_o,
  output logic [7:0] dq_o,
  output logic       dq_oe_o
);

  localparam int unsigned L = 4 * Latency;

  logic [15:0] mem [2**AW];
  logic [47:0] ca;
  int unsigned edges;
  logic        ck_prev;
  int unsigned n_read, n_write;

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = 16'(i * 3 + 1);
    rwds_o = 1'b0; dq_o = '0; dq_oe_o = 1'b0; edges = 0; ck_prev = 1'b0;
    n_read = 0; n_write = 0;
  end

  function automatic int unsigned haddr(int unsigned k);
    return (int'({ca[44:16], ca[2:0]}) + k / 2) % (2**AW);
  endfunction

  always @(posedge clk_i) begin
    ck_prev <= ck_i;
    if (cs_ni) begin
      edges   = 0;
      dq_oe_o <= 1'b0;
      rwds_o  <= 1'b0;
    end else if (ck_i != ck_prev) begin
      automatic int unsigned i = edges;
      edges = edges + 1;
      if (i < 6) ca = {ca[39:0], dq_i};
      if (i == 5) begin
        if (ca[47]) n_read++;
        else n_write++;
      end
      if (!ca[47] && i >= 6 + L && i < 6 + L + 8 && !rwds_i) begin
        automatic int unsigned k = i - 6 - L;
        if (k % 2 == 0) mem[haddr(k)][15:8] = dq_i;
        else            mem[haddr(k)][7:0]  = dq_i;
      end
      if (ca[47] && i + 1 >= 6 + L && i + 1 < 6 + L + 8) begin
        automatic int unsigned k = i + 1 - 6 - L;
        dq_o    <= (k % 2 == 0) ? mem[haddr(k)][15:8] : mem[haddr(k)][7:0];
        dq_oe_o <= 1'b1;
        rwds_o  <= ~rwds_o;
      end else begin
        dq_oe_o <= 1'b0;
      end
    end
  end

endmodule
