// Regbus demultiplexer: routes one Regbus initiator to NumPorts targets.
//
// The target index is taken from address bits [12 +: IdxWidth] (4 KiB per target) within the
// Regbus window. Only the selected target sees valid; its response comes back unchanged. An
// index without a target is answered at once with error set, so software never hangs on a hole
// in the map. Purely combinational.
//
// From the SoC description: a lightweight demultiplexer to low-throughput peripherals and
// configuration interfaces. Own choices: 4 KiB windows, error on unmapped windows.
module reg_demux import basilisk_pkg::*; #(
  parameter int unsigned NumPorts = NumRegTgt,
  parameter int unsigned IdxWidth = 4
) (
  input  reg_req_t                 req_i,
  output reg_rsp_t                 rsp_o,
  output reg_req_t [NumPorts-1:0]  req_o,
  input  reg_rsp_t [NumPorts-1:0]  rsp_i
);

  logic [IdxWidth-1:0] idx;
  assign idx = req_i.addr[12 +: IdxWidth];

  always_comb begin
    rsp_o = '{rdata: '0, error: 1'b1, ready: 1'b1};
    for (int unsigned p = 0; p < NumPorts; p++) begin
      req_o[p]       = req_i;
      req_o[p].valid = req_i.valid && (int'(idx) == p);
      if (int'(idx) == p) rsp_o = rsp_i[p];
    end
  end

endmodule
