// Single-port synchronous SRAM with write enables per lane, as a stand-in for an SRAM macro.
//
// One access per cycle: a read (req_i, !we_i) returns the word on rdata_o in the next cycle
// and holds it until the next read; a write updates the lanes whose be_i bit is set. Lanes are
// Width/NumLanes bits wide. The contents are not reset.
module sram_sp #(
  parameter int unsigned Words    = 2048,
  parameter int unsigned Width    = 64,
  parameter int unsigned NumLanes = 8,
  localparam int unsigned AW      = $clog2(Words)
) (
  input  logic                clk_i,
  input  logic                req_i,
  input  logic                we_i,
  input  logic [AW-1:0]       addr_i,
  input  logic [Width-1:0]    wdata_i,
  input  logic [NumLanes-1:0] be_i,
  output logic [Width-1:0]    rdata_o
);

  localparam int unsigned LaneW = Width / NumLanes;

  logic [Width-1:0] mem [Words];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned l = 0; l < NumLanes; l++)
          if (be_i[l]) mem[addr_i][l*LaneW +: LaneW] <= wdata_i[l*LaneW +: LaneW];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
