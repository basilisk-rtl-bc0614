// Shared types and constants of the Basilisk SoC.
//
// AXI4 is carried as two structs per port, a request (initiator to target) and a response
// (target to initiator), each holding the valid/ready of the channels it drives. The data width
// is 64 bits as the SoC's crossbar uses; the 32-bit address width, the 4-bit ID and the address
// map are this design's own choices. The Regbus is a single-beat, non-burst register bus:
// one request with valid, answered by ready in the same or a later cycle with read data and an
// error flag.
package basilisk_pkg;

  localparam int unsigned AddrWidth = 32;
  localparam int unsigned DataWidth = 64;
  localparam int unsigned StrbWidth = DataWidth / 8;
  localparam int unsigned IdWidth   = 4;

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [StrbWidth-1:0] strb_t;
  typedef logic [IdWidth-1:0]   id_t;

  // AXI4 burst and response encodings (from the AXI4 specification).
  typedef enum logic [1:0] {BurstFixed = 2'b00, BurstIncr = 2'b01, BurstWrap = 2'b10} axi_burst_e;
  typedef enum logic [1:0] {RespOkay = 2'b00, RespExOkay = 2'b01, RespSlvErr = 2'b10,
                            RespDecErr = 2'b11} axi_resp_e;

  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
    axi_burst_e burst;
  } axi_ax_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } axi_w_t;

  typedef struct packed {
    id_t       id;
    axi_resp_e resp;
  } axi_b_t;

  typedef struct packed {
    id_t       id;
    data_t     data;
    axi_resp_e resp;
    logic      last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    axi_b_t b;
    logic   b_valid;
    logic   ar_ready;
    axi_r_t r;
    logic   r_valid;
  } axi_rsp_t;

  // Regbus: 32-bit data, as the SoC's peripheral registers are 32 bits wide (own choice).
  typedef struct packed {
    addr_t       addr;
    logic        write;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        valid;
  } reg_req_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        error;
    logic        ready;
  } reg_rsp_t;

  // Single-word memory request from the last-level cache to the DRAM controller.
  typedef struct packed {
    addr_t addr;
    logic  we;
    data_t wdata;
    strb_t wstrb;
    logic  valid;
  } mem_req_t;

  typedef struct packed {
    data_t rdata;
    logic  ready;   // request accepted
    logic  rvalid;  // read data valid or write done, one cycle
  } mem_rsp_t;

  // Address map (own choice, 32-bit).
  localparam addr_t RegbusBase = 32'h0300_0000;  // 4 KiB per Regbus target
  localparam addr_t RegbusEnd  = 32'h0301_0000;
  localparam addr_t SpmBase    = 32'h1000_0000;  // LLC ways used as scratchpad
  localparam addr_t SpmEnd     = 32'h1001_0000;
  localparam addr_t DramBase   = 32'h8000_0000;  // HyperRAM, cached by the LLC
  localparam addr_t DramEnd    = 32'h8100_0000;
  localparam addr_t C2cBase    = 32'h2000_0000;  // window to the other chip, 256 MiB
  localparam addr_t C2cEnd     = 32'h3000_0000;

  // Regbus target indices (address bits [15:12] of the Regbus window).
  localparam int unsigned RegIdxChip  = 0;  // chip control: LLC way configuration
  localparam int unsigned RegIdxUart  = 1;
  localparam int unsigned RegIdxGpio  = 2;
  localparam int unsigned RegIdxClint = 3;
  localparam int unsigned RegIdxDma   = 4;
  localparam int unsigned RegIdxPlic  = 5;
  localparam int unsigned RegIdxSpi   = 6;
  localparam int unsigned RegIdxI2c   = 7;
  localparam int unsigned RegIdxVga   = 8;
  localparam int unsigned RegIdxC2c   = 9;
  localparam int unsigned NumRegTgt   = 10;

endpackage
