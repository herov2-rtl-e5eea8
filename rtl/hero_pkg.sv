// hero_pkg: types and constants shared by the accelerator RTL.
//
// The accelerator speaks three kinds of bus:
//  * TCDM ports (tcdm_req_t / tcdm_rsp_t): 32-bit word accesses into the L1
//    scratchpad. A request is held until gnt is seen in the same cycle; read
//    data returns with rvalid exactly one cycle after the grant.
//  * AXI4 (axi_req_t / axi_rsp_t): the accelerator networks. Both the wide
//    (DMA and instruction refill) and the narrow (core) network use 64-bit
//    data and 64-bit addresses here; every crossbar or multiplexer level
//    shifts the id left and puts its input index in the low bits.
//  * Register ports (reg_req_t / reg_rsp_t): single-cycle configuration
//    accesses, always ready, read data combinational in the same cycle.
// The 64-bit data width of the networks is the default the paper evaluates;
// id width, register ports and the descriptor format are this design's own.
package hero_pkg;

  localparam int unsigned AXI_AW  = 64;
  localparam int unsigned AXI_DW  = 64;
  localparam int unsigned AXI_IW  = 8;
  localparam int unsigned AXI_SW  = AXI_DW / 8;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  typedef struct packed {
    logic [AXI_IW-1:0] id;
    logic [AXI_AW-1:0] addr;
    logic [7:0]        len;    // beats - 1
    logic [2:0]        size;   // log2 bytes per beat
    logic [1:0]        burst;  // only INCR (2'b01) is used
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_DW-1:0] data;
    logic [AXI_SW-1:0] strb;
    logic              last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_IW-1:0] id;
    logic [1:0]        resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_IW-1:0] id;
    logic [AXI_DW-1:0] data;
    logic [1:0]        resp;
    logic              last;
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

  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;   // byte address
    logic [31:0] wdata;
    logic [3:0]  be;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } tcdm_rsp_t;

  typedef struct packed {
    logic        req;
    logic [31:0] addr;   // byte address, 64-bit aligned
  } fetch_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [63:0] rdata;
  } fetch_rsp_t;

  typedef struct packed {
    logic        valid;
    logic        write;
    logic [15:0] addr;   // byte offset inside the unit
    logic [31:0] wdata;
  } reg_req_t;

  typedef struct packed {
    logic [31:0] rdata;
  } reg_rsp_t;

  typedef enum logic {
    DMA_HOST2DEV = 1'b0,   // external (AXI) -> L1
    DMA_DEV2HOST = 1'b1    // L1 -> external (AXI)
  } dma_dir_e;

  // One DMA transfer: reps rows of len bytes; after each row the external
  // address advances by ext_stride and the local one by loc_stride.
  // A 1D transfer has reps = 1. Addresses, len and strides are 8-byte aligned.
  typedef struct packed {
    dma_dir_e    dir;
    logic [63:0] ext_addr;
    logic [31:0] loc_addr;
    logic [31:0] len;
    logic [31:0] reps;
    logic [31:0] ext_stride;
    logic [31:0] loc_stride;
  } dma_cmd_t;

endpackage
