// teeod_pkg: types and constants shared by the TEEOD fabric.
//
// TEEOD puts each trusted application (TA) in its own enclave in the FPGA fabric:
// a soft processor with a private tightly-coupled memory (TCM) and a shared
// memory window. Three agents manage the enclaves: the Manager Agent (enclave and
// TA bookkeeping, resets), the Loader Agent (DMA of TA binaries into a TCM) and
// the Communication Agent (mailboxes and interrupts between the rich OS and the
// enclaves).
//
// This package holds the bus structs (AXI4-Lite for register ports, the AXI4
// read channels for the loader's DMA master, a simple BRAM port), the mailbox
// layout, the GlobalPlatform operation codes and the sizes. The sizes follow the
// published prototype (64 KiB TCM, 8 KiB shared memory, four enclaves, a
// mailbox of operation_id, session_id, param_type, cmd_id and eight general
// purpose words). Register offsets, codes and bus widths are this design's own.
package teeod_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_ENCLAVES_DEF = 4;      // largest synthesized case
  localparam int unsigned TCM_BYTES_DEF  = 65536;  // 64 KiB private TCM
  localparam int unsigned SHM_BYTES_DEF  = 8192;   // 8 KiB shared memory
  localparam int unsigned UUID_W         = 128;    // GlobalPlatform TEE_UUID
  localparam int unsigned N_GP_PARAMS    = 8;
  localparam int unsigned MBOX_WORDS     = 4 + N_GP_PARAMS;

  // ---------------------------------------------------------------- mailbox
  // Word index inside a mailbox. Register offset = 4 + 4*index on both the
  // REE-side and the enclave-side register ports (offset 0 is control).
  typedef enum logic [3:0] {
    MB_OPERATION_ID = 4'd0,
    MB_SESSION_ID   = 4'd1,
    MB_PARAM_TYPE   = 4'd2,
    MB_CMD_ID       = 4'd3,
    MB_GP0          = 4'd4   // gp_params[i] at MB_GP0 + i
  } mbox_word_e;

  typedef logic [31:0] mbox_t [MBOX_WORDS];

  // operation_id values (open, invoke, close)
  typedef enum logic [31:0] {
    OP_OPEN_SESSION   = 32'd1,
    OP_INVOKE_COMMAND = 32'd2,
    OP_CLOSE_SESSION  = 32'd3
  } op_id_e;

  // ---------------------------------------------------------------- Manager Agent registers
  localparam logic [7:0] MA_REG_CTRL   = 8'h00;  // W: bit0 load/lookup request
  localparam logic [7:0] MA_REG_STATUS = 8'h04;  // R: status_e in [3:0], enclave in [11:8]
  localparam logic [7:0] MA_REG_ADDR   = 8'h08;  // TA binary address in CM
  localparam logic [7:0] MA_REG_SIZE   = 8'h0C;  // TA binary size in bytes
  localparam logic [7:0] MA_REG_UUID0  = 8'h10;  // UUID[31:0] .. 0x1C: UUID[127:96]
  localparam logic [7:0] MA_REG_CMA    = 8'h20;  // cma_config[15:0]

  typedef enum logic [3:0] {
    MA_ST_IDLE     = 4'd0,
    MA_ST_BUSY     = 4'd1,
    MA_ST_LOADED   = 4'd2,   // TA newly loaded
    MA_ST_HIT      = 4'd3,   // TA was already loaded
    MA_ST_ERR_FULL = 4'd4,   // no free enclave
    MA_ST_ERR_SIZE = 4'd5    // binary larger than a TCM
  } ma_status_e;

  // ---------------------------------------------------------------- Comm Agent registers
  // REE side, offset 0:  W bit0 = doorbell (send);  R bit0 busy, bit1 done, bit2 error
  // Enclave side, offset 0: R bit0 = INT pending;  W bit0 = 0 clears INT (reply ready)
  localparam logic [7:0] CA_REG_CTRL = 8'h00;

  // ---------------------------------------------------------------- AXI4-Lite
  typedef struct packed {
    logic        awvalid;
    logic [31:0] awaddr;
    logic        wvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        bready;
    logic        arvalid;
    logic [31:0] araddr;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    logic [1:0]  bresp;
    logic        arready;
    logic        rvalid;
    logic [31:0] rdata;
    logic [1:0]  rresp;
  } axil_rsp_t;

  localparam logic [1:0] AXI_OKAY   = 2'b00;
  localparam logic [1:0] AXI_SLVERR = 2'b10;

  // ---------------------------------------------------------------- AXI4 read (loader DMA)
  localparam int unsigned AXI_ADDR_W = 48;   // {cma_config, addr_source}

  typedef struct packed {
    logic                  arvalid;
    logic [AXI_ADDR_W-1:0] araddr;
    logic [7:0]            arlen;
    logic [2:0]            arsize;
    logic [1:0]            arburst;
    logic                  rready;
  } axi_rd_req_t;

  typedef struct packed {
    logic        arready;
    logic        rvalid;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rlast;
  } axi_rd_rsp_t;

  // ---------------------------------------------------------------- BRAM port
  typedef struct packed {
    logic        en;
    logic [3:0]  we;     // byte write enables
    logic [31:0] addr;   // byte address
    logic [31:0] wdata;
  } bram_req_t;

endpackage
