// teeod_top: the TEEOD fabric. Manager Agent, Loader Agent, Communication
// Agent and N_ENCLAVES enclaves (memories and reset), wired as one design.
//
// What is connected where:
//  * The rich OS reaches the Manager Agent (s_ma_axil) and the Communication
//    Agent's shared mailbox (s_comm_axil) through two AXI4-Lite ports.
//  * The Manager Agent drives the Loader Agent (addr_src -> addr_source,
//    addr_dest -> addr_destiny, size, strt_cpy -> trigger, cma_config -> din,
//    done -> done_cpy), every enclave's RST line, and tells the Communication
//    Agent which enclave holds the requested TA. The Communication Agent
//    reports finished close sessions back, and the Manager wipes mailboxes.
//  * The Loader Agent reads TA binaries from DDR through m_ld_axi (AXI4 read
//    channels, to the processing system's DDR port) and writes them through
//    one BRAM port that is steered to enclave i's TCM when the destination
//    address is in [TCM_BASE + i*TCM_BYTES, TCM_BASE + (i+1)*TCM_BYTES).
//  * Each enclave's shared memory has a processing-system port (shm_ps_*).
//  * The soft processors are not part of this design: each enclave's processor
//    ports come out as cpu_* ports (reset, interrupt, TCM port, shared-memory
//    port) and its mailbox bus as s_cpu_mbox (AXI4-Lite into the
//    Communication Agent).
// The AXI links are point to point; the address maps of the processing system
// and of each processor are outside this module.
//
// From the paper: the set of blocks, the signal names between the Manager and
// Loader Agents, one RST and one INT per enclave, the TCM and shared memory per
// enclave, and the default sizes (four enclaves, 64 KiB TCM, 8 KiB shared
// memory). This design's own choices: the TCM address layout seen by the
// loader and all bus formats.
module teeod_top
  import teeod_pkg::*;
#(
  parameter int unsigned N_ENCLAVES  = N_ENCLAVES_DEF,
  parameter int unsigned TCM_BYTES   = TCM_BYTES_DEF,
  parameter int unsigned SHM_BYTES   = SHM_BYTES_DEF,
  parameter int unsigned BURST_BEATS = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // rich OS side
  input  axil_req_t             s_ma_axil_req,
  output axil_rsp_t             s_ma_axil_rsp,
  input  axil_req_t             s_comm_axil_req,
  output axil_rsp_t             s_comm_axil_rsp,
  output axi_rd_req_t           m_ld_axi_req,
  input  axi_rd_rsp_t           m_ld_axi_rsp,
  input  bram_req_t             shm_ps_req   [N_ENCLAVES],
  output logic [31:0]           shm_ps_rdata [N_ENCLAVES],
  // soft processor side, per enclave
  output logic [N_ENCLAVES-1:0] cpu_rst_n,
  output logic [N_ENCLAVES-1:0] cpu_irq,
  input  bram_req_t             cpu_tcm_req   [N_ENCLAVES],
  output logic [31:0]           cpu_tcm_rdata [N_ENCLAVES],
  input  bram_req_t             cpu_shm_req   [N_ENCLAVES],
  output logic [31:0]           cpu_shm_rdata [N_ENCLAVES],
  input  axil_req_t             s_cpu_mbox_req [N_ENCLAVES],
  output axil_rsp_t             s_cpu_mbox_rsp [N_ENCLAVES]
);

  localparam int unsigned IW  = (N_ENCLAVES > 1) ? $clog2(N_ENCLAVES) : 1;
  localparam int unsigned TAW = $clog2(TCM_BYTES);
  localparam logic [31:0] TCM_BASE = 32'h0;

  // Manager <-> Loader
  logic [31:0] addr_src, addr_dest, size;
  logic        strt_cpy, clr_cpy, done_cpy, ld_busy;
  logic [15:0] cma_config;
  // Manager <-> Communication Agent, enclaves
  logic [N_ENCLAVES-1:0] rst_enclave, close_done, mbox_clear, irq;
  logic                  ta_ready;
  logic [IW-1:0]         ta_enclave;
  bram_req_t             ld_bram;

  teeod_manager_agent #(
    .N_ENCLAVES(N_ENCLAVES), .TCM_BYTES(TCM_BYTES), .TCM_BASE(TCM_BASE)
  ) u_manager (
    .clk, .rst_n,
    .s_axil_req(s_ma_axil_req), .s_axil_rsp(s_ma_axil_rsp),
    .addr_src, .addr_dest, .size, .strt_cpy, .clr_cpy, .done_cpy, .cma_config,
    .rst_enclave, .ta_ready, .ta_enclave, .close_done, .mbox_clear
  );

  teeod_loader_agent #(.BURST_BEATS(BURST_BEATS)) u_loader (
    .clk, .rst_n,
    .trigger(strt_cpy), .clear(clr_cpy), .din(cma_config),
    .addr_source(addr_src), .addr_destiny(addr_dest), .size,
    .done(done_cpy), .busy(ld_busy),
    .m_axi_req(m_ld_axi_req), .m_axi_rsp(m_ld_axi_rsp),
    .bram_req(ld_bram)
  );

  teeod_comm_agent #(.N_ENCLAVES(N_ENCLAVES)) u_comm (
    .clk, .rst_n,
    .s_ree_req(s_comm_axil_req), .s_ree_rsp(s_comm_axil_rsp),
    .s_enc_req(s_cpu_mbox_req), .s_enc_rsp(s_cpu_mbox_rsp),
    .irq, .ta_ready, .ta_enclave, .mbox_clear, .close_done
  );

  // steer the loader's BRAM port to the TCM its address falls in
  logic [31:0]   ld_off;
  logic [IW-1:0] ld_sel;
  assign ld_off = ld_bram.addr - TCM_BASE;
  assign ld_sel = ld_off[TAW +: IW];

  for (genvar g = 0; g < N_ENCLAVES; g++) begin : g_enclave
    bram_req_t load_req;
    always_comb begin
      load_req      = ld_bram;
      load_req.addr = {{(32-TAW){1'b0}}, ld_off[TAW-1:0]};
      load_req.en   = ld_bram.en && ld_sel == IW'(g) && ld_off < 32'(N_ENCLAVES * TCM_BYTES);
      if (!load_req.en) load_req.we = '0;
    end

    teeod_enclave #(.TCM_BYTES(TCM_BYTES), .SHM_BYTES(SHM_BYTES)) u_enclave (
      .clk, .rst_n,
      .rst_enclave(rst_enclave[g]),
      .irq(irq[g]),
      .load_req,
      .shm_ps_req(shm_ps_req[g]),
      .shm_ps_rdata(shm_ps_rdata[g]),
      .cpu_rst_n(cpu_rst_n[g]),
      .cpu_irq(cpu_irq[g]),
      .cpu_tcm_req(cpu_tcm_req[g]),
      .cpu_tcm_rdata(cpu_tcm_rdata[g]),
      .cpu_shm_req(cpu_shm_req[g]),
      .cpu_shm_rdata(cpu_shm_rdata[g])
    );
  end

  // the loader only ever writes a TCM that is held in reset
  a_load_in_reset: assert property (@(posedge clk) disable iff (!rst_n)
    ld_bram.en |-> rst_enclave[ld_sel]);

endmodule
