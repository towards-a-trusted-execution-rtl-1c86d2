// teeod_enclave: one enclave's memories and reset, around a soft processor
// that sits outside this module.
//
// An enclave is a dedicated soft processor (an Arm Cortex-M1 in the published
// prototype, not included here) with a private TCM that holds the TA binary
// and a shared-memory window towards the rich OS. This module holds both
// memories and the enclave's reset and access gating; the processor connects
// to the cpu_* ports, and its mailbox bus goes straight to the Communication
// Agent.
//
//  * TCM (TCM_BYTES, a teeod_bram): port A belongs to the Loader Agent, port B
//    to the processor. Loader writes are accepted only while the enclave is in
//    reset, so a running TA's code cannot be overwritten; processor accesses
//    are accepted only while it is out of reset.
//  * Shared memory (SHM_BYTES, a teeod_bram): port A faces the processing
//    system, port B the processor (processor side gated by the reset too).
//  * Reset: the processor runs while rst_enclave (the Manager Agent's RST line)
//    is low and the system reset is released. cpu_rst_n asserts at once and
//    is released two clock edges after both causes are gone (synchronised).
//  * Interrupt: irq (the Communication Agent's INT line) is passed on as
//    cpu_irq, masked while the processor is in reset.
//
// Timing: both memories read with one cycle of latency.
// From the paper: the enclave's parts (processor, TCM, shared memory, RST,
// INT) and their sizes. This design's own choices: the gating rules and the
// reset synchroniser.
module teeod_enclave
  import teeod_pkg::*;
#(
  parameter int unsigned TCM_BYTES = TCM_BYTES_DEF,
  parameter int unsigned SHM_BYTES = SHM_BYTES_DEF
) (
  input  logic        clk,
  input  logic        rst_n,           // system reset
  input  logic        rst_enclave,     // RST from the Manager Agent
  input  logic        irq,             // INT from the Communication Agent
  input  bram_req_t   load_req,        // from the Loader Agent
  input  bram_req_t   shm_ps_req,      // processing-system side of shared memory
  output logic [31:0] shm_ps_rdata,
  // soft processor side
  output logic        cpu_rst_n,
  output logic        cpu_irq,
  input  bram_req_t   cpu_tcm_req,
  output logic [31:0] cpu_tcm_rdata,
  input  bram_req_t   cpu_shm_req,
  output logic [31:0] cpu_shm_rdata
);

  // reset: asynchronous assert, two-flop synchronous release
  logic [1:0] rst_sync_q;
  logic       rst_src_n;
  assign rst_src_n = rst_n && !rst_enclave;
  always_ff @(posedge clk or negedge rst_src_n) begin
    if (!rst_src_n) rst_sync_q <= 2'b00;
    else            rst_sync_q <= {rst_sync_q[0], 1'b1};
  end
  assign cpu_rst_n = rst_sync_q[1];
  assign cpu_irq   = irq && cpu_rst_n;

  bram_req_t   tcm_a, tcm_b, shm_b;
  logic [31:0] tcm_a_rdata;
  always_comb begin
    tcm_a = load_req;
    if (cpu_rst_n) tcm_a = '0;        // loader locked out while the TA runs
    tcm_b = cpu_tcm_req;
    shm_b = cpu_shm_req;
    if (!cpu_rst_n) begin             // processor side dead while in reset
      tcm_b = '0;
      shm_b = '0;
    end
  end

  teeod_bram #(.DEPTH(TCM_BYTES / 4)) u_tcm (
    .clk, .a_req(tcm_a), .a_rdata(tcm_a_rdata), .b_req(tcm_b), .b_rdata(cpu_tcm_rdata)
  );

  teeod_bram #(.DEPTH(SHM_BYTES / 4)) u_shm (
    .clk, .a_req(shm_ps_req), .a_rdata(shm_ps_rdata), .b_req(shm_b), .b_rdata(cpu_shm_rdata)
  );

endmodule
