// teeod_bram: true dual-port block RAM, 32-bit words, byte write enables.
//
// Each enclave owns two of these: its private TCM (64 KiB, port A written by
// the Loader Agent, port B used by the soft processor) and its shared memory
// (8 KiB, port A on the processing-system side, port B on the processor side),
// as in the prototype where both are Block Memory Generator instances with
// ports BRAM_PORTA and BRAM_PORTB. The BRAM ports carry byte addresses; the
// word index is addr[AW+1:2] and higher bits are ignored.
//
// Timing: synchronous read with one cycle of latency (read-first: a read of a
// word written in the same cycle returns the old value). The memory is not
// reset, as a block RAM is not; the Manager Agent wipes a TCM through port A
// when an enclave is destroyed. Simultaneous writes to one word from both
// ports leave that word undefined, as on the real part; port A is applied last
// here.
module teeod_bram
  import teeod_pkg::*;
#(
  parameter int unsigned DEPTH = TCM_BYTES_DEF / 4
) (
  input  logic        clk,
  input  bram_req_t   a_req,
  output logic [31:0] a_rdata,
  input  bram_req_t   b_req,
  output logic [31:0] b_rdata
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [31:0] mem [DEPTH];

  logic [AW-1:0] a_idx, b_idx;
  assign a_idx = a_req.addr[AW+1:2];
  assign b_idx = b_req.addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (b_req.en) begin
      b_rdata <= mem[b_idx];
      for (int i = 0; i < 4; i++)
        if (b_req.we[i]) mem[b_idx][8*i +: 8] <= b_req.wdata[8*i +: 8];
    end
    if (a_req.en) begin
      a_rdata <= mem[a_idx];
      for (int i = 0; i < 4; i++)
        if (a_req.we[i]) mem[a_idx][8*i +: 8] <= a_req.wdata[8*i +: 8];
    end
  end

endmodule
