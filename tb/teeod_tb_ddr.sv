// teeod_tb_ddr: behavioural model of the DDR memory behind the processing
// system's AXI slave port, for simulation only (not synthesizable intent).
// Serves AXI4 INCR read bursts of 32-bit beats from a word array with a random
// address-accept delay and random gaps between beats. Word w of the memory sits
// at byte address BASE + 4*w. Checks that no burst crosses a 4 KiB page, that
// the beat size is 4 bytes and that the burst stays inside the array.
// Requests are ignored while rst_n is low. The testbench fills `mem`
// hierarchically. protocol_errors counts violations.
module teeod_tb_ddr
  import teeod_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  parameter logic [AXI_ADDR_W-1:0] BASE = '0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axi_rd_req_t req,
  output axi_rd_rsp_t rsp
);
  logic [31:0] mem [WORDS];
  int protocol_errors = 0;
  int bursts = 0;

  initial begin
    rsp = '0;
    forever begin
      logic [AXI_ADDR_W-1:0] a;
      int len;
      @(posedge clk);
      if (!rst_n || !req.arvalid) continue;
      repeat ($urandom_range(2)) @(posedge clk);
      #1 rsp.arready = 1'b1;
      a   = req.araddr;
      len = int'(req.arlen) + 1;
      bursts++;
      if (req.arsize != 3'd2 || req.arburst != 2'b01) protocol_errors++;
      if ((a & 48'hFFF) + 48'(4*len) > 48'h1000) begin
        protocol_errors++; $display("DDR model: burst crosses 4 KiB at %h", a);
      end
      @(posedge clk); #1 rsp.arready = 1'b0;
      for (int i = 0; i < len; i++) begin
        int unsigned w;
        w = int'((a - BASE) >> 2) + i;
        if (w >= WORDS) begin protocol_errors++; w = 0; end
        repeat ($urandom_range(1)) @(posedge clk);
        #1;
        rsp.rvalid = 1'b1;
        rsp.rdata  = mem[w];
        rsp.rresp  = AXI_OKAY;
        rsp.rlast  = (i == len - 1);
        do @(posedge clk); while (!req.rready);
        #1 rsp.rvalid = 1'b0; rsp.rlast = 1'b0;
      end
    end
  end
endmodule
