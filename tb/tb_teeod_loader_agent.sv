// tb_teeod_loader_agent: self-checking test of the TA Loader Agent.
// A behavioural DDR serves random data; the loader's BRAM port writes into a
// reference TCM array kept here. Random copies (unaligned word addresses,
// sizes not a multiple of 4, bursts that meet the alignment boundary) are
// checked word by word, including that nothing outside the range is touched,
// every size from 1 byte to two bursts plus two words is copied once,
// that done pulses exactly once, and that a clear fills the range with zeros.
module tb_teeod_loader_agent;
  import teeod_pkg::*;

  localparam int unsigned DDR_WORDS = 8192;
  localparam int unsigned TCM_WORDS = 2048;
  localparam logic [AXI_ADDR_W-1:0] DDR_BASE = 48'h0012_4000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        trigger = 1'b0, clear = 1'b0, done, busy;
  logic [15:0] din;
  logic [31:0] addr_source, addr_destiny, size;
  axi_rd_req_t m_axi_req;
  axi_rd_rsp_t m_axi_rsp;
  bram_req_t   bram_req;

  teeod_loader_agent #(.BURST_BEATS(16)) dut (.*);
  teeod_tb_ddr #(.WORDS(DDR_WORDS), .BASE(DDR_BASE)) ddr (.clk, .rst_n, .req(m_axi_req), .rsp(m_axi_rsp));

  int checks = 0, failures = 0, done_count = 0;
  logic [31:0] tcm [TCM_WORDS];

  always @(posedge clk) begin
    if (done) done_count++;
    if (bram_req.en && bram_req.we == 4'hF) begin
      if (bram_req.addr[31:2] >= TCM_WORDS) failures++;
      else tcm[bram_req.addr[31:2]] <= bram_req.wdata;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int src_w, input int dst_w, input int bytes, input bit clr);
    int nw, c0;
    logic [31:0] prev [TCM_WORDS];
    nw = (bytes + 3) / 4;
    for (int i = 0; i < TCM_WORDS; i++) prev[i] = tcm[i];
    @(negedge clk);
    din          = DDR_BASE[47:32];
    addr_source  = DDR_BASE[31:0] + 32'(4*src_w);
    addr_destiny = 32'(4*dst_w);
    size         = 32'(bytes);
    clear        = clr;
    trigger      = 1'b1;
    c0 = done_count;
    @(negedge clk) trigger = 1'b0;
    wait (done_count == c0 + 1);
    repeat (3) @(negedge clk);
    checks++;
    if (done_count != c0 + 1 || busy) begin failures++; $display("done count/busy wrong"); end
    for (int i = 0; i < TCM_WORDS; i++) begin
      logic [31:0] exp;
      if (i >= dst_w && i < dst_w + nw) exp = clr ? 32'h0 : ddr.mem[src_w + i - dst_w];
      else exp = prev[i];
      checks++;
      if (tcm[i] !== exp) begin
        failures++;
        if (failures < 10) $display("tcm[%0d]=%h exp %h (src %0d dst %0d bytes %0d clr %0d)",
                                    i, tcm[i], exp, src_w, dst_w, bytes, clr);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < DDR_WORDS; i++) ddr.mem[i] = $urandom;
    for (int i = 0; i < TCM_WORDS; i++) tcm[i] = 32'hDEAD_0000 | 32'(i);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0, 0, 64, 0);            // exactly one aligned burst
    run(3, 10, 61, 0);           // unaligned start, partial last word
    run(1020, 100, 400, 0);      // crosses a 4 KiB page in DDR
    run(5, 0, 4, 0);             // single word
    for (int b = 1; b <= 4*(2*16+2); b++)   // every size up to two bursts and two words
      run(7 + b, 1500 - b, b, 0);
    for (int n = 0; n < 12; n++)
      run($urandom_range(DDR_WORDS - 600), $urandom_range(TCM_WORDS - 600), $urandom_range(1, 2000), 0);
    run(0, 50, 1000, 1);         // clear
    run(0, 0, 4*TCM_WORDS, 0);   // whole TCM
    run(0, 0, 4*TCM_WORDS, 1);   // wipe whole TCM
    checks++;
    if (ddr.protocol_errors != 0) begin failures++; $display("DDR protocol errors %0d", ddr.protocol_errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
