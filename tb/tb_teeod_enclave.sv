// tb_teeod_enclave: self-checking test of the enclave wrapper (small memories).
// Checks the reset release timing, interrupt masking, that the loader can write
// the TCM only while the enclave is in reset, that the processor reads what was
// loaded only once out of reset, and the shared memory between the processing
// system side and the processor side in both directions.
module tb_teeod_enclave;
  import teeod_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, rst_enclave = 1'b1, irq = 1'b0;
  always #5 clk = ~clk;

  bram_req_t   load_req = '0, shm_ps_req = '0, cpu_tcm_req = '0, cpu_shm_req = '0;
  logic [31:0] shm_ps_rdata, cpu_tcm_rdata, cpu_shm_rdata;
  logic        cpu_rst_n, cpu_irq;

  teeod_enclave #(.TCM_BYTES(1024), .SHM_BYTES(256)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bram_wr(ref bram_req_t r, input int word, input logic [31:0] d);
    @(negedge clk) r = '{en: 1'b1, we: 4'hF, addr: 32'(4*word), wdata: d};
    @(negedge clk) r = '0;
  endtask
  task automatic bram_rd(ref bram_req_t r, input int word);
    @(negedge clk) r = '{en: 1'b1, we: 4'h0, addr: 32'(4*word), wdata: '0};
    @(negedge clk) r = '0;
  endtask

  logic [31:0] img [16];

  initial begin
    for (int i = 0; i < 16; i++) img[i] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    check(!cpu_rst_n, "processor held in reset while RST is high");
    irq = 1'b1;
    @(negedge clk) check(!cpu_irq, "interrupt masked in reset");
    irq = 1'b0;
    // load the TA image through the loader port while in reset
    for (int i = 0; i < 16; i++) bram_wr(load_req, i, img[i]);
    // release RST: two edges later the processor runs
    @(negedge clk) rst_enclave = 1'b0;
    check(!cpu_rst_n, "not released at once");
    @(negedge clk) check(!cpu_rst_n, "not released after one edge");
    @(negedge clk) check(cpu_rst_n, "released after two edges");
    for (int i = 0; i < 16; i++) begin
      bram_rd(cpu_tcm_req, i);
      check(cpu_tcm_rdata == img[i], $sformatf("processor reads loaded word %0d", i));
    end
    // loader locked out while running
    for (int i = 0; i < 16; i++) bram_wr(load_req, i, ~img[i]);
    for (int i = 0; i < 16; i++) begin
      bram_rd(cpu_tcm_req, i);
      check(cpu_tcm_rdata == img[i], $sformatf("loader write to word %0d ignored while the TA runs", i));
    end
    irq = 1'b1;
    @(negedge clk) check(cpu_irq, "interrupt passed while running");
    irq = 1'b0;
    // shared memory both ways
    bram_wr(shm_ps_req, 5, 32'h1111_2222);
    bram_rd(cpu_shm_req, 5);
    check(cpu_shm_rdata == 32'h1111_2222, "processor sees REE data in shared memory");
    bram_wr(cpu_shm_req, 6, 32'h3333_4444);
    bram_rd(shm_ps_req, 6);
    check(shm_ps_rdata == 32'h3333_4444, "REE sees enclave data in shared memory");
    // hard reset again: processor side dead, loader can write
    @(negedge clk) rst_enclave = 1'b1;
    @(negedge clk) check(!cpu_rst_n && !cpu_irq, "reset asserts at once");
    bram_wr(cpu_shm_req, 6, 32'h5555_6666);
    bram_rd(shm_ps_req, 6);
    check(shm_ps_rdata == 32'h3333_4444, "processor write ignored in reset");
    bram_wr(load_req, 3, 32'h0);
    @(negedge clk) rst_enclave = 1'b0;
    repeat (3) @(negedge clk);
    bram_rd(cpu_tcm_req, 3);
    check(cpu_tcm_rdata == 32'h0, "loader write taken in reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
