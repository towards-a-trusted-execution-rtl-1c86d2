// tb_teeod_bram: self-checking test of the dual-port block RAM.
// Writes random words with random byte enables through both ports, keeps a
// reference copy, and checks every read (one cycle latency, read-first) on
// both ports against it. Uses a reduced depth to stay short.
module tb_teeod_bram;
  import teeod_pkg::*;

  localparam int unsigned DEPTH = 256;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  bram_req_t   a_req, b_req;
  logic [31:0] a_rdata, b_rdata;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [DEPTH];

  teeod_bram #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] we);
    for (int i = 0; i < 4; i++) if (we[i]) old[8*i +: 8] = nw[8*i +: 8];
    return old;
  endfunction

  initial begin
    a_req = '0; b_req = '0;
    // fill through port A, whole words
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_req = '{en: 1'b1, we: 4'hF, addr: 32'(i*4), wdata: $urandom};
      ref_mem[i] = a_req.wdata;
    end
    @(negedge clk); a_req = '0;
    // random traffic on both ports, different words per cycle
    for (int n = 0; n < 2000; n++) begin
      int ia, ib;
      logic [31:0] exp_a, exp_b;
      ia = $urandom_range(DEPTH-1);
      ib = (ia + 1 + $urandom_range(DEPTH-2)) % DEPTH;
      @(negedge clk);
      a_req = '{en: 1'b1, we: 4'($urandom), addr: 32'(ia*4), wdata: $urandom};
      b_req = '{en: 1'b1, we: 4'($urandom), addr: 32'(ib*4) | 32'h0001_0000, wdata: $urandom};
      exp_a = ref_mem[ia];  // read-first
      exp_b = ref_mem[ib];
      ref_mem[ia] = merge(ref_mem[ia], a_req.wdata, a_req.we);
      ref_mem[ib] = merge(ref_mem[ib], b_req.wdata, b_req.we);
      @(posedge clk); #1;
      checks += 2;
      if (a_rdata !== exp_a) begin failures++; $display("port A word %0d: %h exp %h", ia, a_rdata, exp_a); end
      if (b_rdata !== exp_b) begin failures++; $display("port B word %0d: %h exp %h", ib, b_rdata, exp_b); end
    end
    // final read-back through port B
    @(negedge clk); a_req = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      b_req = '{en: 1'b1, we: 4'h0, addr: 32'(i*4), wdata: '0};
      @(posedge clk); #1;
      checks++;
      if (b_rdata !== ref_mem[i]) begin failures++; $display("readback %0d: %h exp %h", i, b_rdata, ref_mem[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
