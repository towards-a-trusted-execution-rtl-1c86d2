// tb_teeod_manager_agent: self-checking test of the TEE Manager Agent.
// An AXI4-Lite master plays the rich OS; a small loader model answers
// strt_cpy with done_cpy after a random delay and records what it was asked.
// Checked: miss -> load into the lowest free enclave at its TCM address with
// the given source and size, reset released only after the copy; hit -> no
// copy, same enclave; register writes refused while busy; no free enclave and
// bad sizes reported; close_done -> reset asserted, mailbox wipe, TCM wipe of
// the whole TCM, enclave freed and reusable; the ta_ready/ta_enclave answer.
module tb_teeod_manager_agent;
  import teeod_pkg::*;

  localparam int unsigned N = 4;
  localparam int unsigned TCM = 65536;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axil_req_t s_axil_req;
  axil_rsp_t s_axil_rsp;
  logic [31:0] addr_src, addr_dest, size;
  logic strt_cpy, clr_cpy, done_cpy = 1'b0;
  logic [15:0] cma_config;
  logic [N-1:0] rst_enclave, close_done = '0, mbox_clear;
  logic ta_ready;
  logic [1:0] ta_enclave;

  teeod_manager_agent #(.N_ENCLAVES(N), .TCM_BYTES(TCM)) dut (.*);
  teeod_tb_axil_master ree (.clk, .req(s_axil_req), .rsp(s_axil_rsp));

  int checks = 0, failures = 0;
  int copies = 0, wipes = 0;
  logic [31:0] last_src, last_dst, last_size;
  logic        last_clr;
  logic [N-1:0] mbox_clear_seen = '0;
  logic        rst_at_copy;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // loader model
  always @(posedge clk) begin
    mbox_clear_seen <= mbox_clear_seen | mbox_clear;
    if (strt_cpy) begin
      last_src = addr_src; last_dst = addr_dest; last_size = size; last_clr = clr_cpy;
      rst_at_copy = rst_enclave[addr_dest / TCM];
      if (clr_cpy) wipes++; else copies++;
      fork begin
        repeat ($urandom_range(3, 40)) @(posedge clk);
        #1 done_cpy = 1'b1;
        @(posedge clk) #1 done_cpy = 1'b0;
      end join_none
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0]  resp;
  logic [31:0] rd;

  task automatic set_ta(input logic [127:0] uuid, input logic [31:0] addr, input logic [31:0] sz);
    ree.write(MA_REG_ADDR, addr, resp);
    ree.write(MA_REG_SIZE, sz, resp);
    for (int i = 0; i < 4; i++) ree.write(32'(MA_REG_UUID0) + 32'(4*i), uuid[32*i +: 32], resp);
  endtask

  // request and poll STATUS until it leaves BUSY; returns STATUS
  task automatic request(output logic [31:0] st);
    ree.write(MA_REG_CTRL, 32'h1, resp);
    check(resp == AXI_OKAY, "CTRL write accepted");
    do ree.read(MA_REG_STATUS, st, resp); while (st[3:0] == MA_ST_BUSY);
  endtask

  logic [127:0] uuid [6];
  logic [31:0]  st;
  int c0;

  initial begin
    for (int i = 0; i < 6; i++) uuid[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(rst_enclave == '1, "all enclaves in reset after reset");
    check(!ta_ready, "no TA ready after reset");
    ree.write(MA_REG_CMA, 32'h0000_0012, resp);
    ree.read(MA_REG_CMA, rd, resp);
    check(rd == 32'h12 && cma_config == 16'h12, "cma_config register");

    // first TA: miss, load into enclave 0
    set_ta(uuid[0], 32'h7000_0000, 32'd1000);
    ree.write(MA_REG_CTRL, 32'h1, resp);
    ree.write(MA_REG_SIZE, 32'd5, resp);
    check(resp == AXI_SLVERR, "SIZE refused while busy");
    do ree.read(MA_REG_STATUS, st, resp); while (st[3:0] == MA_ST_BUSY);
    check(st[3:0] == MA_ST_LOADED && st[11:8] == 0, "TA0 loaded into enclave 0");
    check(copies == 1 && last_src == 32'h7000_0000 && last_dst == 0 && last_size == 1000 && !last_clr,
          "loader got source, enclave 0 TCM address and size");
    check(rst_at_copy, "enclave held in reset during the copy");
    check(rst_enclave == 4'b1110, "enclave 0 released after load");
    check(ta_ready && ta_enclave == 0, "COMM told enclave 0");

    // second TA: enclave 1
    set_ta(uuid[1], 32'h7001_0000, 32'd65536);
    request(st);
    check(st[3:0] == MA_ST_LOADED && st[11:8] == 1 && last_dst == TCM, "TA1 into enclave 1");
    check(st[31:16] == 16'b0011, "enclaves_list shows 0 and 1 taken");

    // first TA again: hit, no copy
    c0 = copies;
    set_ta(uuid[0], 32'h7000_0000, 32'd1000);
    request(st);
    check(st[3:0] == MA_ST_HIT && st[11:8] == 0 && copies == c0, "TA0 hit without reload");
    check(ta_ready && ta_enclave == 0, "COMM pointed back to enclave 0");

    // size errors
    set_ta(uuid[2], 32'h7002_0000, 32'd65537);
    request(st);
    check(st[3:0] == MA_ST_ERR_SIZE, "oversize TA refused");
    check(!ta_ready, "no TA ready after an error");
    set_ta(uuid[2], 32'h7002_0000, 32'd0);
    request(st);
    check(st[3:0] == MA_ST_ERR_SIZE, "empty TA refused");

    // fill enclaves 2 and 3, then overflow
    set_ta(uuid[2], 32'h7002_0000, 32'd4096);
    request(st);
    check(st[3:0] == MA_ST_LOADED && st[11:8] == 2 && last_dst == 2*TCM, "TA2 into enclave 2");
    set_ta(uuid[3], 32'h7003_0000, 32'd8);
    request(st);
    check(st[3:0] == MA_ST_LOADED && st[11:8] == 3 && last_dst == 3*TCM, "TA3 into enclave 3");
    check(rst_enclave == '0, "all four enclaves running");
    set_ta(uuid[4], 32'h7004_0000, 32'd8);
    request(st);
    check(st[3:0] == MA_ST_ERR_FULL, "fifth TA refused: no free enclave");

    // destroy enclave 1
    c0 = wipes;
    @(negedge clk) close_done = 4'b0010;
    @(negedge clk) close_done = '0;
    repeat (2) @(negedge clk);
    check(rst_enclave[1] && mbox_clear_seen[1], "enclave 1 in reset, mailbox wiped");
    wait (wipes == c0 + 1);
    check(last_clr && last_dst == TCM && last_size == TCM, "whole TCM of enclave 1 wiped");
    repeat (50) @(negedge clk);
    ree.read(MA_REG_STATUS, st, resp);
    check(st[31:16] == 16'b1101, "enclave 1 free again");

    // TA1 is gone: a lookup reloads it, into the freed enclave 1
    c0 = copies;
    set_ta(uuid[1], 32'h7001_0000, 32'd2048);
    request(st);
    check(st[3:0] == MA_ST_LOADED && st[11:8] == 1 && copies == c0 + 1, "TA1 reloaded into enclave 1");

    // two destructions at once, then a new TA
    @(negedge clk) close_done = 4'b1001;
    @(negedge clk) close_done = '0;
    set_ta(uuid[5], 32'h7005_0000, 32'd64);
    request(st);
    check(st[3:0] == MA_ST_LOADED && st[11:8] == 0, "TA5 into enclave 0 after both wipes");
    check(rst_enclave == 4'b1000, "enclave 3 still in reset, 0..2 running");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
