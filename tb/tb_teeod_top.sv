// tb_teeod_top: end-to-end test of the whole fabric at its default size
// (four enclaves, 64 KiB TCM, 8 KiB shared memory).
//
// The rich OS is played by two AXI4-Lite masters running the client flow
// (open session, invoke command, close session); DDR is a behavioural AXI read
// slave holding five TA images; each enclave's processor is a behavioural TA
// (teeod_tb_ta_cpu) that checks its image at boot and serves mailbox messages.
// Scenario: load a full 64 KiB TA; invoke through the mailbox only and through
// shared memory; reopen an already loaded TA; fill all four enclaves (one
// doorbell rung before the Manager Agent has answered, so the Communication
// Agent must wait); overflow with a fifth TA; reject a wrong session id; close
// one TA and check that its enclave is reset and its TCM and mailbox wiped;
// load the fifth TA into the freed enclave; close everything. Each mechanism is
// counted and must occur at least once.
module tb_teeod_top;
  import teeod_pkg::*;

  localparam int unsigned N     = N_ENCLAVES_DEF;
  localparam int unsigned TCMW  = TCM_BYTES_DEF / 4;
  localparam int unsigned N_TA  = 5;
  localparam logic [AXI_ADDR_W-1:0] DDR_BASE = 48'h0000_7000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axil_req_t   s_ma_axil_req, s_comm_axil_req;
  axil_rsp_t   s_ma_axil_rsp, s_comm_axil_rsp;
  axi_rd_req_t m_ld_axi_req;
  axi_rd_rsp_t m_ld_axi_rsp;
  bram_req_t   shm_ps_req   [N];
  logic [31:0] shm_ps_rdata [N];
  logic [N-1:0] cpu_rst_n, cpu_irq;
  bram_req_t   cpu_tcm_req   [N];
  logic [31:0] cpu_tcm_rdata [N];
  bram_req_t   cpu_shm_req   [N];
  logic [31:0] cpu_shm_rdata [N];
  axil_req_t   s_cpu_mbox_req [N];
  axil_rsp_t   s_cpu_mbox_rsp [N];
  int boots_ok [N], boots_bad [N], served [N];

  teeod_top dut (.*);

  teeod_tb_axil_master ree_ma   (.clk, .req(s_ma_axil_req),   .rsp(s_ma_axil_rsp));
  teeod_tb_axil_master ree_comm (.clk, .req(s_comm_axil_req), .rsp(s_comm_axil_rsp));
  teeod_tb_ddr #(.WORDS(N_TA * TCMW), .BASE(DDR_BASE)) ddr (.clk, .rst_n, .req(m_ld_axi_req), .rsp(m_ld_axi_rsp));

  for (genvar g = 0; g < N; g++) begin : g_cpu
    teeod_tb_ta_cpu u_cpu (
      .clk, .cpu_rst_n(cpu_rst_n[g]), .cpu_irq(cpu_irq[g]),
      .tcm_req(cpu_tcm_req[g]), .tcm_rdata(cpu_tcm_rdata[g]),
      .shm_req(cpu_shm_req[g]), .shm_rdata(cpu_shm_rdata[g]),
      .mbox_req(s_cpu_mbox_req[g]), .mbox_rsp(s_cpu_mbox_rsp[g]),
      .boots_ok(boots_ok[g]), .boots_bad(boots_bad[g]), .served(served[g])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired: ma %0d ld %0d comm %0d cpu_rst_n %b irq %b boots %0d", dut.u_manager.state_q, dut.u_loader.state_q, dut.u_comm.state_q, cpu_rst_n, cpu_irq, boots_ok[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- mechanism counters
  int n_load = 0, n_hit = 0, n_full = 0, n_wait_ma = 0, n_invoke_mbox = 0, n_invoke_shm = 0,
      n_reject = 0, n_destroy = 0, n_wipe_ok = 0;
  int wait_ma_cycles = 0;
  longint cycle = 0;
  always @(negedge clk) begin
    cycle++;
    // doorbell rung (Communication Agent busy) while the Manager Agent has not answered yet
    if (dut.u_comm.busy && !dut.ta_ready && dut.u_manager.busy) wait_ma_cycles++;
    if (dut.clr_cpy && dut.done_cpy) n_destroy++;
  end

  // ---------------------------------------------------------------- TA images
  logic [127:0] uuid [N_TA];
  int unsigned  ta_bytes [N_TA] = '{65536, 10000, 4096, 400, 800};

  function automatic logic [31:0] ta_addr(int k);
    return DDR_BASE[31:0] + 32'(4 * k * TCMW);
  endfunction

  task automatic build_images();
    for (int k = 0; k < N_TA; k++) begin
      int unsigned nw;
      logic [31:0] sum;
      nw  = (ta_bytes[k] + 3) / 4;
      sum = 0;
      uuid[k] = {$urandom, $urandom, $urandom, $urandom};
      ddr.mem[k*TCMW + 0] = 32'(100 + k);
      ddr.mem[k*TCMW + 1] = 32'(nw);
      for (int w = 3; w < TCMW; w++) begin
        ddr.mem[k*TCMW + w] = $urandom;
        if (w < nw) sum += ddr.mem[k*TCMW + w];
      end
      ddr.mem[k*TCMW + 2] = sum;
    end
  endtask

  // ---------------------------------------------------------------- client flow
  logic [1:0]  resp;
  logic [31:0] rd;

  task automatic ma_request(input int k, input bit poll, output logic [31:0] st);
    ree_ma.write(MA_REG_ADDR, ta_addr(k), resp);
    ree_ma.write(MA_REG_SIZE, ta_bytes[k], resp);
    for (int i = 0; i < 4; i++) ree_ma.write(32'(MA_REG_UUID0) + 32'(4*i), uuid[k][32*i +: 32], resp);
    ree_ma.write(MA_REG_CMA, 32'(DDR_BASE[47:32]), resp);
    ree_ma.write(MA_REG_CTRL, 32'h1, resp);
    st = 0;
    if (poll) begin
      do ree_ma.read(MA_REG_STATUS, st, resp); while (st[3:0] == MA_ST_BUSY);
      if (st[3:0] == MA_ST_LOADED) n_load++;
      if (st[3:0] == MA_ST_HIT)    n_hit++;
      if (st[3:0] == MA_ST_ERR_FULL) n_full++;
    end
  endtask

  task automatic comm_send(input logic [31:0] op, input logic [31:0] sid, input logic [31:0] cmd,
                           input logic [31:0] gp0, input logic [31:0] gp1,
                           output logic [31:0] ctrl, output logic [31:0] reply [MBOX_WORDS]);
    logic [31:0] m [MBOX_WORDS];
    m[MB_OPERATION_ID] = op;
    m[MB_SESSION_ID]   = sid;
    m[MB_PARAM_TYPE]   = (cmd == 2) ? 32'h0000_0061 : 32'h0000_0011;
    m[MB_CMD_ID]       = cmd;
    for (int i = 0; i < N_GP_PARAMS; i++) m[MB_GP0 + i] = 0;
    m[MB_GP0] = gp0; m[MB_GP0+1] = gp1;
    for (int w = 0; w < MBOX_WORDS; w++) ree_comm.write(32'(4 + 4*w), m[w], resp);
    ree_comm.write(CA_REG_CTRL, 32'h1, resp);
    do ree_comm.read(CA_REG_CTRL, ctrl, resp); while (ctrl[0]);
    for (int w = 0; w < MBOX_WORDS; w++) ree_comm.read(32'(4 + 4*w), reply[w], resp);
  endtask

  logic [31:0] sess [N_TA];
  int          where [N_TA];

  // TEEC_OpenSession: make sure the TA is loaded, then send the open message
  task automatic open_session(input int k, input bit poll_ma, output logic [31:0] st);
    logic [31:0] ctrl, reply [MBOX_WORDS];
    ma_request(k, poll_ma, st);
    if (poll_ma && st[3:0] != MA_ST_LOADED && st[3:0] != MA_ST_HIT) return;
    comm_send(OP_OPEN_SESSION, 0, 0, 0, 0, ctrl, reply);
    if (!poll_ma) begin
      ree_ma.read(MA_REG_STATUS, st, resp);
      if (st[3:0] == MA_ST_LOADED) n_load++;
    end
    where[k] = int'(ctrl[11:8]);
    sess[k]  = reply[MB_SESSION_ID];
    check(ctrl[2:0] == 3'b010 && reply[MB_GP0] == 0 && reply[MB_GP0+7] == 32'(100 + k),
          $sformatf("open session on TA%0d answered by it", k));
  endtask

  // point the Communication Agent at TA k again (a hit) before messaging it
  task automatic select(input int k);
    logic [31:0] st;
    ma_request(k, 1'b1, st);
    check(st[3:0] == MA_ST_HIT && int'(st[11:8]) == where[k], $sformatf("TA%0d still loaded", k));
  endtask

  task automatic invoke_inc(input int k, input logic [31:0] v);
    logic [31:0] ctrl, reply [MBOX_WORDS];
    select(k);
    comm_send(OP_INVOKE_COMMAND, sess[k], 1, v, 0, ctrl, reply);
    check(ctrl[2:0] == 3'b010 && reply[MB_GP0] == v + 1 && reply[MB_GP0+7] == 32'(100 + k),
          $sformatf("TA%0d increments %0d", k, v));
    n_invoke_mbox++;
  endtask

  task automatic close_session(input int k);
    logic [31:0] ctrl, reply [MBOX_WORDS];
    select(k);
    comm_send(OP_CLOSE_SESSION, sess[k], 0, 0, 0, ctrl, reply);
    check(ctrl[2:0] == 3'b010 && reply[MB_GP0] == 0, $sformatf("close session on TA%0d", k));
  endtask

  task automatic shm_ps_read(input int e, input int byte_off, output logic [31:0] d);
    @(negedge clk) shm_ps_req[e] = '{en: 1'b1, we: 4'h0, addr: 32'(byte_off), wdata: '0};
    @(negedge clk) shm_ps_req[e] = '0;
    d = shm_ps_rdata[e];
  endtask

  task automatic wait_free(input int e);
    logic [31:0] st;
    do begin
      repeat (100) @(negedge clk);
      ree_ma.read(MA_REG_STATUS, st, resp);
    end while (st[16 + e]);
  endtask

  logic [31:0] st, ctrl, reply [MBOX_WORDS];
  longint t0;
  bit wiped;

  initial begin
    for (int e = 0; e < N; e++) shm_ps_req[e] = '0;
    build_images();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // a full 64 KiB TA into enclave 0
    t0 = cycle;
    open_session(0, 1'b1, st);
    $display("open session with a 64 KiB load: %0d cycles", cycle - t0);
    check(where[0] == 0 && boots_ok[0] == 1, "64 KiB TA loaded intact into enclave 0");

    // invoke through the mailbox only
    invoke_inc(0, 41);

    // invoke with a 16-byte result in shared memory
    select(0);
    comm_send(OP_INVOKE_COMMAND, sess[0], 2, 32'h100, 32'hABC0, ctrl, reply);
    check(ctrl[2:0] == 3'b010 && reply[MB_GP0] == 0, "shared-memory invoke answered");
    for (int k = 0; k < 4; k++) begin
      shm_ps_read(0, 32'h100 + 4*k, rd);
      check(rd == 32'hABC0 + 32'(k), $sformatf("shared memory word %0d seen by the REE", k));
    end
    n_invoke_shm++;

    // reopen the loaded TA: a hit, no second load
    t0 = cycle;
    open_session(0, 1'b1, st);
    $display("open session on a loaded TA: %0d cycles", cycle - t0);
    check(st[3:0] == MA_ST_HIT && boots_ok[0] == 1, "reopen hits without reloading");

    // wrong session id refused
    select(0);
    comm_send(OP_INVOKE_COMMAND, sess[0] + 100, 1, 1, 0, ctrl, reply);
    check(ctrl[2] == 1'b1, "wrong session id refused");
    if (ctrl[2]) n_reject++;

    // TA1 with the doorbell rung before the Manager Agent has loaded it
    open_session(1, 1'b0, st);
    check(where[1] == 1 && st[3:0] == MA_ST_LOADED, "TA1 in enclave 1");
    if (wait_ma_cycles > 0) n_wait_ma++;
    open_session(2, 1'b1, st);
    open_session(3, 1'b1, st);
    check(where[2] == 2 && where[3] == 3, "TA2, TA3 in enclaves 2, 3");

    // no fifth enclave
    ma_request(4, 1'b1, st);
    check(st[3:0] == MA_ST_ERR_FULL, "fifth TA refused while all enclaves are taken");

    // every TA answers for itself
    for (int k = 1; k < 4; k++) invoke_inc(k, 32'(1000 * k));
    for (int e = 0; e < N; e++) check(boots_ok[e] == 1 && boots_bad[e] == 0, $sformatf("enclave %0d booted once", e));

    // destroy enclave 2
    close_session(2);
    wait_free(2);
    check(!cpu_rst_n[2], "enclave 2 held in reset after close");
    wiped = 1'b1;
    for (int w = 0; w < TCMW; w++) if (dut.g_enclave[2].u_enclave.u_tcm.mem[w] != 0) wiped = 1'b0;
    for (int w = 0; w < MBOX_WORDS; w++) if (dut.u_comm.enc_mbox[2][w] != 0) wiped = 1'b0;
    check(wiped, "enclave 2 TCM and mailbox wiped");
    if (wiped) n_wipe_ok++;
    check(cpu_rst_n[0] && cpu_rst_n[1] && cpu_rst_n[3], "other enclaves keep running");

    // TA4 now fits, into enclave 2
    open_session(4, 1'b1, st);
    check(where[4] == 2 && boots_ok[2] == 2 && boots_bad[2] == 0, "TA4 loaded into freed enclave 2");
    invoke_inc(4, 7);
    invoke_inc(1, 8);

    // close everything
    close_session(0); close_session(1); close_session(3); close_session(4);
    for (int e = 0; e < N; e++) wait_free(e);
    check(cpu_rst_n == '0, "all enclaves in reset at the end");
    check(ddr.protocol_errors == 0, "DDR read protocol respected");

    // every mechanism must have happened
    check(n_load >= 5,        $sformatf("loads %0d", n_load));
    check(n_hit >= 1,         $sformatf("hits %0d", n_hit));
    check(n_full >= 1,        $sformatf("no-free-enclave refusals %0d", n_full));
    check(n_wait_ma >= 1,     $sformatf("waits for the Manager Agent %0d (%0d cycles)", n_wait_ma, wait_ma_cycles));
    check(n_invoke_mbox >= 1, $sformatf("mailbox invokes %0d", n_invoke_mbox));
    check(n_invoke_shm >= 1,  $sformatf("shared-memory invokes %0d", n_invoke_shm));
    check(n_reject >= 1,      $sformatf("rejected messages %0d", n_reject));
    check(n_destroy == 5,     $sformatf("destructions %0d", n_destroy));
    check(n_wipe_ok >= 1,     $sformatf("verified wipes %0d", n_wipe_ok));
    $display("loads=%0d hits=%0d full=%0d wait_ma=%0d invoke_mbox=%0d invoke_shm=%0d reject=%0d destroy=%0d",
             n_load, n_hit, n_full, n_wait_ma, n_invoke_mbox, n_invoke_shm, n_reject, n_destroy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
