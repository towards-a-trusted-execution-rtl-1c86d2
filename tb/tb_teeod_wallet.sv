// tb_teeod_wallet: the Bitcoin-wallet client flow over the full-size fabric.
//
// The wallet client opens a session, invokes one command and closes the
// session on every run, so every run loads the wallet TA into an enclave and
// destroys the enclave afterwards. This test runs the six wallet commands in
// that way: 1 check for a master key, 2 new key, 3 key from a mnemonic (the
// mnemonic passed in shared memory), 5 sign a transaction (transaction in, a
// 32-byte result out through shared memory), 6 get the address (32 bytes out),
// 4 erase the key. Each command carries a 4-digit PIN in gp_params[0]. The TA
// is the behavioural wallet stand-in of teeod_tb_ta_cpu, which answers a
// digest of what it received; this test computes the same digest from its own
// data, so it checks that command, PIN and shared-memory data reach the
// enclave and the results come back. The wallet binary's size is not
// published; 48 KiB is used here.
module tb_teeod_wallet;
  import teeod_pkg::*;

  localparam int unsigned N    = N_ENCLAVES_DEF;
  localparam int unsigned TCMW = TCM_BYTES_DEF / 4;
  localparam int unsigned TA_BYTES = 48 * 1024;
  localparam logic [AXI_ADDR_W-1:0] DDR_BASE = 48'h0000_7800_0000;

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
  teeod_tb_ddr #(.WORDS(TCMW), .BASE(DDR_BASE)) ddr (.clk, .rst_n, .req(m_ld_axi_req), .rsp(m_ld_axi_rsp));

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
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] uuid;
  logic [1:0]   resp;

  task automatic build_image();
    logic [31:0] sum;
    sum = 0;
    uuid = {$urandom, $urandom, $urandom, $urandom};
    ddr.mem[0] = 32'd200;                  // wallet TA kind
    ddr.mem[1] = 32'(TA_BYTES / 4);
    for (int w = 3; w < TCMW; w++) begin
      ddr.mem[w] = $urandom;
      if (w < TA_BYTES / 4) sum += ddr.mem[w];
    end
    ddr.mem[2] = sum;
  endtask

  task automatic shm_write(input int e, input int byte_off, input logic [31:0] d);
    @(negedge clk) shm_ps_req[e] = '{en: 1'b1, we: 4'hF, addr: 32'(byte_off), wdata: d};
    @(negedge clk) shm_ps_req[e] = '0;
  endtask
  task automatic shm_read(input int e, input int byte_off, output logic [31:0] d);
    @(negedge clk) shm_ps_req[e] = '{en: 1'b1, we: 4'h0, addr: 32'(byte_off), wdata: '0};
    @(negedge clk) shm_ps_req[e] = '0;
    d = shm_ps_rdata[e];
  endtask

  task automatic comm_send(input logic [31:0] m [MBOX_WORDS],
                           output logic [31:0] ctrl, output logic [31:0] reply [MBOX_WORDS]);
    for (int w = 0; w < MBOX_WORDS; w++) ree_comm.write(32'(4 + 4*w), m[w], resp);
    ree_comm.write(CA_REG_CTRL, 32'h1, resp);
    do ree_comm.read(CA_REG_CTRL, ctrl, resp); while (ctrl[0]);
    for (int w = 0; w < MBOX_WORDS; w++) ree_comm.read(32'(4 + 4*w), reply[w], resp);
  endtask

  // one run of the wallet client: open, invoke cmd, close
  task automatic wallet_run(input int cmd, input logic [31:0] pin, input int in_words);
    logic [31:0] st, ctrl, sid, digest, d;
    logic [31:0] m [MBOX_WORDS];
    logic [31:0] reply [MBOX_WORDS];
    int e;
    // open session: load the TA
    ree_ma.write(MA_REG_ADDR, DDR_BASE[31:0], resp);
    ree_ma.write(MA_REG_SIZE, TA_BYTES, resp);
    for (int i = 0; i < 4; i++) ree_ma.write(32'(MA_REG_UUID0) + 32'(4*i), uuid[32*i +: 32], resp);
    ree_ma.write(MA_REG_CMA, 32'(DDR_BASE[47:32]), resp);
    ree_ma.write(MA_REG_CTRL, 32'h1, resp);
    do ree_ma.read(MA_REG_STATUS, st, resp); while (st[3:0] == MA_ST_BUSY);
    check(st[3:0] == MA_ST_LOADED, $sformatf("command %0d: wallet TA freshly loaded", cmd));
    e = int'(st[11:8]);
    for (int w = 0; w < MBOX_WORDS; w++) m[w] = 0;
    m[MB_OPERATION_ID] = OP_OPEN_SESSION;
    comm_send(m, ctrl, reply);
    sid = reply[MB_SESSION_ID];
    check(ctrl[2:0] == 3'b010 && reply[MB_GP0+7] == 200, $sformatf("command %0d: session opened", cmd));
    // input data in shared memory (mnemonic or transaction)
    digest = 32'(cmd) * 31 + pin;
    for (int k = 0; k < in_words; k++) begin
      d = $urandom;
      shm_write(e, 32'h40 + 4*k, d);
      digest += d;
    end
    // invoke
    m[MB_OPERATION_ID] = OP_INVOKE_COMMAND;
    m[MB_SESSION_ID]   = sid;
    m[MB_PARAM_TYPE]   = 32'h0000_6551;    // value, memref in, memref size, memref out
    m[MB_CMD_ID]       = 32'(cmd);
    m[MB_GP0]          = pin;
    m[MB_GP0+1]        = 32'h40;
    m[MB_GP0+2]        = 32'(4 * in_words);
    m[MB_GP0+3]        = 32'h800;
    comm_send(m, ctrl, reply);
    check(ctrl[2:0] == 3'b010 && reply[MB_GP0] == digest,
          $sformatf("command %0d: PIN, command and %0d input words reached the TA", cmd, in_words));
    if (cmd == 5 || cmd == 6)
      for (int k = 0; k < 8; k++) begin
        shm_read(e, 32'h800 + 4*k, d);
        check(d == digest + 32'(k), $sformatf("command %0d: result word %0d in shared memory", cmd, k));
      end
    // close session: enclave destroyed
    m[MB_OPERATION_ID] = OP_CLOSE_SESSION;
    m[MB_CMD_ID]       = 0;
    comm_send(m, ctrl, reply);
    check(ctrl[2:0] == 3'b010, $sformatf("command %0d: session closed", cmd));
    do begin
      repeat (200) @(negedge clk);
      ree_ma.read(MA_REG_STATUS, st, resp);
    end while (st[31:16] != 16'h0);
    check(cpu_rst_n == '0, $sformatf("command %0d: enclave destroyed after the run", cmd));
  endtask

  initial begin
    for (int e = 0; e < N; e++) shm_ps_req[e] = '0;
    build_image();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // order of the published demonstration, then the two remaining commands
    wallet_run(1, 32'd1234, 0);      // is there a master key?
    wallet_run(3, 32'd1234, 56);     // master key from a 24-word mnemonic (224 bytes)
    wallet_run(5, 32'd1234, 64);     // sign a 256-byte transaction
    wallet_run(6, 32'd1234, 0);      // receiving address
    wallet_run(4, 32'd1234, 0);      // erase the key
    wallet_run(2, 32'd4321, 0);      // new key and mnemonic
    check(boots_bad[0] == 0 && boots_ok[0] == 6, "wallet TA image intact on all six loads");
    check(ddr.protocol_errors == 0, "DDR read protocol respected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
