// teeod_tb_config_run: runs one fabric of N_ENCLAVES enclaves through a short
// flow, for the configuration test. It loads one small TA per enclave (each
// must land in its own enclave), checks that one more TA is refused, invokes
// every TA through the mailbox and checks that the right TA answered, closes
// every session and waits until all enclaves are free. Reports its counts on
// the checks/failures outputs and raises finished at the end.
module teeod_tb_config_run
  import teeod_pkg::*;
#(
  parameter int unsigned N_ENCLAVES = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int unsigned N = N_ENCLAVES;
  localparam int unsigned TA_WORDS = 64;
  localparam logic [AXI_ADDR_W-1:0] DDR_BASE = 48'h0000_6000_0000;

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

  teeod_top #(.N_ENCLAVES(N)) dut (.*);
  teeod_tb_axil_master ree_ma   (.clk, .req(s_ma_axil_req),   .rsp(s_ma_axil_rsp));
  teeod_tb_axil_master ree_comm (.clk, .req(s_comm_axil_req), .rsp(s_comm_axil_rsp));
  teeod_tb_ddr #(.WORDS((N + 1) * TA_WORDS), .BASE(DDR_BASE)) ddr (.clk, .rst_n, .req(m_ld_axi_req), .rsp(m_ld_axi_rsp));

  for (genvar g = 0; g < N; g++) begin : g_cpu
    teeod_tb_ta_cpu u_cpu (
      .clk, .cpu_rst_n(cpu_rst_n[g]), .cpu_irq(cpu_irq[g]),
      .tcm_req(cpu_tcm_req[g]), .tcm_rdata(cpu_tcm_rdata[g]),
      .shm_req(cpu_shm_req[g]), .shm_rdata(cpu_shm_rdata[g]),
      .mbox_req(s_cpu_mbox_req[g]), .mbox_rsp(s_cpu_mbox_rsp[g]),
      .boots_ok(boots_ok[g]), .boots_bad(boots_bad[g]), .served(served[g])
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (%0d enclaves): %s", N, what); end
  endtask

  logic [1:0]   resp;
  logic [127:0] uuid [N + 1];
  logic [31:0]  sess [N + 1];

  task automatic request(input int k, output logic [31:0] st);
    ree_ma.write(MA_REG_ADDR, DDR_BASE[31:0] + 32'(4 * k * TA_WORDS), resp);
    ree_ma.write(MA_REG_SIZE, 4 * TA_WORDS, resp);
    for (int i = 0; i < 4; i++) ree_ma.write(32'(MA_REG_UUID0) + 32'(4*i), uuid[k][32*i +: 32], resp);
    ree_ma.write(MA_REG_CMA, 32'(DDR_BASE[47:32]), resp);
    ree_ma.write(MA_REG_CTRL, 32'h1, resp);
    do ree_ma.read(MA_REG_STATUS, st, resp); while (st[3:0] == MA_ST_BUSY);
  endtask

  task automatic send(input logic [31:0] op, input logic [31:0] sid, input logic [31:0] cmd,
                      input logic [31:0] gp0, output logic [31:0] ctrl, output logic [31:0] reply [MBOX_WORDS]);
    logic [31:0] m [MBOX_WORDS];
    for (int w = 0; w < MBOX_WORDS; w++) m[w] = 0;
    m[MB_OPERATION_ID] = op; m[MB_SESSION_ID] = sid; m[MB_CMD_ID] = cmd; m[MB_GP0] = gp0;
    for (int w = 0; w < MBOX_WORDS; w++) ree_comm.write(32'(4 + 4*w), m[w], resp);
    ree_comm.write(CA_REG_CTRL, 32'h1, resp);
    do ree_comm.read(CA_REG_CTRL, ctrl, resp); while (ctrl[0]);
    for (int w = 0; w < MBOX_WORDS; w++) ree_comm.read(32'(4 + 4*w), reply[w], resp);
  endtask

  logic [31:0] st, ctrl, reply [MBOX_WORDS];

  initial begin
    checks = 0; failures = 0; finished = 1'b0;
    for (int e = 0; e < N; e++) shm_ps_req[e] = '0;
    for (int k = 0; k <= N; k++) begin
      logic [31:0] sum;
      uuid[k] = {$urandom, $urandom, $urandom, 32'(k)};
      ddr.mem[k*TA_WORDS + 0] = 32'(100 + k);
      ddr.mem[k*TA_WORDS + 1] = TA_WORDS;
      sum = 0;
      for (int w = 3; w < TA_WORDS; w++) begin
        ddr.mem[k*TA_WORDS + w] = $urandom;
        sum += ddr.mem[k*TA_WORDS + w];
      end
      ddr.mem[k*TA_WORDS + 2] = sum;
    end
    wait (rst_n);
    for (int k = 0; k < N; k++) begin
      request(k, st);
      check(st[3:0] == MA_ST_LOADED && int'(st[11:8]) == k, $sformatf("TA%0d in enclave %0d", k, k));
      send(OP_OPEN_SESSION, 0, 0, 0, ctrl, reply);
      sess[k] = reply[MB_SESSION_ID];
      check(ctrl[2:0] == 3'b010 && reply[MB_GP0+7] == 32'(100 + k), $sformatf("TA%0d open", k));
    end
    request(N, st);
    check(st[3:0] == MA_ST_ERR_FULL, "one TA more than enclaves is refused");
    for (int k = 0; k < N; k++) begin
      request(k, st);
      check(st[3:0] == MA_ST_HIT, $sformatf("TA%0d hit", k));
      send(OP_INVOKE_COMMAND, sess[k], 1, 32'(10 * k), ctrl, reply);
      check(ctrl[2:0] == 3'b010 && reply[MB_GP0] == 32'(10 * k + 1) && reply[MB_GP0+7] == 32'(100 + k),
            $sformatf("TA%0d answers its invoke", k));
      send(OP_CLOSE_SESSION, sess[k], 0, 0, ctrl, reply);
      check(ctrl[2:0] == 3'b010, $sformatf("TA%0d closed", k));
    end
    do begin
      repeat (500) @(negedge clk);
      ree_ma.read(MA_REG_STATUS, st, resp);
    end while (st[31:16] != 16'h0);
    check(cpu_rst_n == '0, "all enclaves destroyed");
    check(ddr.protocol_errors == 0, "DDR read protocol respected");
    finished = 1'b1;
  end
endmodule
