// teeod_tb_ta_cpu: behavioural stand-in for an enclave's soft processor
// running a trusted application, for simulation only.
//
// Boot (each time cpu_rst_n rises): reads the TA image from its TCM and
// verifies it. Image format used by the testbenches: word 0 = TA kind,
// word 1 = image length in words, word 2 = sum of words 3..len-1, the rest
// payload. A good image counts in boots_ok, a bad one in boots_bad.
// Service (each time cpu_irq is high): reads the whole mailbox, acts on
// operation_id, writes the reply into the mailbox and clears the interrupt:
//   open / close session  -> gp_params[0] = 0 (success)
//   invoke, cmd_id 1      -> gp_params[0] = gp_params[0] + 1 (increment TA)
//   invoke, cmd_id 2      -> writes a 16-byte array to shared memory at byte
//                            offset gp_params[0]; element k = gp_params[1] + k;
//                            gp_params[0] = 0
//   invoke, other cmd_id  -> gp_params[0] = 32'hFFFF_0006 (bad command)
//   gp_params[7] = TA kind from the image, so the host can tell who answered.
// A TA whose kind is 200 or more stands in for the wallet TA instead: every
// invoke answers gp_params[0] = digest, where digest = cmd_id*31 + gp_params[0]
// (the PIN) + the sum of the gp_params[2]/4 shared-memory words starting at
// byte offset gp_params[1]; for cmd_id 5 and 6 it also writes eight result
// words, digest + k, at shared-memory byte offset gp_params[3].
module teeod_tb_ta_cpu
  import teeod_pkg::*;
(
  input  logic        clk,
  input  logic        cpu_rst_n,
  input  logic        cpu_irq,
  output bram_req_t   tcm_req,
  input  logic [31:0] tcm_rdata,
  output bram_req_t   shm_req,
  input  logic [31:0] shm_rdata,
  output axil_req_t   mbox_req,
  input  axil_rsp_t   mbox_rsp,
  output int          boots_ok,
  output int          boots_bad,
  output int          served
);
  teeod_tb_axil_master mb (.clk, .req(mbox_req), .rsp(mbox_rsp));

  logic [31:0] kind;

  task automatic tcm_read(input int word, output logic [31:0] d);
    @(negedge clk) tcm_req = '{en: 1'b1, we: 4'h0, addr: 32'(4*word), wdata: '0};
    @(negedge clk) tcm_req = '0;
    d = tcm_rdata;
  endtask

  task automatic shm_write(input int byte_off, input logic [31:0] d);
    @(negedge clk) shm_req = '{en: 1'b1, we: 4'hF, addr: 32'(byte_off), wdata: d};
    @(negedge clk) shm_req = '0;
  endtask

  task automatic boot();
    logic [31:0] len, sum, want, d;
    tcm_read(0, kind);
    tcm_read(1, len);
    tcm_read(2, want);
    sum = 0;
    if (len > 32'(TCM_BYTES_DEF / 4)) len = 32'(TCM_BYTES_DEF / 4);
    for (int w = 3; w < int'(len); w++) begin
      tcm_read(w, d);
      sum += d;
    end
    if (sum == want && len >= 3) boots_ok++; else boots_bad++;
  endtask

  task automatic shm_read(input int byte_off, output logic [31:0] d);
    @(negedge clk) shm_req = '{en: 1'b1, we: 4'h0, addr: 32'(byte_off), wdata: '0};
    @(negedge clk) shm_req = '0;
    d = shm_rdata;
  endtask

  task automatic serve();
    logic [31:0] m [MBOX_WORDS];
    logic [1:0]  r;
    for (int w = 0; w < MBOX_WORDS; w++) mb.read(32'(4 + 4*w), m[w], r);
    if (m[MB_OPERATION_ID] == OP_INVOKE_COMMAND && kind >= 200) begin
      logic [31:0] dg, d;
      dg = m[MB_CMD_ID] * 31 + m[MB_GP0];
      for (int k = 0; k < int'(m[MB_GP0+2]) / 4; k++) begin
        shm_read(int'(m[MB_GP0+1]) + 4*k, d);
        dg += d;
      end
      if (m[MB_CMD_ID] == 5 || m[MB_CMD_ID] == 6)
        for (int k = 0; k < 8; k++) shm_write(int'(m[MB_GP0+3]) + 4*k, dg + 32'(k));
      m[MB_GP0] = dg;
    end else
    unique case (m[MB_OPERATION_ID])
      OP_INVOKE_COMMAND:
        if (m[MB_CMD_ID] == 1) m[MB_GP0] = m[MB_GP0] + 1;
        else if (m[MB_CMD_ID] == 2) begin
          for (int k = 0; k < 4; k++) shm_write(int'(m[MB_GP0]) + 4*k, m[MB_GP0+1] + 32'(k));
          m[MB_GP0] = 0;
        end else m[MB_GP0] = 32'hFFFF_0006;
      default: m[MB_GP0] = 0;
    endcase
    mb.write(32'(4 + 4*MB_GP0), m[MB_GP0], r);
    mb.write(32'(4 + 4*(MB_GP0+7)), kind, r);
    mb.write(CA_REG_CTRL, 32'h0, r);
    served++;
  endtask

  initial begin
    tcm_req = '0; shm_req = '0;
    boots_ok = 0; boots_bad = 0; served = 0;
    wait (cpu_rst_n === 1'b0);        // start from the system reset
    forever begin
      wait (cpu_rst_n === 1'b1);
      boot();
      while (cpu_rst_n) begin
        @(posedge clk);
        if (cpu_irq && cpu_rst_n) serve();
      end
    end
  end
endmodule
