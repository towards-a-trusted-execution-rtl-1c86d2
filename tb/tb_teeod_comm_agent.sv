// tb_teeod_comm_agent: self-checking test of the TEE Communication Agent with
// two enclaves. AXI4-Lite masters play the rich OS and the two enclave
// processors; the Manager Agent's answer (ta_ready/ta_enclave) is driven here.
// The enclave model behaves like the increment test TA: on its interrupt it
// reads the whole mailbox, checks it against what the REE sent, replies with
// gp_params[0]+1 and a marker in gp_params[1], then clears the interrupt.
// Checked: waiting for the Manager Agent, session id assignment, message and
// reply contents, the copy timing, routing to the right enclave only,
// rejection of bad operation ids and wrong session ids, write permissions on
// both sides, close_done after a close, and mailbox wiping.
module tb_teeod_comm_agent;
  import teeod_pkg::*;

  localparam int unsigned N = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  axil_req_t s_ree_req;
  axil_rsp_t s_ree_rsp;
  axil_req_t s_enc_req [N];
  axil_rsp_t s_enc_rsp [N];
  logic [N-1:0] irq, mbox_clear = '0, close_done;
  logic ta_ready = 1'b0;
  logic ta_enclave = 1'b0;

  teeod_comm_agent #(.N_ENCLAVES(N)) dut (.*);
  teeod_tb_axil_master ree  (.clk, .req(s_ree_req),    .rsp(s_ree_rsp));
  teeod_tb_axil_master enc0 (.clk, .req(s_enc_req[0]), .rsp(s_enc_rsp[0]));
  teeod_tb_axil_master enc1 (.clk, .req(s_enc_req[1]), .rsp(s_enc_rsp[1]));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // what the REE sent last, for the enclave model to compare with
  logic [31:0] sent [MBOX_WORDS];
  int served [N] = '{0, 0};
  int closes [N] = '{0, 0};
  longint irq_rise_cycle, doorbell_cycle, cycle = 0;
  always @(negedge clk) for (int e = 0; e < N; e++) if (close_done[e]) closes[e]++;
  always @(posedge clk) begin
    cycle++;
    if (irq != 0 && irq_rise_cycle == 0) irq_rise_cycle = cycle;
  end

  task automatic serve(input int e);
    logic [31:0] m [MBOX_WORDS];
    logic [31:0] d;
    logic [1:0]  r;
    for (int w = 0; w < MBOX_WORDS; w++) begin
      if (e == 0) enc0.read(32'(4 + 4*w), d, r); else enc1.read(32'(4 + 4*w), d, r);
      m[w] = d;
    end
    for (int w = 0; w < MBOX_WORDS; w++)
      if (w != MB_SESSION_ID || sent[MB_OPERATION_ID] != OP_OPEN_SESSION)
        check(m[w] == sent[w], $sformatf("enclave %0d mailbox word %0d", e, w));
    if (e == 0) begin
      enc0.write(32'(4 + 4*MB_GP0), m[MB_GP0] + 1, r);
      enc0.write(32'(4 + 4*(MB_GP0+1)), 32'hE0, r);
      enc0.write(CA_REG_CTRL, 32'h0, r);
    end else begin
      enc1.write(32'(4 + 4*MB_GP0), m[MB_GP0] + 1, r);
      enc1.write(32'(4 + 4*(MB_GP0+1)), 32'hE1, r);
      enc1.write(CA_REG_CTRL, 32'h0, r);
    end
    served[e]++;
  endtask

  initial begin
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (irq[0]) serve(0);
      if (irq[1]) serve(1);
    end
  end

  logic [1:0]  resp;
  logic [31:0] rd;

  // send one message; returns the REE CTRL word at the end and the reply
  task automatic send(input logic [31:0] op, input logic [31:0] sid, input logic [31:0] cmd,
                      input logic [31:0] gp0, output logic [31:0] ctrl, output logic [31:0] reply [MBOX_WORDS]);
    sent[MB_OPERATION_ID] = op;
    sent[MB_SESSION_ID]   = sid;
    sent[MB_PARAM_TYPE]   = 32'h0000_0011;
    sent[MB_CMD_ID]       = cmd;
    for (int i = 0; i < N_GP_PARAMS; i++) sent[MB_GP0 + i] = (i == 0) ? gp0 : $urandom;
    for (int w = 0; w < MBOX_WORDS; w++) ree.write(32'(4 + 4*w), sent[w], resp);
    irq_rise_cycle = 0;
    ree.write(CA_REG_CTRL, 32'h1, resp);
    doorbell_cycle = cycle;
    do ree.read(CA_REG_CTRL, ctrl, resp); while (ctrl[0]);
    for (int w = 0; w < MBOX_WORDS; w++) ree.read(32'(4 + 4*w), reply[w], resp);
  endtask

  logic [31:0] ctrl, reply [MBOX_WORDS], sid;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // an enclave may not write its mailbox without a message
    enc0.write(32'h4, 32'h1234, resp);
    check(resp == AXI_SLVERR, "enclave write refused while idle");

    // doorbell before the Manager Agent answers: the agent waits
    fork
      send(OP_OPEN_SESSION, 32'h0, 32'h0, 32'd41, ctrl, reply);
      begin
        repeat (40) @(negedge clk);
        check(irq == 0, "no interrupt before the Manager Agent answers");
        ree.write(32'h4, 32'h9, resp);
        check(resp == AXI_SLVERR, "REE mailbox locked while busy");
        ta_enclave = 1'b1; ta_ready = 1'b1;
      end
    join
    sid = reply[MB_SESSION_ID];
    check(ctrl[2:0] == 3'b010 && ctrl[11:8] == 1, "open done without error, enclave 1");
    check(sid == 1, "first session id is 1");
    check(served[1] == 1 && served[0] == 0, "open served by enclave 1 only");
    check(reply[MB_GP0] == 42 && reply[MB_GP0+1] == 32'hE1, "reply copied back from enclave 1");
    check(irq_rise_cycle - doorbell_cycle >= MBOX_WORDS, "copy-in takes one cycle per word");

    // invoke with the right session
    send(OP_INVOKE_COMMAND, sid, 32'd5, 32'd1000, ctrl, reply);
    check(ctrl[2:0] == 3'b010 && reply[MB_GP0] == 1001 && served[1] == 2, "invoke served");
    check(reply[MB_CMD_ID] == 5 && reply[MB_SESSION_ID] == sid, "cmd_id and session kept");

    // wrong session, bad operation: refused, enclave not bothered
    send(OP_INVOKE_COMMAND, sid + 7, 32'd5, 32'd1, ctrl, reply);
    check(ctrl[2:0] == 3'b110 && served[1] == 2, "wrong session id refused");
    send(32'd9, sid, 32'd5, 32'd1, ctrl, reply);
    check(ctrl[2:0] == 3'b110 && served[1] == 2, "bad operation_id refused");

    // open a session on enclave 0 too
    ta_enclave = 1'b0;
    send(OP_OPEN_SESSION, 32'h0, 32'h0, 32'd7, ctrl, reply);
    check(reply[MB_SESSION_ID] == 2 && served[0] == 1 && reply[MB_GP0+1] == 32'hE0, "second session on enclave 0");
    // enclave 1's session id is not valid on enclave 0
    send(OP_INVOKE_COMMAND, sid, 32'd1, 32'd1, ctrl, reply);
    check(ctrl[2] && served[0] == 1, "session of enclave 1 refused on enclave 0");

    // enclave 0 cannot see enclave 1's message
    enc0.read(32'(4 + 4*MB_GP0), rd, resp);
    check(rd == 8, "enclave 0 mailbox holds only its own message");

    // close on enclave 1
    ta_enclave = 1'b1;
    send(OP_CLOSE_SESSION, sid, 32'h0, 32'd0, ctrl, reply);
    repeat (2) @(negedge clk);
    check(ctrl[2:0] == 3'b010 && closes[1] == 1 && closes[0] == 0,
          $sformatf("close_done for enclave 1 (ctrl %h closes %0d %0d)", ctrl, closes[0], closes[1]));
    send(OP_INVOKE_COMMAND, sid, 32'd5, 32'd1, ctrl, reply);
    check(ctrl[2], "session closed: invoke refused");

    // wipe enclave 1's mailbox
    @(negedge clk) mbox_clear = 2'b10;
    @(negedge clk) mbox_clear = 2'b00;
    enc1.read(32'(4 + 4*MB_GP0), rd, resp);
    check(rd == 0, "mailbox wiped");
    enc0.read(32'(4 + 4*MB_GP0), rd, resp);
    check(rd == 8, "other mailbox untouched");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
