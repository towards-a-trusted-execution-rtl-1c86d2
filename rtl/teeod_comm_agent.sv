// teeod_comm_agent: TEE Communication Agent, the mailbox hub between the rich
// OS (REE) and the enclaves.
//
// It holds one mailbox shared with the REE and one private mailbox per
// enclave. A mailbox is MBOX_WORDS 32-bit registers: operation_id, session_id,
// param_type, cmd_id and gp_params[0..7] (raw values or shared-memory
// pointers and sizes, as param_type says). Each enclave reaches only its own
// mailbox through its own AXI4-Lite port; the REE reaches only the shared one.
//
// A message goes like this:
//  1. The REE fills the shared mailbox and writes 1 to CTRL (doorbell).
//  2. The agent waits for the Manager Agent to point at the enclave that holds
//     the target TA (ta_ready / ta_enclave).
//  3. It validates the message: operation_id must be open, invoke or close;
//     invoke and close must carry the session id handed out at the enclave's
//     last open. A bad message is answered with the error bit and goes nowhere.
//     On open, the agent writes a fresh session id into session_id.
//  4. It copies the mailbox word by word into the enclave's mailbox and raises
//     that enclave's interrupt (irq, the INT line).
//  5. The TA reads the mailbox, writes its reply into the same registers and
//     clears the interrupt by writing 0 to its CTRL register.
//  6. The agent copies the enclave's mailbox back word by word, sets the done
//     bit for the REE and, after a close session, signals close_done so the
//     Manager Agent tears the enclave down.
// An enclave may write its mailbox only while its interrupt is pending; the
// REE may not write the shared mailbox while a message is in flight. Both are
// answered with SLVERR. mbox_clear wipes an enclave's mailbox, interrupt and
// session.
//
// Registers, both sides: 0x00 CTRL, then mailbox word i at 0x04 + 4*i.
// REE CTRL: W bit0 doorbell; R bit0 busy, bit1 done, bit2 error, [11:8] enclave.
// Enclave CTRL: R bit0 interrupt pending; W bit0 = 0 clears it.
// Timing: MBOX_WORDS cycles per copy, plus the time the enclave takes.
//
// From the paper: the mailbox registers, one mailbox and one interrupt per
// enclave, waiting for the Manager Agent, copy in, interrupt, wait for the
// clear, copy back, the reply in the same registers and session ids written
// by this agent on open. This design's own choices: the register map and
// codes, what validation checks, one session per enclave, and the
// write-permission rules.
module teeod_comm_agent
  import teeod_pkg::*;
#(
  parameter int unsigned N_ENCLAVES = N_ENCLAVES_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  axil_req_t                     s_ree_req,                // S00_AXI
  output axil_rsp_t                     s_ree_rsp,
  input  axil_req_t                     s_enc_req [N_ENCLAVES],   // enclave ports
  output axil_rsp_t                     s_enc_rsp [N_ENCLAVES],
  output logic [N_ENCLAVES-1:0]         irq,                      // INT per enclave
  input  logic                          ta_ready,
  input  logic [((N_ENCLAVES > 1) ? $clog2(N_ENCLAVES) : 1)-1:0] ta_enclave,
  input  logic [N_ENCLAVES-1:0]         mbox_clear,
  output logic [N_ENCLAVES-1:0]         close_done
);

  localparam int unsigned IW = (N_ENCLAVES > 1) ? $clog2(N_ENCLAVES) : 1;
  localparam int unsigned WW = $clog2(MBOX_WORDS);

  typedef enum logic [2:0] {S_IDLE, S_WAIT_MA, S_CHECK, S_COPY_IN, S_WAIT_ENC,
                            S_COPY_OUT, S_FINISH} state_e;

  state_e                state_q;
  logic [31:0]           ree_mbox [MBOX_WORDS];
  logic [31:0]           enc_mbox [N_ENCLAVES][MBOX_WORDS];
  logic [N_ENCLAVES-1:0] sess_valid_q;
  logic [31:0]           sess_id_q [N_ENCLAVES];
  logic [31:0]           next_sid_q;
  logic [IW-1:0]         tgt_q;
  logic [WW-1:0]         word_q;
  logic                  done_q, err_q;
  logic                  close_q;    // message in flight is a close session

  // ---------------------------------------------------------------- REE port
  logic        r_wr_en, r_rd_en, r_wr_err, r_rd_err;
  logic [7:0]  r_wr_addr, r_rd_addr;
  logic [31:0] r_wr_data, r_rd_data;
  logic [3:0]  r_wr_strb;
  logic        busy;

  teeod_axil_slave u_ree (
    .clk, .rst_n, .req(s_ree_req), .rsp(s_ree_rsp),
    .wr_en(r_wr_en), .wr_addr(r_wr_addr), .wr_data(r_wr_data), .wr_strb(r_wr_strb),
    .wr_err(r_wr_err), .rd_en(r_rd_en), .rd_addr(r_rd_addr), .rd_data(r_rd_data),
    .rd_err(r_rd_err)
  );

  assign busy = (state_q != S_IDLE);

  // mailbox word index of a register offset; valid when 4 <= offset < 4+4*MBOX_WORDS
  function automatic logic in_mbox(logic [7:0] a);
    return a[1:0] == 2'b00 && a >= 8'h04 && a < 8'(4 + 4 * MBOX_WORDS);
  endfunction
  function automatic logic [WW-1:0] widx(logic [7:0] a);
    return WW'(a[7:2] - 6'd1);
  endfunction

  assign r_wr_err = busy || !(r_wr_addr == CA_REG_CTRL || in_mbox(r_wr_addr));

  always_comb begin
    r_rd_err  = 1'b0;
    r_rd_data = '0;
    if (r_rd_addr == CA_REG_CTRL)
      r_rd_data = {20'h0, 4'(tgt_q), 5'h0, err_q, done_q, busy};
    else if (in_mbox(r_rd_addr))
      r_rd_data = ree_mbox[widx(r_rd_addr)];
    else
      r_rd_err = 1'b1;
  end

  // ---------------------------------------------------------------- enclave ports
  logic [N_ENCLAVES-1:0] e_wr_en, e_wr_err, e_rd_en, e_rd_err;
  logic [7:0]            e_wr_addr [N_ENCLAVES];
  logic [7:0]            e_rd_addr [N_ENCLAVES];
  logic [31:0]           e_wr_data [N_ENCLAVES];
  logic [31:0]           e_rd_data [N_ENCLAVES];
  logic [3:0]            e_wr_strb [N_ENCLAVES];

  for (genvar g = 0; g < N_ENCLAVES; g++) begin : g_enc
    teeod_axil_slave u_enc (
      .clk, .rst_n, .req(s_enc_req[g]), .rsp(s_enc_rsp[g]),
      .wr_en(e_wr_en[g]), .wr_addr(e_wr_addr[g]), .wr_data(e_wr_data[g]),
      .wr_strb(e_wr_strb[g]), .wr_err(e_wr_err[g]),
      .rd_en(e_rd_en[g]), .rd_addr(e_rd_addr[g]), .rd_data(e_rd_data[g]),
      .rd_err(e_rd_err[g])
    );
    // writes only while a message is being served (interrupt pending)
    assign e_wr_err[g] = !irq[g] || !(e_wr_addr[g] == CA_REG_CTRL || in_mbox(e_wr_addr[g]));
    always_comb begin
      e_rd_err[g]  = 1'b0;
      e_rd_data[g] = '0;
      if (e_rd_addr[g] == CA_REG_CTRL)  e_rd_data[g] = {31'h0, irq[g]};
      else if (in_mbox(e_rd_addr[g]))   e_rd_data[g] = enc_mbox[g][widx(e_rd_addr[g])];
      else                              e_rd_err[g]  = 1'b1;
    end
  end

  // ---------------------------------------------------------------- validation
  logic [31:0] op;
  logic        msg_ok;
  assign op = ree_mbox[MB_OPERATION_ID];
  always_comb begin
    unique case (op)
      OP_OPEN_SESSION:   msg_ok = 1'b1;
      OP_INVOKE_COMMAND,
      OP_CLOSE_SESSION:  msg_ok = sess_valid_q[tgt_q] &&
                                  ree_mbox[MB_SESSION_ID] == sess_id_q[tgt_q];
      default:           msg_ok = 1'b0;
    endcase
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      tgt_q        <= '0;
      word_q       <= '0;
      done_q       <= 1'b0;
      err_q        <= 1'b0;
      close_q      <= 1'b0;
      irq          <= '0;
      close_done   <= '0;
      sess_valid_q <= '0;
      next_sid_q   <= 32'd1;
      for (int w = 0; w < MBOX_WORDS; w++) ree_mbox[w] <= '0;
      for (int e = 0; e < N_ENCLAVES; e++) begin
        sess_id_q[e] <= '0;
        for (int w = 0; w < MBOX_WORDS; w++) enc_mbox[e][w] <= '0;
      end
    end else begin
      close_done <= '0;

      // REE writes
      if (r_wr_en && !r_wr_err) begin
        if (r_wr_addr == CA_REG_CTRL) begin
          if (r_wr_data[0]) begin
            done_q  <= 1'b0;
            err_q   <= 1'b0;
            state_q <= S_WAIT_MA;
          end
        end else begin
          ree_mbox[widx(r_wr_addr)] <= r_wr_data;
        end
      end

      // enclave writes
      for (int e = 0; e < N_ENCLAVES; e++) begin
        if (e_wr_en[e] && !e_wr_err[e]) begin
          if (e_wr_addr[e] == CA_REG_CTRL) begin
            if (!e_wr_data[e][0]) irq[e] <= 1'b0;
          end else begin
            enc_mbox[e][widx(e_wr_addr[e])] <= e_wr_data[e];
          end
        end
        if (mbox_clear[e]) begin
          irq[e]          <= 1'b0;
          sess_valid_q[e] <= 1'b0;
          for (int w = 0; w < MBOX_WORDS; w++) enc_mbox[e][w] <= '0;
        end
      end

      unique case (state_q)
        S_IDLE: ;
        S_WAIT_MA: if (ta_ready) begin
          tgt_q   <= ta_enclave;
          state_q <= S_CHECK;
        end
        S_CHECK: begin
          word_q  <= '0;
          close_q <= (op == OP_CLOSE_SESSION);
          if (!msg_ok) begin
            err_q   <= 1'b1;
            done_q  <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            if (op == OP_OPEN_SESSION) begin
              ree_mbox[MB_SESSION_ID] <= next_sid_q;
              sess_id_q[tgt_q]        <= next_sid_q;
              sess_valid_q[tgt_q]     <= 1'b1;
              next_sid_q              <= next_sid_q + 32'd1;
            end
            state_q <= S_COPY_IN;
          end
        end
        S_COPY_IN: begin
          enc_mbox[tgt_q][word_q] <= ree_mbox[word_q];
          word_q <= word_q + WW'(1);
          if (word_q == WW'(MBOX_WORDS - 1)) begin
            irq[tgt_q] <= 1'b1;
            state_q    <= S_WAIT_ENC;
          end
        end
        S_WAIT_ENC: begin
          word_q <= '0;
          if (!irq[tgt_q]) state_q <= S_COPY_OUT;
        end
        S_COPY_OUT: begin
          ree_mbox[word_q] <= enc_mbox[tgt_q][word_q];
          word_q <= word_q + WW'(1);
          if (word_q == WW'(MBOX_WORDS - 1)) state_q <= S_FINISH;
        end
        S_FINISH: begin
          if (close_q) begin
            close_done[tgt_q]   <= 1'b1;
            sess_valid_q[tgt_q] <= 1'b0;
          end
          done_q  <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // only the enclave being served may have its interrupt raised
  a_one_irq: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(irq));

endmodule
