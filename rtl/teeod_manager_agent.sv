// teeod_manager_agent: TEE Manager Agent, the bookkeeper and reset master of
// the enclaves.
//
// The rich OS writes, through an AXI4-Lite register port, the address and size
// of a TA binary in the contiguous-memory area and the TA's 128-bit UUID, then
// writes 1 to CTRL. The agent searches its loaded_tas list for the UUID:
//  * hit  - the TA already runs in an enclave: STATUS reads HIT at once;
//  * miss - it takes the lowest free enclave from enclaves_list, keeps that
//           enclave in reset, and hands the Loader Agent the source address
//           (addr_src), the size and the enclave's TCM address (addr_dest),
//           with a strt_cpy pulse. On done_cpy it records the UUID in
//           loaded_tas, marks the enclave taken, releases its reset and sets
//           STATUS to LOADED.
// In both cases ta_ready/ta_enclave tell the Communication Agent which
// enclave messages go to; ta_ready is low while a request is being served.
// Errors: no free enclave (ERR_FULL) or a size of 0 or above one TCM (ERR_SIZE).
//
// Destruction: when the Communication Agent reports (close_done) that an
// enclave finished a close-session message, the agent removes its UUID from
// loaded_tas, puts the enclave back in reset, wipes its mailbox (mbox_clear)
// and has the Loader zero its whole TCM (strt_cpy with clr_cpy), then frees it.
// Pending destructions run before the next REE request, without the REE
// waiting for them. Free enclaves are held in reset.
//
// Registers (byte offsets): 0x00 CTRL (W bit0 request), 0x04 STATUS (R:
// [3:0] ma_status_e, [11:8] enclave, [31:16] taken bitmap), 0x08 ADDR,
// 0x0C SIZE, 0x10-0x1C UUID (low word first), 0x20 CMA (cma_config). ADDR,
// SIZE, UUID and CTRL answer SLVERR while a request is in progress.
//
// From the paper: the two lists, the register set (address, size, UUID,
// status), the output names, the per-enclave reset, the wired signal to the
// Communication Agent, and the destruction steps. This design's own choices:
// offsets and codes, the lowest-free-first choice, the size check, holding
// free enclaves in reset, and that the TCM wipe goes through the Loader.
module teeod_manager_agent
  import teeod_pkg::*;
#(
  parameter int unsigned N_ENCLAVES = N_ENCLAVES_DEF,
  parameter int unsigned TCM_BYTES  = TCM_BYTES_DEF,
  // Loader-side address of enclave 0's TCM; enclave i's is TCM_BASE + i*TCM_BYTES
  parameter logic [31:0] TCM_BASE   = 32'h0
) (
  input  logic                          clk,        // s00_axi_aclk
  input  logic                          rst_n,      // s00_axi_aresetn
  input  axil_req_t                     s_axil_req, // S00_AXI
  output axil_rsp_t                     s_axil_rsp,
  // to / from the TA Loader Agent
  output logic [31:0]                   addr_src,
  output logic [31:0]                   addr_dest,
  output logic [31:0]                   size,
  output logic                          strt_cpy,
  output logic                          clr_cpy,
  input  logic                          done_cpy,
  output logic [15:0]                   cma_config,
  // to the enclaves
  output logic [N_ENCLAVES-1:0]         rst_enclave,
  // to / from the TEE Communication Agent
  output logic                          ta_ready,
  output logic [((N_ENCLAVES > 1) ? $clog2(N_ENCLAVES) : 1)-1:0] ta_enclave,
  input  logic [N_ENCLAVES-1:0]         close_done,
  output logic [N_ENCLAVES-1:0]         mbox_clear
);

  localparam int unsigned IW = (N_ENCLAVES > 1) ? $clog2(N_ENCLAVES) : 1;

  // STATUS reports the taken bitmap in 16 bits and the enclave in 4 bits.
  if (N_ENCLAVES < 1 || N_ENCLAVES > 16) begin : g_bad_n
    $error("teeod_manager_agent: N_ENCLAVES must be 1 to 16");
  end

  typedef struct packed {
    logic              valid;
    logic [UUID_W-1:0] uuid;
  } loaded_ta_t;

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_LOAD_WAIT, S_DESTROY_WAIT} state_e;

  state_e                  state_q;
  loaded_ta_t              loaded_tas [N_ENCLAVES];   // indexed by enclave
  logic [N_ENCLAVES-1:0]   taken_q;                   // enclaves_list: 1 = taken
  logic [N_ENCLAVES-1:0]   destroy_pend_q;
  logic [IW-1:0]           cur_q;                     // enclave being loaded / wiped
  logic                    req_q;
  ma_status_e              status_q;
  logic [31:0]             reg_addr_q, reg_size_q;
  logic [UUID_W-1:0]       reg_uuid_q;

  function automatic logic [31:0] tcm_addr(logic [IW-1:0] idx);
    return TCM_BASE + 32'(idx) * 32'(TCM_BYTES);
  endfunction

  // ---------------------------------------------------------------- register port
  logic        wr_en, rd_en, wr_err, rd_err;
  logic [7:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;
  logic        busy;

  teeod_axil_slave u_axil (
    .clk, .rst_n, .req(s_axil_req), .rsp(s_axil_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err,
    .rd_en, .rd_addr, .rd_data, .rd_err
  );

  assign busy = req_q || (state_q == S_LOOKUP) || (state_q == S_LOAD_WAIT);

  always_comb begin
    wr_err = 1'b0;
    unique case (wr_addr)
      MA_REG_CTRL, MA_REG_ADDR, MA_REG_SIZE,
      MA_REG_UUID0, MA_REG_UUID0 + 8'h4, MA_REG_UUID0 + 8'h8, MA_REG_UUID0 + 8'hC:
        wr_err = busy;
      MA_REG_CMA: wr_err = 1'b0;
      default:    wr_err = 1'b1;
    endcase
  end

  always_comb begin
    rd_err  = 1'b0;
    rd_data = '0;
    unique case (rd_addr)
      MA_REG_STATUS: rd_data = {16'(taken_q), 4'h0, 4'(ta_enclave), 4'h0, status_q};
      MA_REG_ADDR:   rd_data = reg_addr_q;
      MA_REG_SIZE:   rd_data = reg_size_q;
      MA_REG_UUID0:          rd_data = reg_uuid_q[31:0];
      MA_REG_UUID0 + 8'h4:   rd_data = reg_uuid_q[63:32];
      MA_REG_UUID0 + 8'h8:   rd_data = reg_uuid_q[95:64];
      MA_REG_UUID0 + 8'hC:   rd_data = reg_uuid_q[127:96];
      MA_REG_CMA:    rd_data = {16'h0, cma_config};
      default:       rd_err  = 1'b1;
    endcase
  end

  // ---------------------------------------------------------------- lookup
  logic          hit, any_free;
  logic [IW-1:0] hit_idx, free_idx, pend_idx;
  always_comb begin
    hit = 1'b0; hit_idx = '0;
    any_free = 1'b0; free_idx = '0;
    pend_idx = '0;
    for (int i = N_ENCLAVES - 1; i >= 0; i--) begin
      if (loaded_tas[i].valid && loaded_tas[i].uuid == reg_uuid_q) begin
        hit = 1'b1; hit_idx = IW'(i);
      end
      if (!taken_q[i]) begin
        any_free = 1'b1; free_idx = IW'(i);
      end
      if (destroy_pend_q[i]) pend_idx = IW'(i);
    end
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_IDLE;
      taken_q        <= '0;
      destroy_pend_q <= '0;
      cur_q          <= '0;
      req_q          <= 1'b0;
      status_q       <= MA_ST_IDLE;
      reg_addr_q     <= '0;
      reg_size_q     <= '0;
      reg_uuid_q     <= '0;
      cma_config     <= '0;
      addr_src       <= '0;
      addr_dest      <= '0;
      size           <= '0;
      strt_cpy       <= 1'b0;
      clr_cpy        <= 1'b0;
      rst_enclave    <= '1;
      ta_ready       <= 1'b0;
      ta_enclave     <= '0;
      mbox_clear     <= '0;
      for (int i = 0; i < N_ENCLAVES; i++) loaded_tas[i] <= '0;
    end else begin
      strt_cpy   <= 1'b0;
      mbox_clear <= '0;

      if (wr_en && !wr_err) begin
        unique case (wr_addr)
          MA_REG_CTRL: if (wr_data[0]) begin
            req_q    <= 1'b1;
            status_q <= MA_ST_BUSY;
            ta_ready <= 1'b0;
          end
          MA_REG_ADDR:         reg_addr_q          <= wr_data;
          MA_REG_SIZE:         reg_size_q          <= wr_data;
          MA_REG_UUID0:        reg_uuid_q[31:0]    <= wr_data;
          MA_REG_UUID0 + 8'h4: reg_uuid_q[63:32]   <= wr_data;
          MA_REG_UUID0 + 8'h8: reg_uuid_q[95:64]   <= wr_data;
          MA_REG_UUID0 + 8'hC: reg_uuid_q[127:96]  <= wr_data;
          MA_REG_CMA:          cma_config          <= wr_data[15:0];
          default: ;
        endcase
      end

      destroy_pend_q <= destroy_pend_q | close_done;

      unique case (state_q)
        S_IDLE: begin
          if (destroy_pend_q != '0) begin
            // tear down: forget the TA, reset the core, wipe mailbox and TCM
            cur_q                     <= pend_idx;
            destroy_pend_q[pend_idx]  <= 1'b0;
            loaded_tas[pend_idx].valid <= 1'b0;
            rst_enclave[pend_idx]     <= 1'b1;
            mbox_clear[pend_idx]      <= 1'b1;
            if (ta_enclave == pend_idx) ta_ready <= 1'b0;
            addr_dest <= tcm_addr(pend_idx);
            size      <= 32'(TCM_BYTES);
            clr_cpy   <= 1'b1;
            strt_cpy  <= 1'b1;
            state_q   <= S_DESTROY_WAIT;
          end else if (req_q) begin
            req_q   <= 1'b0;
            state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          state_q <= S_IDLE;
          if (hit) begin
            status_q   <= MA_ST_HIT;
            ta_enclave <= hit_idx;
            ta_ready   <= 1'b1;
          end else if (reg_size_q == 0 || reg_size_q > 32'(TCM_BYTES)) begin
            status_q <= MA_ST_ERR_SIZE;
          end else if (!any_free) begin
            status_q <= MA_ST_ERR_FULL;
          end else begin
            cur_q             <= free_idx;
            taken_q[free_idx] <= 1'b1;
            addr_src  <= reg_addr_q;
            addr_dest <= tcm_addr(free_idx);
            size      <= reg_size_q;
            clr_cpy   <= 1'b0;
            strt_cpy  <= 1'b1;
            state_q   <= S_LOAD_WAIT;
          end
        end
        S_LOAD_WAIT: if (done_cpy) begin
          loaded_tas[cur_q] <= '{valid: 1'b1, uuid: reg_uuid_q};
          rst_enclave[cur_q] <= 1'b0;        // RST down: the TA starts
          status_q   <= MA_ST_LOADED;
          ta_enclave <= cur_q;
          ta_ready   <= 1'b1;
          state_q    <= S_IDLE;
        end
        S_DESTROY_WAIT: if (done_cpy) begin
          taken_q[cur_q] <= 1'b0;
          clr_cpy        <= 1'b0;
          state_q        <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // a taken enclave with a loaded TA is out of reset; a free one is in reset
  for (genvar g = 0; g < N_ENCLAVES; g++) begin : g_chk
    a_free_in_reset: assert property (@(posedge clk) disable iff (!rst_n)
      !taken_q[g] |-> rst_enclave[g]);
    a_loaded_taken: assert property (@(posedge clk) disable iff (!rst_n)
      loaded_tas[g].valid |-> taken_q[g] && !rst_enclave[g]);
  end

endmodule
