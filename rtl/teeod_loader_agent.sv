// teeod_loader_agent: TA Loader Agent, the DMA that copies a TA binary from
// DDR into an enclave's private TCM.
//
// On a one-cycle trigger it latches the source address (addr_source, extended
// to a 48-bit AXI address by the 16 bits on din), the destination TCM byte
// address (addr_destiny) and the length in bytes (size, rounded up to whole
// 32-bit words). It then issues AXI4 INCR read bursts of 32-bit beats on its
// read master (the M00_AXI port, wired to the processing system's DDR port),
// and writes every returned beat through its BRAM port to consecutive TCM
// words, with no processor involved. A burst never runs past a
// BURST_BEATS*4-byte aligned boundary, so it never crosses a 4 KiB page. When
// the last word is written, done pulses for one cycle.
//
// With clear high at the trigger it reads nothing and writes zeros over the
// same range instead; the Manager Agent uses this to wipe a TCM when an enclave
// is destroyed.
//
// Timing: one burst outstanding at a time; each beat is written to BRAM in the
// cycle it is accepted (rready is held high while a burst is open). A clear
// writes one word per cycle.
//
// From the paper: the port names, the DMA from the contiguous memory area into
// the TCM without processor help, and done. This design's own choices: the bus
// widths, the burst length, the meaning of din (upper address bits), the clear
// mode, and that read errors are not reported (the data is written anyway).
module teeod_loader_agent
  import teeod_pkg::*;
#(
  parameter int unsigned BURST_BEATS = 16
) (
  input  logic        clk,            // s_axi_aclk
  input  logic        rst_n,          // s_axi_aresetn
  input  logic        trigger,
  input  logic        clear,
  input  logic [15:0] din,            // Din[15:0], upper source address bits
  input  logic [31:0] addr_source,
  input  logic [31:0] addr_destiny,
  input  logic [31:0] size,
  output logic        done,
  output logic        busy,
  output axi_rd_req_t m_axi_req,      // M00_AXI (read channels)
  input  axi_rd_rsp_t m_axi_rsp,
  output bram_req_t   bram_req        // BRAM_PORTA
);

  localparam int unsigned BB_W = $clog2(BURST_BEATS);

  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_CLEAR, S_DONE} state_e;
  state_e state_q;

  logic [AXI_ADDR_W-1:0] src_q;
  logic [31:0]           dst_q;
  logic [30:0]           words_q;     // words still to write
  logic [8:0]            beats_q;     // beats of the open burst

  // beats of the next burst: up to the aligned boundary, and no more than remain
  logic [8:0] room, next_beats;
  always_comb begin
    room       = 9'(BURST_BEATS) - 9'(src_q[BB_W+1:2]);
    next_beats = (31'(room) < words_q) ? room : 9'(words_q);
  end

  logic beat;
  assign beat = (state_q == S_R) && m_axi_rsp.rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      src_q   <= '0;
      dst_q   <= '0;
      words_q <= '0;
      beats_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (trigger) begin
          src_q   <= {din, addr_source[31:2], 2'b00};
          dst_q   <= {addr_destiny[31:2], 2'b00};
          words_q <= 31'((33'(size) + 33'd3) >> 2);
          if (size == 0)  state_q <= S_DONE;
          else if (clear) state_q <= S_CLEAR;
          else            state_q <= S_AR;
        end
        S_AR: if (m_axi_rsp.arready) begin
          beats_q <= next_beats;
          src_q   <= src_q + AXI_ADDR_W'({next_beats, 2'b00});
          state_q <= S_R;
        end
        S_R: if (beat) begin
          dst_q   <= dst_q + 32'd4;
          words_q <= words_q - 31'd1;
          beats_q <= beats_q - 9'd1;
          if (m_axi_rsp.rlast || beats_q == 9'd1)
            state_q <= (words_q == 31'd1) ? S_DONE : S_AR;
        end
        S_CLEAR: begin
          dst_q   <= dst_q + 32'd4;
          words_q <= words_q - 31'd1;
          if (words_q == 31'd1) state_q <= S_DONE;
        end
        S_DONE:  state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    m_axi_req         = '0;
    m_axi_req.arvalid = (state_q == S_AR);
    m_axi_req.araddr  = src_q;
    m_axi_req.arlen   = 8'(next_beats - 9'd1);
    m_axi_req.arsize  = 3'd2;     // 4-byte beats
    m_axi_req.arburst = 2'b01;    // INCR
    m_axi_req.rready  = (state_q == S_R);

    bram_req       = '0;
    bram_req.addr  = dst_q;
    if (beat) begin
      bram_req.en    = 1'b1;
      bram_req.we    = 4'hF;
      bram_req.wdata = m_axi_rsp.rdata;
    end else if (state_q == S_CLEAR) begin
      bram_req.en    = 1'b1;
      bram_req.we    = 4'hF;
      bram_req.wdata = '0;
    end
  end

  assign done = (state_q == S_DONE);
  assign busy = (state_q != S_IDLE);

  // the read address must stay stable until accepted
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_req.arvalid && !m_axi_rsp.arready |=> m_axi_req.arvalid && $stable(m_axi_req.araddr)
                                                 && $stable(m_axi_req.arlen));

endmodule
