// afdx_switch_ctrl: the switch controller, the finite state machine that
// runs the switch.
//
// It has two parts.
//
// Reception, one small state machine per receiving port. When the port's
// test unit sees a burst begin, the bytes (which go from the test unit
// straight to the memory's data input) are written to the port's local
// memory from address 0 (preamble and SFD included, so the frame leaves the
// switch exactly as it came in). A preamble error discards the burst. When
// the burst ends after a detected frame, its stored length is kept and the
// port buffer is marked full. A port holds one frame: a frame that starts
// while the buffer is still full is lost (overrun), and a burst longer than
// the memory is cut off and counted as a size error.
//
// Forwarding, one state machine for the whole switch, following the
// flowchart fetch -> filter -> forward or drop. It picks the next full
// buffer in round-robin order, then filters the frame:
//   1. size: the MAC frame (stored length minus 8) must be 64..1518 bytes;
//   2. FCS: the frame is read from memory once through the CRC module, which
//      compares the computed CRC with the frame's FCS field;
//   3. destination address: the 6 address bytes captured in the same pass
//      are looked up in the addresses table (constant field, VL known, RX
//      port permitted).
// A frame that passes is read a second time and streamed through the
// multiplexing matrix to its transmitting ports; one that fails is dropped
// and its cause is counted in the error log. In broadcast mode a frame that
// passes the size and FCS checks goes to all transmitting ports and the
// address check is skipped.
//
// Error log: a saturating 16-bit counter per cause (err_e), the cause and
// port of the most recent error, and a count of forwarded frames.
//
// Timing: memories read with one cycle of latency; one byte per clock in
// both passes. For a frame of L stored bytes (preamble and SFD included) the
// forwarding machine spends L-4 clocks choosing and checking it (1 choose,
// L-7 CRC pass, 1 lookup, 1 decision) and L+2 clocks forwarding it, 2L-2 in
// all; mx_valid first rises L-3 clocks after the port buffer became full.
// Only one frame is checked or forwarded at a time.
//
// From the paper: a finite state machine that activates the switch cores,
// the check order size -> FCS -> address, drop with an error log entry,
// forwarding without modification, and the broadcast mode. The single
// shared CRC pass over memory, round-robin service, one frame per port
// buffer and the error-log format are this design's own choices.
module afdx_switch_ctrl
  import afdx_pkg::*;
#(
  parameter int unsigned N_RX  = 8,
  parameter int unsigned N_TX  = 8,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned PW   = (N_RX > 1) ? $clog2(N_RX) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            broadcast_en,
  // from the test units
  input  logic [N_RX-1:0] tu_dv,
  input  logic [N_RX-1:0] tu_start,
  input  logic [N_RX-1:0] tu_sof,
  input  logic [N_RX-1:0] tu_eof,
  input  logic [N_RX-1:0] tu_pre_err,
  // to/from the local storage memories
  output logic [N_RX-1:0] mem_we,
  output logic [AW-1:0]   mem_addr  [N_RX],
  input  logic [7:0]      mem_rdata [N_RX],
  // CRC module
  output logic            crc_init,
  output logic            crc_en,
  output logic            crc_is_fcs,
  output logic [7:0]      crc_data,
  input  logic            crc_fcs_ok,
  // addresses table
  output logic            lk_en,
  output logic [47:0]     lk_da,
  output logic [PW-1:0]   lk_port,
  input  logic            lk_valid,
  input  logic            lk_ok,
  input  logic [N_TX-1:0] lk_tx_mask,
  // multiplexing matrix
  output logic [PW-1:0]   mx_sel,
  output logic            mx_valid,
  output logic [N_TX-1:0] mx_mask,
  // status and error log
  output logic [N_RX-1:0] buf_full,
  output logic [15:0]     err_cnt [N_ERR],
  output err_e            last_err,
  output logic [PW-1:0]   last_err_port,
  output logic [15:0]     fwd_cnt
);

  typedef enum logic [1:0] {R_IDLE, R_STORE, R_DISCARD, R_FULL} rx_state_e;
  typedef enum logic [2:0] {M_IDLE, M_CHECK, M_LOOKUP, M_DECIDE, M_FWD, M_DONE, M_DROP} m_state_e;

  // ---------------------------------------------------------------- reception
  rx_state_e     rx_state [N_RX];
  logic [AW:0]   wptr     [N_RX];
  logic [AW:0]   flen     [N_RX];
  logic [N_RX-1:0] sof_seen;       // test unit reported the SFD of this burst
  logic [N_RX-1:0] release_port;   // forwarding machine frees a buffer

  logic [N_RX-1:0] ev_pre, ev_ovr, ev_long;   // per-port error events

  always_comb begin
    ev_pre  = '0;
    ev_ovr  = '0;
    ev_long = '0;
    for (int i = 0; i < N_RX; i++) begin
      mem_we[i]    = 1'b0;
      buf_full[i]  = (rx_state[i] == R_FULL);
      unique case (rx_state[i])
        R_IDLE: if (tu_dv[i] && tu_start[i]) begin
          if (tu_pre_err[i]) ev_pre[i] = 1'b1;
          else               mem_we[i] = 1'b1;
        end
        R_STORE: begin
          if (tu_pre_err[i])                      ev_pre[i]  = 1'b1;
          else if (tu_dv[i] && wptr[i] < (AW+1)'(DEPTH)) mem_we[i] = 1'b1;
          else if (tu_dv[i])                      ev_long[i] = 1'b1;
        end
        R_FULL: if (tu_dv[i] && tu_start[i]) ev_ovr[i] = 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_RX; i++) begin
      if (!rst_n) begin
        rx_state[i] <= R_IDLE;
        wptr[i]     <= '0;
        flen[i]     <= '0;
        sof_seen[i] <= 1'b0;
      end else begin
        if (rx_state[i] != R_STORE) sof_seen[i] <= 1'b0;
        else if (tu_sof[i])         sof_seen[i] <= 1'b1;
        unique case (rx_state[i])
          R_IDLE: if (tu_dv[i] && tu_start[i]) begin
            if (tu_pre_err[i]) rx_state[i] <= R_DISCARD;
            else begin
              wptr[i]     <= (AW+1)'(1);
              rx_state[i] <= R_STORE;
            end
          end
          R_STORE: begin
            if (ev_pre[i] || ev_long[i]) begin
              rx_state[i] <= tu_dv[i] ? R_DISCARD : R_IDLE;
              wptr[i]     <= '0;
            end else if (mem_we[i]) begin
              wptr[i] <= wptr[i] + 1'b1;
            end else if (tu_eof[i] && sof_seen[i]) begin
              flen[i]     <= wptr[i];
              rx_state[i] <= R_FULL;
            end else if (!tu_dv[i]) begin
              rx_state[i] <= R_IDLE;
              wptr[i]     <= '0;
            end
          end
          R_DISCARD: if (!tu_dv[i]) rx_state[i] <= R_IDLE;
          R_FULL: if (release_port[i]) begin
            rx_state[i] <= R_IDLE;
            wptr[i]     <= '0;
          end
          default: rx_state[i] <= R_IDLE;
        endcase
      end
    end
  end

  // --------------------------------------------------------------- forwarding
  m_state_e        m_state;
  logic [PW-1:0]   sel;
  logic [AW:0]     len;        // stored length of the frame being served
  logic [AW:0]     rd_ptr;     // next address to read
  logic            rd_issue;   // a read is issued this cycle
  logic            rvalid_q;   // mem_rdata holds the byte at ridx_q
  logic [AW:0]     ridx_q;
  logic [47:0]     da_q;
  logic [PW-1:0]   rr_last;
  logic [N_TX-1:0] mask_q;
  err_e            drop_cause;

  // Round-robin choice of the next full buffer after rr_last.
  logic            pick_ok;
  logic [PW-1:0]   pick;
  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int k = 1; k <= N_RX; k++) begin
      logic [PW-1:0] p;
      p = PW'((int'(rr_last) + k) % N_RX);
      if (!pick_ok && rx_state[p] == R_FULL) begin
        pick_ok = 1'b1;
        pick    = PW'(p);
      end
    end
  end

  logic [AW:0] mac_len;
  assign mac_len = flen[pick] - (AW+1)'(HDR_LEN);

  logic [7:0] rbyte;
  assign rbyte = mem_rdata[sel];

  assign rd_issue = (m_state == M_CHECK || m_state == M_FWD) && (rd_ptr < len);

  always_comb begin
    for (int i = 0; i < N_RX; i++)
      mem_addr[i] = (rx_state[i] == R_FULL && PW'(i) == sel) ? rd_ptr[AW-1:0] : wptr[i][AW-1:0];
  end

  // CRC module feed: bytes returned during the check pass.
  always_comb begin
    crc_init   = (m_state == M_IDLE);
    crc_en     = rvalid_q && (m_state == M_CHECK || m_state == M_LOOKUP);
    crc_is_fcs = (ridx_q >= len - (AW+1)'(FCS_LEN));
    crc_data   = rbyte;
  end

  assign lk_en    = (m_state == M_LOOKUP) && !rvalid_q;
  assign lk_da    = da_q;
  assign lk_port  = sel;
  assign mx_sel   = sel;
  assign mx_valid = rvalid_q && (m_state == M_FWD || m_state == M_DONE);
  assign mx_mask  = mask_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_state    <= M_IDLE;
      sel        <= '0;
      len        <= '0;
      rd_ptr     <= '0;
      rvalid_q   <= 1'b0;
      ridx_q     <= '0;
      da_q       <= '0;
      rr_last    <= PW'(N_RX - 1);
      mask_q     <= '0;
      drop_cause <= ERR_NONE;
    end else begin
      rvalid_q <= rd_issue;
      ridx_q   <= rd_ptr;
      if (rd_issue) rd_ptr <= rd_ptr + 1'b1;
      unique case (m_state)
        M_IDLE: if (pick_ok) begin
          sel     <= pick;
          rr_last <= pick;
          len     <= flen[pick];
          if (flen[pick] < (AW+1)'(HDR_LEN + MIN_FRAME_LEN) ||
              mac_len > (AW+1)'(MAX_FRAME_LEN)) begin
            drop_cause <= ERR_SIZE;
            m_state    <= M_DROP;
          end else begin
            rd_ptr  <= (AW+1)'(HDR_LEN);
            m_state <= M_CHECK;
          end
        end
        M_CHECK: begin
          if (rvalid_q && ridx_q < (AW+1)'(HDR_LEN + DA_LEN)) da_q <= {da_q[39:0], rbyte};
          if (!rd_issue) m_state <= M_LOOKUP;   // last read issued, byte in flight
        end
        M_LOOKUP: m_state <= M_DECIDE;          // CRC done, table lookup issued
        M_DECIDE: begin
          if (!crc_fcs_ok) begin
            drop_cause <= ERR_FCS;
            m_state    <= M_DROP;
          end else if (broadcast_en) begin
            mask_q  <= '1;
            rd_ptr  <= '0;
            m_state <= M_FWD;
          end else if (!(lk_valid && lk_ok)) begin
            drop_cause <= ERR_ADDR;
            m_state    <= M_DROP;
          end else begin
            mask_q  <= lk_tx_mask;
            rd_ptr  <= '0;
            m_state <= M_FWD;
          end
        end
        M_FWD:  if (!rd_issue) m_state <= M_DONE;
        M_DONE: m_state <= M_IDLE;
        M_DROP: m_state <= M_IDLE;
        default: m_state <= M_IDLE;
      endcase
    end
  end

  always_comb begin
    release_port = '0;
    if (m_state == M_DONE || m_state == M_DROP) release_port[sel] = 1'b1;
  end

  // ---------------------------------------------------------------- error log
  logic [2:0] inc [N_ERR];
  always_comb begin
    for (int c = 0; c < N_ERR; c++) inc[c] = '0;
    for (int i = 0; i < N_RX; i++) begin
      inc[ERR_PREAMBLE] += 3'(ev_pre[i]);
      inc[ERR_OVERRUN]  += 3'(ev_ovr[i]);
      inc[ERR_SIZE]     += 3'(ev_long[i]);
    end
    if (m_state == M_DROP) inc[drop_cause] += 3'd1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N_ERR; c++) err_cnt[c] <= '0;
      last_err      <= ERR_NONE;
      last_err_port <= '0;
      fwd_cnt       <= '0;
    end else begin
      for (int c = 0; c < N_ERR; c++) begin
        if (17'(err_cnt[c]) + 17'(inc[c]) > 17'hFFFF) err_cnt[c] <= 16'hFFFF;
        else                                          err_cnt[c] <= err_cnt[c] + 16'(inc[c]);
      end
      for (int i = N_RX - 1; i >= 0; i--) begin
        if (ev_pre[i])  begin last_err <= ERR_PREAMBLE; last_err_port <= PW'(i); end
        if (ev_ovr[i])  begin last_err <= ERR_OVERRUN;  last_err_port <= PW'(i); end
        if (ev_long[i]) begin last_err <= ERR_SIZE;     last_err_port <= PW'(i); end
      end
      if (m_state == M_DROP) begin
        last_err      <= drop_cause;
        last_err_port <= sel;
      end
      if (m_state == M_DONE) fwd_cnt <= fwd_cnt + 1'b1;
    end
  end

  // --------------------------------------------------------------- assertions
  a_fwd_from_full: assert property (@(posedge clk) disable iff (!rst_n)
                                    mx_valid |-> rx_state[sel] == R_FULL);
  a_no_write_full: assert property (@(posedge clk) disable iff (!rst_n)
                                    (mem_we & buf_full) == '0);

endmodule
