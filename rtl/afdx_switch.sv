// afdx_switch: a network-on-chip switch modelled on an AFDX (ARINC 664)
// switch, with 8-bit parallel links.
//
// Frames enter on N_RX receiving ports and leave on N_TX transmitting ports.
// The switch is store-and-forward and only filters: every frame is stored
// whole, checked for size, FCS and destination address, and then either
// forwarded unchanged to the transmitting ports its virtual link maps to or
// dropped with an entry in the error log. Nothing in a frame is modified and
// no FCS is recomputed.
//
// Structure (one instance per box of the switch block diagram):
//   afdx_test_unit   x N_RX  frame detection on each RX port
//   afdx_port_ram    x N_RX  local storage memory, 2K bytes per port
//   afdx_switch_ctrl         the controlling state machine and error log
//   afdx_crc32               FCS calculation and comparison
//   afdx_addr_table          static forwarding table (configuration port)
//   afdx_mux_matrix          RX-memory to TX-port multiplexing, multi/broadcast
//
// Port interface: each RX and TX port is a byte-valid signal plus a byte,
// one byte per clock, high for the whole frame including preamble and SFD.
// TX ports are always ready (point-to-point links to End Systems). The
// table is loaded through cfg_* before traffic; broadcast_en switches on the
// broadcast mode. All logic is on one clock with a synchronous active-low
// reset.
//
// The port counts are not given in the paper; 8 + 8 ports (as in the AFDX
// network drawing it shows) is this design's default. The 2K-byte memory,
// the 8-bit link width, the block set and their connections follow the
// paper.
module afdx_switch
  import afdx_pkg::*;
#(
  parameter int unsigned N_RX      = 8,
  parameter int unsigned N_TX      = 8,
  parameter int unsigned DEPTH     = 2048,
  parameter int unsigned N_ENTRIES = 16,
  localparam int unsigned PW       = (N_RX > 1) ? $clog2(N_RX) : 1,
  localparam int unsigned IW       = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            broadcast_en,
  // receiving ports
  input  logic [N_RX-1:0] rx_dv,
  input  logic [7:0]      rx_data [N_RX],
  // transmitting ports
  output logic [N_TX-1:0] tx_dv,
  output logic [7:0]      tx_data [N_TX],
  // addresses table configuration
  input  logic            cfg_we,
  input  logic [IW-1:0]   cfg_idx,
  input  vl_entry_t       cfg_entry,
  // status and error log
  output logic [N_RX-1:0] buf_full,
  output logic [15:0]     err_cnt [N_ERR],
  output err_e            last_err,
  output logic [PW-1:0]   last_err_port,
  output logic [15:0]     fwd_cnt
);

  localparam int unsigned AW = $clog2(DEPTH);

  // test units -> controller / memories
  logic [N_RX-1:0] tu_dv, tu_start, tu_sof, tu_eof, tu_pre_err;
  logic [7:0]      tu_data [N_RX];

  // controller <-> memories
  logic [N_RX-1:0] mem_we;
  logic [AW-1:0]   mem_addr  [N_RX];
  logic [7:0]      mem_rdata [N_RX];

  for (genvar i = 0; i < N_RX; i++) begin : g_port
    afdx_test_unit u_test_unit (
      .clk, .rst_n,
      .rx_dv     (rx_dv[i]),
      .rx_data   (rx_data[i]),
      .dv_o      (tu_dv[i]),
      .data_o    (tu_data[i]),
      .start_o   (tu_start[i]),
      .sof_o     (tu_sof[i]),
      .eof_o     (tu_eof[i]),
      .pre_err_o (tu_pre_err[i])
    );

    afdx_port_ram #(.DEPTH(DEPTH), .WIDTH(8)) u_ram (
      .clk,
      .we    (mem_we[i]),
      .addr  (mem_addr[i]),
      .wdata (tu_data[i]),    // data path: test unit -> memory
      .rdata (mem_rdata[i])
    );
  end

  // controller <-> CRC, table, matrix
  logic            crc_init, crc_en, crc_is_fcs, crc_fcs_ok;
  logic [7:0]      crc_data;
  logic [31:0]     crc_value;
  logic            lk_en, lk_valid, lk_ok;
  logic [47:0]     lk_da;
  logic [PW-1:0]   lk_port;
  logic [N_TX-1:0] lk_tx_mask;
  logic            lk_const_ok, lk_hit, lk_permit;
  logic [PW-1:0]   mx_sel;
  logic            mx_valid;
  logic [N_TX-1:0] mx_mask;

  afdx_switch_ctrl #(.N_RX(N_RX), .N_TX(N_TX), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .broadcast_en,
    .tu_dv, .tu_start, .tu_sof, .tu_eof, .tu_pre_err,
    .mem_we, .mem_addr, .mem_rdata,
    .crc_init, .crc_en, .crc_is_fcs, .crc_data, .crc_fcs_ok,
    .lk_en, .lk_da, .lk_port, .lk_valid, .lk_ok, .lk_tx_mask,
    .mx_sel, .mx_valid, .mx_mask,
    .buf_full, .err_cnt, .last_err, .last_err_port, .fwd_cnt
  );

  afdx_crc32 u_crc (
    .clk, .rst_n,
    .init   (crc_init),
    .en     (crc_en),
    .is_fcs (crc_is_fcs),
    .data   (crc_data),
    .crc    (crc_value),
    .fcs_ok (crc_fcs_ok)
  );

  afdx_addr_table #(.N_ENTRIES(N_ENTRIES), .N_RX(N_RX), .N_TX(N_TX)) u_table (
    .clk, .rst_n,
    .cfg_we, .cfg_idx, .cfg_entry,
    .lookup_en    (lk_en),
    .lookup_da    (lk_da),
    .lookup_port  (lk_port),
    .res_valid    (lk_valid),
    .res_const_ok (lk_const_ok),
    .res_hit      (lk_hit),
    .res_permit   (lk_permit),
    .res_ok       (lk_ok),
    .res_tx_mask  (lk_tx_mask)
  );

  afdx_mux_matrix #(.N_RX(N_RX), .N_TX(N_TX)) u_matrix (
    .clk, .rst_n,
    .in_data  (mem_rdata),
    .sel      (mx_sel),
    .in_valid (mx_valid),
    .tx_mask  (mx_mask),
    .tx_dv,
    .tx_data
  );

endmodule
