// afdx_addr_table: the switch's static forwarding table.
//
// Holds N_ENTRIES virtual-link entries, written once by the network designer
// through the configuration port before traffic starts. A lookup presents
// the 48-bit destination address of a frame and the receiving port it came
// from. The table checks the address in the order the switch flowchart
// gives: the 32-bit constant field must equal 0x03000000, the 16-bit virtual
// link identifier must be in the table, and the receiving port must be
// permitted to send on that virtual link. It then returns the set of
// transmitting ports of the entry: one port for unicast, several for
// multicast.
//
// Timing: lookup_en in cycle t gives the result in cycle t+1 (registered).
// Configuration writes take effect on the next clock. Reset clears all valid
// bits. The search is associative (all entries compared at once), which
// suits the small tables an on-chip network needs.
//
// From the paper: a statically configured table that maps receiving ports to
// one or several transmitting ports per destination address, and the
// "constant field, permission" checks. The associative organisation, the
// entry format and the configuration port are this design's own choices.
module afdx_addr_table
  import afdx_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 16,
  parameter int unsigned N_RX      = 8,
  parameter int unsigned N_TX      = 8,
  localparam int unsigned IW       = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1,
  localparam int unsigned PW       = (N_RX > 1) ? $clog2(N_RX) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  logic            cfg_we,
  input  logic [IW-1:0]   cfg_idx,
  input  vl_entry_t       cfg_entry,
  // lookup
  input  logic            lookup_en,
  input  logic [47:0]     lookup_da,
  input  logic [PW-1:0]   lookup_port,
  output logic            res_valid,
  output logic            res_const_ok,  // constant field correct
  output logic            res_hit,       // VL found
  output logic            res_permit,    // RX port permitted on that VL
  output logic            res_ok,        // all three
  output logic [N_TX-1:0] res_tx_mask
);

  initial assert (N_RX <= 32 && N_TX <= 32) else $error("at most 32 ports per side");

  vl_entry_t tbl [N_ENTRIES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int e = 0; e < N_ENTRIES; e++) tbl[e].valid <= 1'b0;
    end else if (cfg_we) begin
      tbl[cfg_idx] <= cfg_entry;
    end
  end

  // Associative search.
  logic            hit, permit;
  logic [N_TX-1:0] mask;
  always_comb begin
    hit    = 1'b0;
    permit = 1'b0;
    mask   = '0;
    for (int e = 0; e < N_ENTRIES; e++) begin
      if (!hit && tbl[e].valid && tbl[e].vlid == lookup_da[15:0]) begin
        hit    = 1'b1;
        permit = tbl[e].rx_permit[5'(lookup_port)];
        mask   = tbl[e].tx_mask[N_TX-1:0];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      res_valid    <= 1'b0;
      res_const_ok <= 1'b0;
      res_hit      <= 1'b0;
      res_permit   <= 1'b0;
      res_ok       <= 1'b0;
      res_tx_mask  <= '0;
    end else begin
      res_valid <= lookup_en;
      if (lookup_en) begin
        res_const_ok <= (lookup_da[47:16] == DA_CONST_FIELD);
        res_hit      <= hit;
        res_permit   <= hit && permit;
        res_ok       <= (lookup_da[47:16] == DA_CONST_FIELD) && hit && permit && (mask != '0);
        res_tx_mask  <= mask;
      end
    end
  end

endmodule
