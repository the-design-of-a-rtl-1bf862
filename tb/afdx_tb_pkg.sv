// afdx_tb_pkg: stimulus helpers shared by the switch testbenches.
//
// Builds complete AFDX frames as they appear on a port (preamble, SFD,
// destination address with constant field and virtual link ID, source
// address, type, payload, FCS). The FCS is computed here with a bit-serial,
// MSB-first CRC-32 over bit-reversed bytes (polynomial 0x04C11DB7), a
// formulation independent of the reflected byte-wise update used in the
// RTL.
package afdx_tb_pkg;

  typedef logic [7:0] bytes_t [$];

  function automatic logic [7:0] rev8(input logic [7:0] b);
    for (int i = 0; i < 8; i++) rev8[i] = b[7-i];
  endfunction

  function automatic logic [31:0] rev32(input logic [31:0] w);
    for (int i = 0; i < 32; i++) rev32[i] = w[31-i];
  endfunction

  // Ethernet FCS value of a byte sequence (already inverted).
  function automatic logic [31:0] ref_fcs(input bytes_t d);
    logic [31:0] c;
    logic [7:0]  b;
    c = 32'hFFFF_FFFF;
    foreach (d[k]) begin
      b = rev8(d[k]);
      for (int i = 7; i >= 0; i--) begin
        if (c[31] ^ b[i]) c = (c << 1) ^ 32'h04C1_1DB7;
        else              c = c << 1;
      end
    end
    return ~rev32(c);
  endfunction

  // MAC frame (no preamble) of payload_len payload bytes, with valid FCS
  // unless bad_fcs. const_field is the 32-bit head of the destination
  // address (0x03000000 for a legal AFDX address).
  function automatic bytes_t mac_frame(input logic [15:0] vlid,
                                       input int          payload_len,
                                       input logic [7:0]  src,
                                       input int unsigned seed,
                                       input logic [31:0] const_field = 32'h0300_0000,
                                       input bit          bad_fcs = 0);
    bytes_t f;
    logic [31:0] fcs;
    f = {};
    for (int i = 3; i >= 0; i--) f.push_back(const_field[8*i +: 8]);
    f.push_back(vlid[15:8]);
    f.push_back(vlid[7:0]);
    f.push_back(8'h02); repeat (4) f.push_back(8'h00); f.push_back(src);
    f.push_back(8'h08); f.push_back(8'h00);
    for (int i = 0; i < payload_len; i++) f.push_back(8'((seed * 7 + i * 13 + (i >> 8)) ^ seed));
    fcs = ref_fcs(f);
    if (bad_fcs) fcs ^= 32'h0000_0100;
    for (int i = 0; i < 4; i++) f.push_back(fcs[8*i +: 8]);
    return f;
  endfunction

  // Frame as it travels on a port: 7 x 0x55, 0xD5, MAC frame.
  function automatic bytes_t wire_frame(input bytes_t mac);
    bytes_t w;
    w = {};
    repeat (7) w.push_back(8'h55);
    w.push_back(8'hD5);
    foreach (mac[k]) w.push_back(mac[k]);
    return w;
  endfunction

endpackage
