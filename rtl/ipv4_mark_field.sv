// ipv4_mark_field: the marking bit in an IPv4 header.
//
// The marking bit is the least significant bit of the DSCP field, which is
// bit 2 of the Type-of-Service byte (header byte 1). The module takes the
// first 20 bytes of a header (byte 0 in hdr_i[159:152]) and gives the marking
// bit, the flow fields and whether the header is IPv4 (version 4, header
// length at least 5 words). When wr_i is set it writes new_mark_i into the
// marking bit and updates the header checksum incrementally (RFC 1624:
// HC' = ~(~HC + ~m + m') in one's complement arithmetic, m being the 16-bit
// word that holds the TOS byte), so the header stays valid; otherwise hdr_o
// equals hdr_i. Purely combinational.
//
// Follows the paper: the DSCP LSB as the marking bit. Own choice: the
// checksum update, which any rewrite of an IPv4 header field requires.
module ipv4_mark_field
  import ampm_pkg::*;
(
  input  logic [159:0] hdr_i,
  input  logic         wr_i,
  input  logic         new_mark_i,
  output logic         is_ipv4_o,
  output logic         mark_o,
  output flow_key_t    flow_o,
  output logic [159:0] hdr_o
);

  localparam int unsigned MARK_POS = 146;   // byte 1, bit 2

  logic [15:0] old_w, new_w, old_hc, new_hc, inv_hc, inv_w;
  logic [17:0] sum;
  logic [16:0] fold;

  assign is_ipv4_o  = (hdr_i[159:156] == 4'd4) && (hdr_i[155:152] >= 4'd5);
  assign mark_o     = hdr_i[MARK_POS];
  assign flow_o.src   = hdr_i[63:32];
  assign flow_o.dst   = hdr_i[31:0];
  assign flow_o.proto = hdr_i[87:80];

  always_comb begin
    old_w  = hdr_i[159:144];
    new_w  = old_w;
    new_w[MARK_POS-144] = new_mark_i;
    old_hc = hdr_i[79:64];
    inv_hc = ~old_hc;
    inv_w  = ~old_w;
    sum    = 18'(inv_hc) + 18'(inv_w) + 18'(new_w);
    fold   = 17'(sum[15:0]) + 17'(sum[17:16]);
    new_hc = ~(fold[15:0] + 16'(fold[16]));
    hdr_o  = hdr_i;
    if (wr_i) begin
      hdr_o[MARK_POS] = new_mark_i;
      hdr_o[79:64]    = new_hc;
    end
  end

endmodule
