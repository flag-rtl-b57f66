// tb_eth_pkg: reference models shared by the testbenches.
//
// Builds expected Ethernet frames byte by byte (preamble, SFD, header,
// payload, FCS) and computes the IEEE 802.3 CRC-32 with a bit-serial
// shift register written independently of the design's own function.
package tb_eth_pkg;

  typedef byte unsigned bytes_t[$];

  // FCS of a byte sequence, as the 4 bytes sent on the wire (first sent first).
  function automatic bytes_t fcs_of(bytes_t b);
    bit [31:0] r;
    bytes_t o;
    r = 32'hFFFF_FFFF;
    foreach (b[i]) begin
      for (int k = 0; k < 8; k++) begin
        bit fb;
        fb = r[0] ^ b[i][k];
        r  = {1'b0, r[31:1]};
        if (fb) r = r ^ 32'hEDB8_8320;
      end
    end
    r = ~r;
    o.push_back(r[7:0]);  o.push_back(r[15:8]);
    o.push_back(r[23:16]); o.push_back(r[31:24]);
    return o;
  endfunction

  // Frame bytes after the SFD: dst, src, hdr_len bytes of hdr, payload
  // 0,1,2,... (mod 256) and FCS.
  function automatic bytes_t frame_body(bit [47:0] dst, bit [47:0] src, bit [47:0] hdr,
                                        int hdr_len, int pay_len);
    bytes_t b;
    for (int i = 0; i < 6; i++) b.push_back(dst[47-8*i -: 8]);
    for (int i = 0; i < 6; i++) b.push_back(src[47-8*i -: 8]);
    for (int i = 0; i < hdr_len; i++) b.push_back(hdr[47-8*i -: 8]);
    for (int i = 0; i < pay_len; i++) b.push_back(byte'(i));
    b = {b, fcs_of(b)};
    return b;
  endfunction

  // The whole frame as sent on the line, preamble and SFD included.
  function automatic bytes_t wire_frame(bytes_t body);
    bytes_t w;
    for (int i = 0; i < 7; i++) w.push_back(8'h55);
    w.push_back(8'hD5);
    return {w, body};
  endfunction

endpackage
