// tb_eth_util: reference functions for the testbenches.
//
// ref_crc32 computes the IEEE 802.3 frame check sequence of a byte queue the
// textbook way, independently of the RTL's step function: each byte is bit-
// reversed and shifted MSB first through the normal polynomial 0x04C11DB7,
// and the final register is bit-reversed and inverted. The FCS is sent least
// significant byte first.
//
// The CRC is the IEEE 802.3 one; the functions are shared by several
// testbenches.
package tb_eth_util;

  typedef byte unsigned bytes_t[$];

  function automatic logic [7:0] rev8(logic [7:0] b);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = b[7-i];
    return r;
  endfunction

  function automatic logic [31:0] rev32(logic [31:0] v);
    logic [31:0] r;
    for (int i = 0; i < 32; i++) r[i] = v[31-i];
    return r;
  endfunction

  function automatic logic [31:0] ref_crc32(bytes_t d);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    foreach (d[k]) begin
      c = c ^ {rev8(d[k]), 24'h0};
      for (int b = 0; b < 8; b++)
        c = c[31] ? ((c << 1) ^ 32'h04C1_1DB7) : (c << 1);
    end
    return ~rev32(c);
  endfunction

endpackage
