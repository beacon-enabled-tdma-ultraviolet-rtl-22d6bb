// uv_frame_ref: reference model of the information frame, shared by the
// frame testbenches. It builds the symbol sequence of one frame without
// using the design's package: the 63-symbol preamble from the recurrence of
// x^6 + x^5 + 1 (o[n+6] = o[n] ^ o[n+1], register seed 000001), the 16-bit
// header {source, destination, sequence}, the payload bytes MSB first and a
// CRC-16-CCITT (init 0xFFFF, polynomial 0x1021, MSB first) over header and
// payload.
package uv_frame_ref;
  function automatic void preamble(output bit p[63]);
    for (int n = 0; n < 6; n++) p[n] = (n == 5);
    for (int n = 0; n + 6 < 63; n++) p[n+6] = p[n] ^ p[n+1];
  endfunction

  function automatic bit [15:0] crc16(input bit bits[$]);
    bit [15:0] c;
    c = 16'hFFFF;
    foreach (bits[k]) begin
      bit top;
      top = c[15] ^ bits[k];
      c = c << 1;
      if (top) c = c ^ 16'h1021;
    end
    return c;
  endfunction

  // Symbols of one frame, first symbol first.
  function automatic void build(input int src, input int dst, input int seq, input bit [7:0] payload[$],
                                output bit sym[$]);
    bit p[63];
    bit body[$];
    bit [15:0] hdr, c;
    preamble(p);
    sym = {};
    foreach (p[n]) sym.push_back(p[n]);
    hdr = {4'(src), 4'(dst), 8'(seq)};
    for (int b = 15; b >= 0; b--) body.push_back(hdr[b]);
    foreach (payload[k]) for (int b = 7; b >= 0; b--) body.push_back(payload[k][b]);
    c = crc16(body);
    foreach (body[k]) sym.push_back(body[k]);
    for (int b = 15; b >= 0; b--) sym.push_back(c[b]);
  endfunction
endpackage
