// tb_eth_pkg: testbench helpers for raw Ethernet frames. A bit-serial CRC-32
// (written independently of the RTL's byte-step module) and a builder that
// turns destination, source, EtherType and payload into the complete byte
// sequence of a frame as sent on GMII (preamble, SFD, header, padded payload,
// FCS low byte first), and a parser that checks a captured frame and splits
// it into its fields.
package tb_eth_pkg;
  function automatic logic [31:0] crc32_bytes(input logic [7:0] b[$]);
    logic [31:0] c = 32'hFFFF_FFFF;
    foreach (b[i]) begin
      for (int k = 0; k < 8; k++) begin
        logic fb;
        fb = c[0] ^ b[i][k];
        c  = c >> 1;
        if (fb) c = c ^ 32'hEDB8_8320;
      end
    end
    return ~c;
  endfunction

  function automatic void build_frame(input logic [47:0] dst, input logic [47:0] src, input logic [15:0] etype,
                                      input logic [7:0] pay[$], output logic [7:0] fr[$]);
    logic [7:0] body[$];
    logic [31:0] fcs;
    body = {};
    for (int i = 5; i >= 0; i--) body.push_back(dst[8*i +: 8]);
    for (int i = 5; i >= 0; i--) body.push_back(src[8*i +: 8]);
    body.push_back(etype[15:8]);
    body.push_back(etype[7:0]);
    foreach (pay[i]) body.push_back(pay[i]);
    while (body.size() < 60) body.push_back(8'h00);
    fcs = crc32_bytes(body);
    fr = {};
    repeat (7) fr.push_back(8'h55);
    fr.push_back(8'hD5);
    foreach (body[i]) fr.push_back(body[i]);
    for (int i = 0; i < 4; i++) fr.push_back(fcs[8*i +: 8]);
  endfunction

  // Returns 1 if fr is a well-formed frame (preamble, SFD, length, FCS).
  function automatic bit parse_frame(input logic [7:0] fr[$], output logic [47:0] dst, output logic [47:0] src,
                                     output logic [15:0] etype, output logic [7:0] pay[$]);
    logic [7:0] body[$];
    logic [31:0] fcs;
    pay = {};
    dst = '0; src = '0; etype = '0;
    if (fr.size() < 72) return 0;
    for (int i = 0; i < 7; i++) if (fr[i] != 8'h55) return 0;
    if (fr[7] != 8'hD5) return 0;
    body = fr[8:fr.size()-5];
    fcs = {fr[fr.size()-1], fr[fr.size()-2], fr[fr.size()-3], fr[fr.size()-4]};
    if (crc32_bytes(body) != fcs) return 0;
    for (int i = 0; i < 6; i++) dst = {dst[39:0], body[i]};
    for (int i = 6; i < 12; i++) src = {src[39:0], body[i]};
    etype = {body[12], body[13]};
    pay = body[14:$];
    return 1;
  endfunction
endpackage
