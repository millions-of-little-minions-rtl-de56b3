// tb_tpp_util -- frame builders and readers shared by the testbenches.
//
// mk_tpp builds a frame carrying a TPP either right after the Ethernet header
// (ethertype 0x6666) or inside IPv4/UDP to port 0x6666, laid out as: 8-byte
// header (length, packet-memory length, mode, hop/SP, per-hop length,
// reserved, checksum), 4-byte application ID, instructions, packet memory,
// 2-byte encapsulated protocol.  These builders are written from the format
// description, independently of the parser.
package tb_tpp_util;
  import tpp_pkg::*;

  function automatic instr_t I(opcode_e op, logic [15:0] addr, int a = 0, int b = 0);
    instr_t x;
    x.op = op; x.addr = addr; x.off_a = 6'(a); x.off_b = 6'(b);
    return x;
  endfunction

  function automatic int tpp_offset(bit standalone);
    return standalone ? 42 : 14;
  endfunction

  function automatic pkt_t mk_tpp(bit standalone, int mode, int hop_sp, int hop_len,
                                  instr_t ins [MAX_INSTR], int n_ins,
                                  logic [31:0] pm [16], int n_pm, int frame_len = 128);
    pkt_t p;
    int o, tl;
    p = '0;
    for (int i = 0; i < 12; i++) p.bytes[i] = 8'(i + 1);
    o  = tpp_offset(standalone);
    tl = 14 + 4 * n_ins + 4 * n_pm;
    if (standalone) begin
      p.bytes[12] = 8'h08; p.bytes[13] = 8'h00;
      p.bytes[14] = 8'h45; p.bytes[23] = 8'd17;
      p.bytes[36] = 8'h66; p.bytes[37] = 8'h66;
    end else begin
      p.bytes[12] = 8'h66; p.bytes[13] = 8'h66;
    end
    p.bytes[o + 0] = 8'(tl);
    p.bytes[o + 1] = 8'(4 * n_pm);
    p.bytes[o + 2] = 8'(mode);
    p.bytes[o + 3] = 8'(hop_sp);
    p.bytes[o + 4] = 8'(hop_len);
    p.bytes[o + 6] = 8'hBE; p.bytes[o + 7] = 8'hEF;
    p.bytes[o + 8] = 8'h00; p.bytes[o + 9] = 8'h00; p.bytes[o + 10] = 8'h12; p.bytes[o + 11] = 8'h34;
    for (int k = 0; k < n_ins; k++)
      for (int j = 0; j < 4; j++) p.bytes[o + 12 + 4*k + j] = ins[k][8*(3-j) +: 8];
    for (int w = 0; w < n_pm; w++)
      for (int j = 0; j < 4; j++)
        if (o + 12 + 4*n_ins + 4*w + j < HDR_BYTES)
          p.bytes[o + 12 + 4*n_ins + 4*w + j] = pm[w][8*(3-j) +: 8];
    if (o + tl - 1 < HDR_BYTES) begin
      p.bytes[o + tl - 2] = 8'h08; p.bytes[o + tl - 1] = 8'h00;
    end
    p.len = 16'(frame_len);
    return p;
  endfunction

  function automatic logic [31:0] pm_word(pkt_t p, bit standalone, int n_ins, int w);
    int b;
    b = tpp_offset(standalone) + 12 + 4 * n_ins + 4 * w;
    return {p.bytes[b], p.bytes[b+1], p.bytes[b+2], p.bytes[b+3]};
  endfunction

  function automatic logic [7:0] hop_field(pkt_t p, bit standalone);
    return p.bytes[tpp_offset(standalone) + 3];
  endfunction

  function automatic pkt_t mk_plain(int frame_len);
    pkt_t p;
    p = '0;
    for (int i = 0; i < HDR_BYTES; i++) p.bytes[i] = 8'(i * 7 + 3);
    p.bytes[12] = 8'h08; p.bytes[13] = 8'h00; p.bytes[14] = 8'h45; p.bytes[23] = 8'd6;
    p.len = 16'(frame_len);
    return p;
  endfunction
endpackage
