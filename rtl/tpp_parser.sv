// tpp_parser -- finds a TPP inside a frame and pulls out its fields.
//
// Two parse paths reach a TPP.  Transparent mode: the Ethernet type is 0x6666
// and the TPP header follows the 14-byte Ethernet header (the TPP may itself
// encapsulate IPv4 or ARP, named by its trailing protocol field).  Standalone
// mode: an IPv4 packet (ethertype 0x0800) with protocol 17 whose UDP destination
// port is 0x6666; the TPP header follows the 8-byte UDP header, after an IPv4
// header of IHL*4 bytes.  Any other frame is an ordinary packet.
//
// From the TPP it extracts the 8-byte header, the instructions and the packet
// memory words (big-endian 32-bit words).  The number of instructions is
// (TPP length - 14 - packet memory length) / 4.  A TPP whose lengths do not
// add up, that has more than MAX_INSTR instructions, or that does not fit in
// the header window or the frame, is treated as an ordinary packet and passes
// through the switch untouched.  Only the first PMEM_WORDS words of packet
// memory are visible to the switch; instructions naming later words are not
// executed.
//
// Interface: purely combinational, frame in, fields out; the pipeline registers
// the result (parsing takes under one cycle).
// Paper: the two parse graphs, 0x6666 in both places, the field order of the
// TPP.  Own choices: field widths (see tpp_pkg), the validity checks, and that
// the TPP checksum is carried but not verified, since its algorithm is not given.
module tpp_parser
  import tpp_pkg::*;
(
  input  pkt_t                              pkt,
  output logic                              is_tpp,
  output logic [7:0]                        tpp_off,
  output tpp_hdr_t                          hdr,
  output logic [31:0]                       app_id,
  output logic [IIDX_W-1:0]                 n_instr,
  output instr_t [MAX_INSTR-1:0]            instr,
  output logic [PIDX_W:0]                   n_pmem,
  output logic [PMEM_WORDS-1:0][WORD_W-1:0] pmem,
  output logic [15:0]                       encap_proto
);

  localparam int unsigned WIN = TPP_INSTR_OFF + 4 * MAX_INSTR + 4 * PMEM_WORDS;

  logic [15:0] ethertype, udp_dport;
  logic [7:0]  ip_proto;
  logic [5:0]  ihl_bytes;
  logic [15:0] udp_off;
  logic        cand;

  logic [WIN-1:0][7:0] t;  // bytes of the TPP, starting at its header

  function automatic logic [7:0] byte_at(input pkt_t p, input int unsigned i);
    return (i < HDR_BYTES) ? p.bytes[i] : 8'h00;
  endfunction

  always_comb begin
    ethertype = {pkt.bytes[12], pkt.bytes[13]};
    ihl_bytes = {pkt.bytes[14][3:0], 2'b00};
    ip_proto  = pkt.bytes[23];
    udp_off   = 16'(14 + int'(ihl_bytes));
    udp_dport = {byte_at(pkt, int'(udp_off) + 2), byte_at(pkt, int'(udp_off) + 3)};

    cand    = 1'b0;
    tpp_off = 8'd0;
    if (ethertype == ETHERTYPE_TPP) begin
      cand    = 1'b1;
      tpp_off = 8'd14;
    end else if (ethertype == ETHERTYPE_IPV4 && ip_proto == IPPROTO_UDP &&
                 ihl_bytes >= 6'd20 && udp_dport == UDP_PORT_TPP) begin
      cand    = 1'b1;
      tpp_off = 8'(int'(udp_off) + 8);
    end

    for (int unsigned j = 0; j < WIN; j++) t[j] = byte_at(pkt, int'(tpp_off) + j);
  end

  logic [15:0] instr_bytes, vis_words, fit_words, tot, b;

  always_comb begin
    b      = '0;
    hdr    = {t[0], t[1], t[2], t[3], t[4], t[5], t[6], t[7]};
    app_id = {t[8], t[9], t[10], t[11]};

    tot         = 16'(hdr.tpp_len);
    instr_bytes = 16'(int'(tot) - TPP_FIXED_BYTES - int'(hdr.pmem_len));
    is_tpp      = cand
                  && int'(tot) >= TPP_FIXED_BYTES + int'(hdr.pmem_len)
                  && instr_bytes[1:0] == 2'b00
                  && int'(instr_bytes) <= 4 * MAX_INSTR
                  && hdr.pmem_len[1:0] == 2'b00
                  && int'(tpp_off) + TPP_INSTR_OFF + int'(instr_bytes) <= HDR_BYTES
                  && int'(tpp_off) + int'(tot) <= int'(pkt.len);
    n_instr = is_tpp ? IIDX_W'(int'(instr_bytes) / 4) : '0;

    // packet memory words visible: limited by the header, the window and PMEM_WORDS
    fit_words = is_tpp ? 16'((HDR_BYTES - int'(tpp_off) - TPP_INSTR_OFF - int'(instr_bytes)) / 4) : '0;
    vis_words = 16'(int'(hdr.pmem_len) / 4);
    if (int'(vis_words) > PMEM_WORDS) vis_words = 16'(PMEM_WORDS);
    if (vis_words > fit_words)  vis_words = fit_words;
    n_pmem = is_tpp ? (PIDX_W+1)'(vis_words) : '0;

    for (int unsigned k = 0; k < MAX_INSTR; k++) begin
      if (k < int'(n_instr))
        instr[k] = {t[TPP_INSTR_OFF + 4*k], t[TPP_INSTR_OFF + 4*k + 1],
                    t[TPP_INSTR_OFF + 4*k + 2], t[TPP_INSTR_OFF + 4*k + 3]};
      else
        instr[k] = '0;
    end
    for (int unsigned w = 0; w < PMEM_WORDS; w++) begin
      b = 16'(TPP_INSTR_OFF + int'(instr_bytes) + 4*w);
      if (w < int'(vis_words)) pmem[w] = {t[b], t[b+1], t[b+2], t[b+3]};
      else               pmem[w] = '0;
    end
    encap_proto = {byte_at(pkt, int'(tpp_off) + int'(tot) - 2), byte_at(pkt, int'(tpp_off) + int'(tot) - 1)};
  end

endmodule
