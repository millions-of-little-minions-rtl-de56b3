// tb_tpp_parser -- checks TPP recognition and field extraction.
// Builds transparent (ethertype 0x6666) and standalone (UDP port 0x6666) TPPs,
// ordinary TCP and UDP frames, and malformed TPPs, and compares every field the
// parser returns with what the builder put in.
module tb_tpp_parser;
  import tpp_pkg::*;
  import tb_tpp_util::*;

  int checks = 0, failures = 0;
  pkt_t                              pkt;
  logic                              is_tpp;
  logic [7:0]                        tpp_off;
  tpp_hdr_t                          hdr;
  logic [31:0]                       app_id;
  logic [IIDX_W-1:0]                 n_instr;
  instr_t [MAX_INSTR-1:0]            instr;
  logic [PIDX_W:0]                   n_pmem;
  logic [PMEM_WORDS-1:0][WORD_W-1:0] pmem;
  logic [15:0]                       encap_proto;

  tpp_parser dut (.*);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    instr_t ins [MAX_INSTR];
    logic [31:0] pm [16];
    for (int trial = 0; trial < 200; trial++) begin
      bit sa; int ni, np;
      sa = trial[0];
      ni = 1 + int'($urandom_range(0, MAX_INSTR - 1));
      np = int'($urandom_range(1, PMEM_WORDS));
      for (int k = 0; k < MAX_INSTR; k++)
        ins[k] = I(opcode_e'($urandom_range(1, 6)), 16'($urandom), int'($urandom_range(0, 63)), int'($urandom_range(0, 63)));
      for (int w = 0; w < 16; w++) pm[w] = $urandom;
      pkt = mk_tpp(sa, int'(trial % 2), trial % 7, 3, ins, ni, pm, np);
      #1;
      chk(is_tpp, "is_tpp");
      chk(tpp_off == 8'(tpp_offset(sa)), "offset");
      chk(hdr.tpp_len == 8'(14 + 4*ni + 4*np) && hdr.pmem_len == 8'(4*np), "lengths");
      chk(hdr.mode == 8'(trial % 2) && hdr.hop_sp == 8'(trial % 7) && hdr.hop_len == 8'd3, "mode/hop");
      chk(hdr.checksum == 16'hBEEF && app_id == 32'h1234, "checksum/app id");
      chk(int'(n_instr) == ni, "n_instr");
      for (int k = 0; k < MAX_INSTR; k++)
        chk(instr[k] == ((k < ni) ? ins[k] : '0), $sformatf("instr %0d", k));
      chk(int'(n_pmem) == np, "n_pmem");
      for (int w = 0; w < np; w++) chk(pmem[w] == pm[w], $sformatf("pmem %0d", w));
      chk(encap_proto == 16'h0800, "encap proto");
    end
    // ordinary frames
    pkt = mk_plain(100); #1;
    chk(!is_tpp, "TCP frame is not a TPP");
    pkt.bytes[23] = 8'd17; pkt.bytes[36] = 8'h12; pkt.bytes[37] = 8'h34; #1;
    chk(!is_tpp, "UDP to another port is not a TPP");
    pkt.bytes[36] = 8'h66; pkt.bytes[37] = 8'h66; pkt.bytes[42] = 8'd14; pkt.bytes[43] = 8'd0; #1;
    chk(is_tpp && tpp_off == 8'd42 && n_instr == '0, "UDP port 0x6666 with empty TPP");
    pkt.bytes[14] = 8'h46;   // IHL 6: UDP and TPP move 4 bytes
    pkt.bytes[40] = 8'h66; pkt.bytes[41] = 8'h66; pkt.bytes[46] = 8'd14; pkt.bytes[47] = 8'd0; #1;
    chk(is_tpp && tpp_off == 8'd46, "IPv4 options move the TPP");
    // malformed: instruction bytes not a multiple of 4
    pkt = mk_tpp(0, 0, 0, 0, ins, 2, pm, 2);
    pkt.bytes[14] = pkt.bytes[14] + 8'd1; #1;
    chk(!is_tpp, "bad length rejected");
    // too many instructions
    pkt = mk_tpp(0, 0, 0, 0, ins, 2, pm, 2);
    pkt.bytes[14] = 8'(14 + 24 + 8); #1;
    chk(!is_tpp, "six instructions rejected");
    // TPP longer than the frame
    pkt = mk_tpp(0, 0, 0, 0, ins, 2, pm, 2, 30); #1;
    chk(!is_tpp, "TPP beyond frame rejected");
    // packet memory larger than the visible window
    pkt = mk_tpp(0, 0, 0, 0, ins, 1, pm, 14, 128); #1;
    chk(is_tpp && int'(n_pmem) == PMEM_WORDS, "packet memory clipped to window");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
