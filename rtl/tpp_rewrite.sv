// tpp_rewrite -- writes a TPP's results back into the packet bytes.
//
// After the last stage, the packet memory words (big-endian) go back to their
// places in the frame, and header field 4 takes its new value: the hop number
// plus one in hop mode, the advanced stack pointer in stack mode, so that the
// next switch continues where this one stopped.  The frame keeps its length:
// packet memory is preallocated by the end-host and the TPP never grows or
// shrinks inside the network.  Ordinary packets pass unchanged.
//
// Interface: combinational.  Own choice: the TPP checksum (field 6) is left as
// it came, since how it is computed is not specified.
module tpp_rewrite
  import tpp_pkg::*;
(
  input  phv_t phv,
  output pkt_t pkt
);

  logic [9:0] b0;  // byte offset of packet memory word 0

  always_comb begin
    pkt = phv.pkt;
    b0  = 10'(int'(phv.tpp_off) + TPP_INSTR_OFF + 4 * int'(phv.n_instr));
    if (phv.is_tpp) begin
      pkt.bytes[int'(phv.tpp_off) + 3] = phv.new_hop_sp;
      for (int unsigned w = 0; w < PMEM_WORDS; w++) begin
        if (w < int'(phv.n_pmem)) begin
          for (int unsigned j = 0; j < 4; j++)
            pkt.bytes[int'(b0) + 4*w + j] = phv.pmem[w][8*(3-j) +: 8];
        end
      end
    end
  end

endmodule
