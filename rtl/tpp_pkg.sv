// tpp_pkg -- shared types and constants of the tiny-packet-program (TPP) switch datapath.
//
// A TPP is an Ethernet frame that carries a short program (at most five 32-bit
// instructions) and a preallocated scratch area ("packet memory") that the
// program reads and writes at every switch it crosses.  This package holds the
// wire formats (TPP header, instruction word), the per-packet header vector that
// travels down the pipeline, and the switch memory map the instructions address.
//
// What follows the paper: the 0x6666 ethertype / UDP port, the header layout of
// an 8-byte header, 4-byte application ID, instructions, packet memory and a
// trailing 2-byte encapsulated-protocol field, five instructions (160 bits) and
// a 320-bit packet-memory window per stage, 8 registers and 64 kbit of 128-bit
// wide SRAM per stage, address 0xB000 for the packet's queue occupancy, and a
// stack pointer counted in bytes that moves by 4 per PUSH.
// What is this design's own choice: the bit widths of the header fields, the
// instruction encoding (opcode 4 b, address 16 b, two 6-bit packet-memory
// operands), the opcode numbers, and the rest of the memory map.
package tpp_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned WORD_W     = 32;  // TPP data word (SP moves by 4 bytes)
  localparam int unsigned ADDR_W     = 16;  // switch memory address
  localparam int unsigned MAX_INSTR  = 5;   // 160 bits of instructions
  localparam int unsigned PMEM_WORDS = 10;  // 320 bits of packet memory
  localparam int unsigned PIDX_W     = $clog2(PMEM_WORDS);
  localparam int unsigned IIDX_W     = $clog2(MAX_INSTR + 1);
  localparam int unsigned HDR_BYTES  = 128; // header window carried by the pipeline
  localparam int unsigned LEN_W      = 16;  // packet length in bytes

  // ------------------------------------------------------------ encodings
  localparam logic [15:0] ETHERTYPE_TPP  = 16'h6666;
  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IPPROTO_UDP    = 8'd17;
  localparam logic [15:0] UDP_PORT_TPP   = 16'h6666;

  // TPP layout in bytes, from the start of the TPP header
  localparam int unsigned TPP_HDR_BYTES   = 8;   // fields 1..6
  localparam int unsigned TPP_APPID_BYTES = 4;
  localparam int unsigned TPP_PROTO_BYTES = 2;   // field 7, after packet memory
  localparam int unsigned TPP_INSTR_OFF   = TPP_HDR_BYTES + TPP_APPID_BYTES;  // 12
  localparam int unsigned TPP_FIXED_BYTES = TPP_INSTR_OFF + TPP_PROTO_BYTES;  // 14

  // field 3: packet memory addressing mode
  localparam logic [7:0] MODE_STACK = 8'd0;
  localparam logic [7:0] MODE_HOP   = 8'd1;

  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_LOAD   = 4'd1,   // LOAD   [addr], [Packet:a]      switch -> packet
    OP_STORE  = 4'd2,   // STORE  [addr], [Packet:a]      packet -> switch
    OP_PUSH   = 4'd3,   // PUSH   [addr]                  switch -> packet[SP++]
    OP_POP    = 4'd4,   // POP    [addr]                  packet[--SP] -> switch
    OP_CSTORE = 4'd5,   // CSTORE [addr], [Packet:a=old], [Packet:b=new]
    OP_CEXEC  = 4'd6    // CEXEC  [addr], [Packet:a=mask], [Packet:b=value]
  } opcode_e;

  // instruction word, big-endian on the wire
  typedef struct packed {
    opcode_e           op;
    logic [ADDR_W-1:0] addr;
    logic [5:0]        off_a;
    logic [5:0]        off_b;
  } instr_t;

  // 8-byte TPP header (fields 1..6 of the packet structure)
  typedef struct packed {
    logic [7:0]  tpp_len;    // 1: length of the TPP in bytes
    logic [7:0]  pmem_len;   // 2: length of packet memory in bytes
    logic [7:0]  mode;       // 3: addressing mode (stack / hop)
    logic [7:0]  hop_sp;     // 4: hop number, or stack pointer in bytes
    logic [7:0]  hop_len;    // 5: per-hop memory length in words
    logic [7:0]  rsvd;
    logic [15:0] checksum;   // 6: TPP checksum (carried, not checked)
  } tpp_hdr_t;

  // instruction after PUSH/POP translation; packet operands are absolute word indices
  typedef struct packed {
    logic              valid;
    opcode_e           op;     // OP_NOP, OP_LOAD, OP_STORE, OP_CSTORE, OP_CEXEC
    logic [ADDR_W-1:0] addr;
    logic              a_ok;   // operand a lies inside packet memory
    logic [PIDX_W-1:0] pa;
    logic              b_ok;
    logic [PIDX_W-1:0] pb;
  } uop_t;

  typedef struct packed {
    logic [HDR_BYTES-1:0][7:0] bytes;  // bytes[i] is byte i of the frame
    logic [LEN_W-1:0]          len;    // whole frame length
  } pkt_t;

  // per-packet metadata produced by the forwarding logic
  typedef struct packed {
    logic [7:0]  in_port;
    logic [7:0]  out_port;
    logic [15:0] entry_id;   // matched flow entry
  } meta_t;

  // packet header vector travelling through the TCPU stages
  typedef struct packed {
    pkt_t                               pkt;
    meta_t                              meta;
    logic                               is_tpp;
    logic [7:0]                         tpp_off;   // byte offset of the TPP header
    tpp_hdr_t                           hdr;
    logic [IIDX_W-1:0]                  n_instr;
    logic [PIDX_W:0]                    n_pmem;    // packet memory words visible to the switch
    uop_t [MAX_INSTR-1:0]               uop;
    logic [PMEM_WORDS-1:0][WORD_W-1:0]  pmem;
    logic [7:0]                         new_hop_sp;
    logic [IIDX_W-1:0]                  halt_idx;  // first failed conditional, MAX_INSTR = none
  } phv_t;

  // ----------------------------------------------------------- memory map
  // Per switch (served by the first stage)
  localparam logic [ADDR_W-1:0] A_SWITCH_ID   = 16'hA000;
  localparam logic [ADDR_W-1:0] A_SWITCH_VER  = 16'hA001;
  // Per packet (first stage: input port, entry; last stage: output side)
  localparam logic [ADDR_W-1:0] A_QUEUE_OCC   = 16'hB000;  // bytes in the packet's output queue
  localparam logic [ADDR_W-1:0] A_IN_PORT     = 16'hB001;
  localparam logic [ADDR_W-1:0] A_OUT_PORT    = 16'hB002;  // writable
  localparam logic [ADDR_W-1:0] A_ENTRY_ID    = 16'hB003;
  localparam logic [ADDR_W-1:0] A_QUEUE_PKTS  = 16'hB004;
  // Per link, for the packet's output link (last stage, shared link registers)
  localparam logic [ADDR_W-1:0] A_LINK_ID      = 16'hC000;
  localparam logic [ADDR_W-1:0] A_LINK_QBYTES  = 16'hC001;
  localparam logic [ADDR_W-1:0] A_LINK_RX_UTIL = 16'hC002;
  localparam logic [ADDR_W-1:0] A_LINK_RX_BYTES= 16'hC003;
  localparam logic [ADDR_W-1:0] A_LINK_TX_UTIL = 16'hC004;
  localparam logic [ADDR_W-1:0] A_LINK_TX_BYTES= 16'hC005;
  localparam logic [ADDR_W-1:0] A_LINK_APP0    = 16'hC006;  // writable
  localparam logic [ADDR_W-1:0] A_LINK_APP1    = 16'hC007;  // writable
  localparam logic [ADDR_W-1:0] A_LINK_RX_PKTS = 16'hC008;
  localparam logic [ADDR_W-1:0] A_LINK_TX_PKTS = 16'hC009;
  localparam logic [ADDR_W-1:0] A_LINK_DROP_BYTES = 16'hC00A;
  localparam logic [ADDR_W-1:0] A_LINK_DROP_PKTS  = 16'hC00B;
  localparam int unsigned       N_LINK_REGS    = 12;
  // Per stage s (0-based): base (s+1)<<12; +0..7 registers, +8 stage clock,
  // +0x800..0xFFF SRAM words (2048 x 32 bit = 64 kbit)
  localparam int unsigned       MAX_STAGES     = 9;

  function automatic logic [ADDR_W-1:0] stage_base(input int unsigned s);
    return ADDR_W'((s + 1) << 12);
  endfunction

  function automatic logic is_write_op(input opcode_e op);
    return (op == OP_STORE) || (op == OP_CSTORE);
  endfunction

  // addresses served through the shared link/queue register block
  function automatic logic is_ext_addr(input logic [ADDR_W-1:0] a);
    return (a == A_QUEUE_OCC) || (a == A_QUEUE_PKTS) ||
           (a[15:8] == 8'hC0 && a[7:0] < 8'(N_LINK_REGS));
  endfunction

endpackage
