// urma_pkg: types and constants shared by every element of the Unified Bus
// NIC pipeline (transport and transaction layers).
//
// The pipeline moves one packet per handshake as a packed `pkt_t`. The struct
// is laid out in 64-bit words in wire order, so the Ethernet encapsulator can
// serialise it word by word and a load/store bypass frame can send only its
// leading words. Field widths follow the state table of the design (10-bit
// Jetty and TP-Channel ids for 1024 of each, 24-bit PSN); the bit layout itself
// is this implementation's own, not the specification's.
package urma_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned JETTY_W   = 10;   // 1024 Jetties
  localparam int unsigned TPC_W     = 10;   // 1024 TP Channels
  localparam int unsigned PSN_W     = 24;
  localparam int unsigned TSN_W     = 16;   // per-Jetty transaction sequence
  localparam int unsigned CNA_W     = 16;   // compute node address
  localparam int unsigned MRKEY_W   = 6;    // 64-entry memory-region table
  localparam int unsigned WORD_W    = 64;   // wire word: 8 bytes per cycle
  localparam int unsigned PKT_WORDS = 10;   // words of a full frame, FCS excluded
  localparam int unsigned BYP_WORDS = 6;    // words of a TP-bypass frame, FCS excluded
  localparam logic [15:0] UB_ETYPE  = 16'h88B5;  // local-experimental ethertype
  localparam logic [31:0] MAC_OUI   = 32'h0200_5542; // locally administered MAC prefix

  typedef logic [JETTY_W-1:0] jetty_id_t;
  typedef logic [TPC_W-1:0]   tpc_id_t;
  typedef logic [PSN_W-1:0]   psn_t;
  typedef logic [TSN_W-1:0]   tsn_t;
  typedef logic [CNA_W-1:0]   cna_t;
  typedef logic [MRKEY_W-1:0] mr_key_t;

  // ------------------------------------------------------------ encodings
  typedef enum logic [3:0] {
    OP_NOP        = 4'd0,
    OP_WRITE      = 4'd1,
    OP_READ       = 4'd2,
    OP_SEND       = 4'd3,
    OP_ATOMIC     = 4'd4,
    OP_LOAD       = 4'd5,   // load/store aperture, TP bypass
    OP_STORE      = 4'd6,   // load/store aperture, TP bypass
    OP_READ_RESP  = 4'd8,
    OP_TAACK      = 4'd9,   // transaction-layer ack for WRITE / SEND
    OP_ATOMIC_RESP= 4'd10,
    OP_LOAD_RESP  = 4'd11,
    OP_STORE_ACK  = 4'd12
  } opcode_e;

  typedef enum logic [3:0] {
    AT_SWAP = 4'd0, AT_LOAD = 4'd1, AT_STORE = 4'd2, AT_FADD = 4'd3,
    AT_FSUB = 4'd4, AT_FAND = 4'd5, AT_FOR  = 4'd6, AT_FXOR = 4'd7,
    AT_CAS  = 4'd8
  } atomic_op_e;

  // service mode: reliable-ordered by initiator / target / lower layer, unordered
  typedef enum logic [1:0] { SM_ROI = 2'd0, SM_ROT = 2'd1, SM_ROL = 2'd2, SM_UNO = 2'd3 } svc_mode_e;
  // execution order tag: no order, relaxed order, strong order
  typedef enum logic [1:0] { EO_NO = 2'd0, EO_RO = 2'd1, EO_SO = 2'd2 } exec_ord_e;
  typedef enum logic [1:0] { TP_RTP = 2'd0, TP_UTP = 2'd1 } tp_type_e;  // reliable / bypass
  typedef enum logic [1:0] { RTP_DATA = 2'd0, RTP_ACK = 2'd1, RTP_SACK = 2'd2 } rtp_op_e;
  typedef enum logic [3:0] {
    ST_OK = 4'd0, ST_MR_FAULT = 4'd1, ST_BAD_OP = 4'd2, ST_NO_RQ = 4'd3, ST_TIMEOUT = 4'd4
  } status_e;

  // ----------------------------------------------------------- packet (wire order)
  typedef struct packed {
    // words 0-1: Ethernet header (14 B) + frame word count
    logic [47:0] dst_mac;
    logic [47:0] src_mac;
    logic [15:0] etype;
    logic [7:0]  nwords;
    logic [7:0]  eth_rsvd;
    // word 2: network transport header (NTH)
    cna_t        src_cna;
    cna_t        dst_cna;
    tp_type_e    tp_type;
    logic [1:0]  lane;        // multi-path lane picked by the TP group dispatcher
    logic [7:0]  cc_hint;     // C-AQM bandwidth hint
    logic [19:0] nth_rsvd;
    // words 3-4: base transaction header (BTAH)
    opcode_e     op;
    atomic_op_e  aop;
    svc_mode_e   sm;
    exec_ord_e   eo;
    logic        fence;
    logic        comp_ord;    // completion in issue order
    jetty_id_t   src_jetty;
    jetty_id_t   dst_jetty;
    tsn_t        tsn;
    mr_key_t     mr_key;
    status_e     status;
    logic [3:0]  btah_rsvd;
    logic [31:0] addr;
    logic [31:0] token;
    // word 5: payload / operand (<= 8 B)
    logic [63:0] data;
    // words 6-7: reliable transport header (RTPH)
    tpc_id_t     src_tpn;
    tpc_id_t     dst_tpn;
    psn_t        psn;
    rtp_op_e     rtp_op;
    logic        ack_req;
    logic        fecn;        // forward congestion mark, set by switches
    logic        ece;         // congestion echo in an ACK
    logic        fused;       // ACK also carries the transaction ack
    logic [13:0] rtph_rsvd;
    psn_t        ack_psn;     // cumulative: every PSN <= ack_psn received
    logic [15:0] jg_key;      // initiator-supplied hash key for Jetty-Group dispatch
    logic [15:0] len;         // payload bytes
    logic [7:0]  ctx;         // one-shot context tag (load/store path)
    // word 8: selective-ack bitmap, bit i = PSN ack_psn+1+i received
    logic [63:0] sack;
    // word 9: CAS compare operand
    logic [63:0] cmp;
  } pkt_t;

  // ---------------------------------------------------------- work queue entry
  typedef struct packed {
    opcode_e     op;
    atomic_op_e  aop;
    svc_mode_e   sm;
    exec_ord_e   eo;
    logic        fence;
    logic        comp_ord;
    jetty_id_t   jetty;       // issuing Jetty
    cna_t        dst_cna;     // remote host; selects the TP Channel
    jetty_id_t   dst_jetty;
    mr_key_t     mr_key;
    logic [31:0] addr;
    logic [31:0] token;
    logic [63:0] data;
    logic [63:0] cmp;
    logic [15:0] len;
    logic [15:0] jg_key;
  } wqe_t;

  // ---------------------------------------------------------- completion entry
  typedef struct packed {
    logic [7:0]  jfc;         // completion queue of the Jetty
    jetty_id_t   jetty;
    tsn_t        tsn;
    opcode_e     op;
    status_e     status;
    logic        comp_ord;
    svc_mode_e   sm;
    exec_ord_e   eo;
    logic [63:0] data;        // READ / atomic result, inline
  } cqe_t;

  // scheduled work request: a WQE plus the transaction sequence number it drew
  typedef struct packed {
    wqe_t        w;
    tsn_t        tsn;
  } wr_t;

  // wire word on the Ethernet side
  typedef struct packed {
    logic [63:0] data;
    logic        last;
  } wword_t;

  // per-Jetty record (20 B in the state table)
  typedef struct packed {
    logic [31:0] jetty_id;
    logic [31:0] token;
    logic [31:0] jfc_id;
    logic [7:0]  jtype;
    logic [7:0]  jstate;
    logic [7:0]  valid;
  } jetty_rec_t;

  // per-TP-Channel configuration held in the TP table
  typedef struct packed {
    cna_t        remote_cna;
    tpc_id_t     local_tpn;
    tpc_id_t     remote_tpn;
    logic        selective;   // 1: selective retransmit, 0: go-back-N
    logic        valid;
  } tpc_cfg_t;

  // memory-region record (32 B in the state table)
  typedef struct packed {
    logic [31:0] base;
    logic [31:0] len;
    logic [31:0] token;
    logic        perm_r;
    logic        perm_w;
    logic        perm_a;
    logic        valid;
  } mr_rec_t;

  // acknowledgement event broadcast from the RX parser to the TX transport
  typedef struct packed {
    tpc_id_t     tpc;
    psn_t        ack_psn;
    logic        is_sack;
    logic [63:0] sack;
    logic        ece;
  } ack_evt_t;

  // request from the receive channel logic to the transport ACK generator
  typedef struct packed {
    pkt_t        hdr;         // the data packet being acknowledged
    tpc_id_t     tpc;         // local channel
    psn_t        ack_psn;
    logic [63:0] sack;
    logic        ece;
    logic        fused;
  } ackreq_t;

  function automatic logic [47:0] cna_mac(cna_t c);
    return {MAC_OUI, c};
  endfunction

  // CRC-32 (IEEE 802.3 polynomial, reflected) over one 64-bit word, LSB first
  function automatic logic [31:0] crc32_word(logic [31:0] crc_in, logic [63:0] w);
    logic [31:0] c;
    c = crc_in;
    for (int i = 0; i < 64; i++) begin
      if ((c[0] ^ w[i]) == 1'b1) c = (c >> 1) ^ 32'hEDB88320;
      else                       c = c >> 1;
    end
    return c;
  endfunction

  function automatic logic [63:0] pkt_word(pkt_t p, int unsigned i);
    logic [PKT_WORDS*WORD_W-1:0] flat;
    flat = p;
    return flat[(PKT_WORDS-1-i)*WORD_W +: WORD_W];
  endfunction

  function automatic logic is_response(opcode_e op);
    return op inside {OP_READ_RESP, OP_TAACK, OP_ATOMIC_RESP, OP_LOAD_RESP, OP_STORE_ACK};
  endfunction

endpackage
