// pf_log_pkg: shared types, widths and the entry layout of the receiver-side
// page-fault log.
//
// When a remote write arrives at the destination node and the local SMMU
// cannot translate the destination virtual address, the memory write ends
// with an AXI slave error. The receiver reports the packet's identity
// (initiator node, transaction, sequence number, protection domain, faulting
// IOVA) to the fault log, which keeps it until software reads it, touches the
// page and asks the initiator to retransmit.
//
// Field widths follow the paper: source node id 22 bits, transaction id 14,
// sequence number 14, protection domain id 16, and a 32-bit IOVA field made
// of a 4-bit process index, one bit tied to zero and the 27 page-number bits
// of a 39-bit virtual address (page offset of 12 bits dropped).
//
// A log entry is 128 bits, four 32-bit words, each with a Valid flag in bit 0:
//   word0: [31:30]=0  [29:8]=src_id     [7:6]=0  [5:4]=tr_id[13:12] [3:1]=0 [0]=V
//   word1: [31:20]=tr_id[11:0] [19:18]=0 [17:4]=seq_num            [3:1]=0 [0]=V
//   word2: [31:16]=pdid [15:4]=iova[31:20] [3]=0 [2:1]=exa_ack            [0]=V
//   word3: [31:12]=iova[19:0]  [11:1]=0                                   [0]=V
// The entry is stored as {word3, word2, word1, word0}, so the n-th read of
// width W returns bits [n*W +: W]: with 64-bit reads the first read returns
// {word1, word0} and the second {word3, word2}. Putting the lower-numbered
// word in the lower half is this design's choice; the paper gives the words
// and their order of reading, not the byte lanes.
package pf_log_pkg;

  localparam int unsigned SRC_ID_W   = 22;
  localparam int unsigned TR_ID_W    = 14;
  localparam int unsigned SEQ_W      = 14;
  localparam int unsigned PDID_W     = 16;
  localparam int unsigned VA_W       = 39;  // virtual address width supported
  localparam int unsigned PROC_IDX_W = 4;   // process index within a protection domain
  localparam int unsigned PAGE_OFF_W = 12;  // 4 KB pages
  localparam int unsigned IOVA_IN_W  = PROC_IDX_W + VA_W;  // 43
  localparam int unsigned IOVA_FLD_W = 32;
  localparam int unsigned ENTRY_W    = 128;
  localparam int unsigned WORD_W     = 32;

  // AXI response codes
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  // What the receiver reports for every completed memory write of a packet.
  // iova = {process index, 39-bit virtual address}.
  typedef struct packed {
    logic [SRC_ID_W-1:0]  src_id;
    logic [TR_ID_W-1:0]   tr_id;
    logic [SEQ_W-1:0]     seq_num;
    logic [PDID_W-1:0]    pdid;
    logic [IOVA_IN_W-1:0] iova;
    logic [1:0]           exa_ack;  // acknowledgement code returned to the initiator
    axi_resp_e            bresp;    // AXI write response from the memory side
  } pf_nack_t;

  // The part of a report that identifies a faulting page of a transfer; two
  // reports with equal keys describe the same fault.
  typedef struct packed {
    logic [SRC_ID_W-1:0]   src_id;
    logic [TR_ID_W-1:0]    tr_id;
    logic [SEQ_W-1:0]      seq_num;
    logic [IOVA_FLD_W-1:0] iova_fld;
  } pf_key_t;

  // 32-bit IOVA field: {process index, 1'b0, VA[38:12]}
  function automatic logic [IOVA_FLD_W-1:0] iova_field(input logic [IOVA_IN_W-1:0] iova);
    return {iova[IOVA_IN_W-1 -: PROC_IDX_W], 1'b0, iova[VA_W-1:PAGE_OFF_W]};
  endfunction

  function automatic pf_key_t key_of(input pf_nack_t n);
    pf_key_t k;
    k.src_id   = n.src_id;
    k.tr_id    = n.tr_id;
    k.seq_num  = n.seq_num;
    k.iova_fld = iova_field(n.iova);
    return k;
  endfunction

  // Format one log entry (see the layout above).
  function automatic logic [ENTRY_W-1:0] pack_entry(input pf_nack_t n);
    logic [IOVA_FLD_W-1:0] f;
    logic [WORD_W-1:0] w0, w1, w2, w3;
    f  = iova_field(n.iova);
    w0 = {2'b00, n.src_id, 2'b00, n.tr_id[13:12], 3'b000, 1'b1};
    w1 = {n.tr_id[11:0], 2'b00, n.seq_num, 3'b000, 1'b1};
    w2 = {n.pdid, f[31:20], 1'b0, n.exa_ack, 1'b1};
    w3 = {f[19:0], 11'b0, 1'b1};
    return {w3, w2, w1, w0};
  endfunction

endpackage
