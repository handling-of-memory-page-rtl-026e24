// nack_dedup: decides which write responses of the receiver enter the
// page-fault log, and formats the log entry.
//
// The receiver reports every packet whose memory write has completed
// (nack_valid, with the packet's identity in nack). A report whose AXI
// response is SLVERR (2'b10) is a fault to be logged, as in the paper, which
// logs every packet that met a slave error; other responses are ignored.
// Because every 256-byte packet of a faulting 16 KB transaction meets the
// same fault, the paper's hardware compares a new fault with the entry it
// pushed last and drops it when the source node id, transaction id, sequence
// number and virtual page (IOVA without the page offset) are all equal. This
// module does that with one register holding the key of the last push.
//
// push and entry are combinational from the inputs (same cycle as
// nack_valid); the last-push key is updated at the clock edge of the push, so
// a repeat in the very next cycle is already caught. The key is kept after
// the entry is read out of the log: the paper compares with the last entry
// pushed, not with what is still stored. When the log is full the fault is
// dropped (full_drop) and the key is left unchanged, so the same fault is
// logged once there is room again; the paper does not say what happens when
// its log is full, and the initiator's time-out covers the lost entry.
// DECERR responses are not logged: the paper speaks of slave errors only.
module nack_dedup
  import pf_log_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,       // synchronous, active low
  input  logic               nack_valid,
  input  pf_nack_t           nack,
  input  logic               fifo_full,
  output logic               push,
  output logic [ENTRY_W-1:0] entry,
  output logic               dup_drop,    // fault dropped as a repeat of the last push
  output logic               full_drop    // fault dropped because the log is full
);

  pf_key_t last_key;
  logic    last_valid;
  logic    is_fault, is_dup;

  assign is_fault  = nack_valid && (nack.bresp == RESP_SLVERR);
  assign is_dup    = last_valid && (key_of(nack) == last_key);
  assign push      = is_fault && !is_dup && !fifo_full;
  assign dup_drop  = is_fault && is_dup;
  assign full_drop = is_fault && !is_dup && fifo_full;
  assign entry     = pack_entry(nack);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_valid <= 1'b0;
      last_key   <= '0;
    end else if (push) begin
      last_valid <= 1'b1;
      last_key   <= key_of(nack);
    end
  end

endmodule
