// pf_rx_fault_log: the page-fault log on the receiver side of the RDMA
// engine, the hardware part of destination-side page-fault handling.
//
// When a remote write reaches this node and its destination page is not
// resident, the SMMU fails the translation and the memory write ends with an
// AXI slave error. The receiver then NACKs the packet to the initiator, which
// pauses that transaction, and reports the packet here. This block keeps one
// entry per distinct fault until the kernel driver, woken by the SMMU's
// context-fault interrupt, reads it over AXI-lite, pages the faulting page in
// and asks the initiator to retransmit the transaction.
//
// Three parts, in the order a fault passes through them:
//   nack_dedup     keeps slave errors only, drops a repeat of the last entry
//                  pushed (same node, transaction, sequence number and page),
//                  and formats the 128-bit entry;
//   fault_fifo     512 x 128-bit queue of entries;
//   fifo_read_fsm  AXI-lite read port: two 64-bit reads per entry, popped
//                  only after the first and then the second half was read.
// The sizes, the entry layout, the filter rule and the read-then-pop rule
// are the paper's; the report interface, what happens when the queue is full
// (the fault is dropped and counted out on full_drop), the address decoding
// and the reset are this design's choices.
//
// Timing: a fault reported in cycle t can be read from cycle t+1; an AXI-lite
// read returns data one cycle after its address handshake.
module pf_rx_fault_log
  import pf_log_pkg::*;
#(
  parameter int unsigned DEPTH  = 512,
  parameter int unsigned DATA_W = 64,   // read width: 64 (main), 32 or 128
  parameter int unsigned ADDR_W = 12
) (
  input  logic                       clk,
  input  logic                       rst_n,      // synchronous, active low
  // write-response reports from the receiver
  input  logic                       nack_valid,
  input  pf_nack_t                   nack,
  // AXI-lite read port for the driver
  input  logic [ADDR_W-1:0]          s_araddr,
  input  logic                       s_arvalid,
  output logic                       s_arready,
  output logic [DATA_W-1:0]          s_rdata,
  output logic [1:0]                 s_rresp,
  output logic                       s_rvalid,
  input  logic                       s_rready,
  // status
  output logic                       log_empty,
  output logic [$clog2(DEPTH+1)-1:0] log_count,
  output logic                       dup_drop,
  output logic                       full_drop
);

  logic               push, pop, full;
  logic [ENTRY_W-1:0] entry, head;

  nack_dedup u_dedup (
    .clk, .rst_n,
    .nack_valid, .nack,
    .fifo_full (full),
    .push, .entry,
    .dup_drop, .full_drop
  );

  fault_fifo #(.DEPTH(DEPTH), .WIDTH(ENTRY_W)) u_fifo (
    .clk, .rst_n,
    .push, .wr_data (entry),
    .pop, .rd_data (head),
    .empty (log_empty), .full,
    .count (log_count)
  );

  fifo_read_fsm #(.DATA_W(DATA_W), .ADDR_W(ADDR_W)) u_rd (
    .clk, .rst_n,
    .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .head, .empty (log_empty), .pop
  );

endmodule
