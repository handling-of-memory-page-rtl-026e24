// fifo_read_fsm: AXI-lite read port of the page-fault log, with the state
// machine that pops an entry only after software has read all of it.
//
// A 128-bit log entry is read in ENTRY_W/DATA_W parts of DATA_W bits: two
// 64-bit reads in the main configuration, as in the paper, or four 32-bit
// reads (DATA_W = 32), the width the paper's first prototype used, or one
// 128-bit read that pops at once (DATA_W = 128), the widest read the paper
// says its current interface allows. Part n of
// the head entry is at byte offset n*DATA_W/8 from the base of the port
// (0x0 and 0x8 for 64-bit reads). The state machine remembers which part is
// expected next. Reading the expected part advances it; reading the last
// part when it is expected pops the entry. Reading part 0 at any time
// restarts the sequence. Reading any other part out of order returns the data
// but changes nothing, so reading the second half first never pops the entry,
// which is the safety rule the paper gives. When the log is empty every read
// returns zero, so the Valid bit (bit 0 of each 32-bit word) reads 0. Reads
// above the entry's offsets (araddr[ADDR_W-1:4] non-zero) return zero and
// change nothing; that decoding and the address width are this design's
// choices.
//
// Timing: one read in flight. arready is high while no read data is pending;
// the data is captured, and the pop made, in the cycle of the address
// handshake, and rvalid rises in the next cycle and stays until rready.
// rresp is always OKAY. The write channels of the AXI-lite port are not part
// of this block: the paper's log is only read.
module fifo_read_fsm
  import pf_log_pkg::*;
#(
  parameter int unsigned DATA_W = 64,   // 64 (main), 32 or 128
  parameter int unsigned ADDR_W = 12
) (
  input  logic               clk,
  input  logic               rst_n,         // synchronous, active low
  // AXI-lite read address / read data channels
  input  logic [ADDR_W-1:0]  s_araddr,
  input  logic               s_arvalid,
  output logic               s_arready,
  output logic [DATA_W-1:0]  s_rdata,
  output logic [1:0]         s_rresp,
  output logic               s_rvalid,
  input  logic               s_rready,
  // head of the log
  input  logic [ENTRY_W-1:0] head,
  input  logic               empty,
  output logic               pop
);

  localparam int unsigned NPARTS = ENTRY_W / DATA_W;
  localparam int unsigned PART_W = (NPARTS > 1) ? $clog2(NPARTS) : 1;
  localparam int unsigned LSB    = $clog2(DATA_W / 8);        // first part-select bit
  localparam int unsigned HI     = $clog2(ENTRY_W / 8);       // first bit above the entry

  logic              rd_fire, in_range;
  logic [PART_W-1:0] part, next_part;
  logic [DATA_W-1:0] part_data;

  assign rd_fire   = s_arvalid && s_arready;
  assign s_arready = !s_rvalid;
  assign s_rresp   = RESP_OKAY;
  assign part      = PART_W'(s_araddr[LSB +: PART_W]);
  assign in_range  = (s_araddr >> HI) == '0;
  assign part_data = head[part*DATA_W +: DATA_W];
  assign pop       = rd_fire && in_range && !empty && (part == next_part)
                     && (part == PART_W'(NPARTS - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
      next_part <= '0;
    end else begin
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        s_rdata  <= (in_range && !empty) ? part_data : '0;
        if (in_range && !empty) begin
          if (pop)                      next_part <= '0;
          else if (part == next_part)   next_part <= next_part + 1'b1;
          else if (part == '0)          next_part <= PART_W'(1);
        end
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rules: the master holds a read address until it is taken, and this
  // slave holds its read data until it is taken.
  a_ar_stable : assert property (@(posedge clk) disable iff (!rst_n)
      s_arvalid && !s_arready |=> s_arvalid && $stable(s_araddr))
    else $error("fifo_read_fsm: araddr changed or arvalid dropped before arready");
  a_r_stable : assert property (@(posedge clk) disable iff (!rst_n)
      s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata))
    else $error("fifo_read_fsm: rdata changed or rvalid dropped before rready");

  initial begin
    assert (DATA_W == 32 || DATA_W == 64 || DATA_W == 128)
      else $error("fifo_read_fsm: DATA_W must be 32, 64 or 128");
  end

endmodule
