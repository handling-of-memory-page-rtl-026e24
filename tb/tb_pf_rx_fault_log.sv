// tb_pf_rx_fault_log: end-to-end test of the receiver-side page-fault log at
// its default size (512 entries, 64-bit reads), inside a behavioural model of
// a remote write with page faults at the destination.
//
// The models around the log, all in this file:
//   initiator   splits a transfer into 16 KB transactions and those into
//               256-byte packets, keeps at most two transactions in flight
//               and interleaves their packets one per cycle. A transaction
//               whose attempt met a NACK pauses; it is sent again, with its
//               sequence number incremented, when a retransmit request with
//               the current sequence number arrives, or when its time-out
//               expires. Requests with an old sequence number are ignored.
//   receiver    writes a packet if its destination page is resident and
//               reports OKAY, otherwise reports SLVERR (the SMMU's
//               translation fault); every report goes to the log.
//   driver      reads the log over AXI-lite (first half, then second half),
//               checks each entry, pages the faulting page in after a delay
//               (one page, or up to four pages of the buffer in touch-ahead
//               mode) and sends a retransmit request for the entry's
//               transaction and sequence number. Like the published driver,
//               it remembers the last two entries it handled and skips an
//               entry that repeats one of them (same transaction, sequence
//               number and page), since two interleaved transactions defeat
//               the log's own one-entry filter.
// Every entry read is compared bit for bit with an entry assembled here from
// the report that caused it; the filter's decisions are predicted here from
// the rule "drop a slave error equal to the last logged one". Every transfer
// must finish with every packet written and the log empty.
//
// Runs: the paper's transfer sizes (16 B to 64 KB) with every destination
// page absent, in touch-one-page and touch-ahead modes; a 64 KB transfer with
// all pages resident (nothing may be logged); and an overload, where the
// driver stalls while time-outs resend two interleaved transactions until the
// log is full and faults are dropped, after which the driver drains it and
// the transfer finishes. Counted, and required at least once: logged faults,
// repeats dropped, faults dropped when full, pops, a second half read first
// without a pop, an empty read, retransmits on request, stale requests
// ignored, time-out retransmits, and entries the driver skipped.
module tb_pf_rx_fault_log;
  import pf_log_pkg::*;

  localparam int DEPTH   = 512;
  localparam int PKT     = 256;
  localparam int BLK     = 16384;
  localparam int PAGE    = 4096;
  localparam int MAX_OUT = 2;
  localparam logic [21:0] SRC   = 22'h0A0B0C;
  localparam logic [15:0] PDID  = 16'h0005;
  localparam logic [3:0]  PROC  = 4'h1;
  localparam int TOUCH_ONE_DELAY   = 150;   // cycles to page one page in
  localparam int TOUCH_AHEAD_DELAY = 250;   // cycles to page up to four pages in
  localparam int MBOX_DELAY        = 20;    // retransmit request to the initiator

  logic clk = 1'b0, rst_n = 1'b0;
  logic nack_valid = 1'b0;
  pf_nack_t nack = '0;
  logic [11:0] s_araddr = '0;
  logic s_arvalid = 1'b0, s_arready, s_rvalid, s_rready = 1'b0;
  logic [63:0] s_rdata;
  logic [1:0] s_rresp;
  logic log_empty, dup_drop, full_drop;
  logic [9:0] log_count;

  pf_rx_fault_log dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // mechanism counters
  int n_reports = 0, n_slverr = 0, n_logged = 0, n_dup = 0, n_full = 0;
  int n_pops = 0, n_ooo_nopop = 0, n_empty_reads = 0;
  int n_req_retx = 0, n_stale_req = 0, n_timeout_retx = 0, n_resident_entries = 0;
  int n_drv_skip = 0;

  // ------------------------------------------------------------------
  // destination memory: resident pages and written packets
  bit resident[longint];          // by page number
  bit written[longint];           // by packet address
  longint buf_lo, buf_hi;         // destination buffer of the running transfer

  // ------------------------------------------------------------------
  // initiator state, one slot per transaction of the running transfer
  typedef enum {T_WAIT, T_SEND, T_PAUSED, T_DONE} tstate_e;
  typedef struct {
    int        tr;
    int        seq;
    longint    base;
    int        len;
    int        next_pkt;
    int        npkts;
    bit        nacked;
    bit        retr_req;
    longint    paused_at;
    tstate_e   st;
  } trans_t;
  trans_t tx[$];
  int next_tr = 100;
  int timeout_cycles = 30000;

  // retransmit requests in flight to the initiator's mailbox
  typedef struct { longint due; int tr; int seq; } req_t;
  req_t mbox[$];

  // expected log content and the filter's last logged key
  logic [127:0] exp_q[$];
  logic [101:0] last_key;
  bit last_valid = 0;

  function automatic logic [127:0] exp_entry(input pf_nack_t n);
    logic [31:0] w[4];
    logic [31:0] f;
    f = {n.iova[42:39], 1'b0, n.iova[38:12]};
    w[0] = '0; w[1] = '0; w[2] = '0; w[3] = '0;
    w[0][29:8] = n.src_id;  w[0][5:4] = n.tr_id[13:12]; w[0][0] = 1'b1;
    w[1][31:20] = n.tr_id[11:0]; w[1][17:4] = n.seq_num; w[1][0] = 1'b1;
    w[2][31:16] = n.pdid; w[2][15:4] = f[31:20]; w[2][2:1] = n.exa_ack; w[2][0] = 1'b1;
    w[3][31:12] = f[19:0]; w[3][0] = 1'b1;
    return {w[3], w[2], w[1], w[0]};
  endfunction

  function automatic logic [101:0] key(input pf_nack_t n);
    return {n.src_id, n.tr_id, n.seq_num, n.iova[42:39], n.iova[38:12]};
  endfunction

  // ------------------------------------------------------------------
  // initiator + receiver: one cycle of work, called at posedge + 1
  int rr = 0;
  task automatic initiator_cycle();
    int active, pick;
    // retransmit requests that have arrived
    while (mbox.size() != 0 && mbox[0].due <= cycle) begin
      req_t r;
      bit found;
      r = mbox.pop_front();
      found = 0;
      foreach (tx[k]) begin
        if (tx[k].tr == r.tr && tx[k].st != T_DONE && tx[k].st != T_WAIT && tx[k].seq == r.seq) begin
          tx[k].retr_req = 1;
          found = 1;
        end
      end
      if (!found) n_stale_req++;
    end
    // paused transactions: resend on request or time-out
    foreach (tx[k]) begin
      if (tx[k].st == T_PAUSED && (tx[k].retr_req || cycle - tx[k].paused_at >= timeout_cycles)) begin
        if (tx[k].retr_req) n_req_retx++;
        else n_timeout_retx++;
        tx[k].seq      = (tx[k].seq + 1) % (1 << 14);
        tx[k].retr_req = 0;
        tx[k].nacked   = 0;
        tx[k].next_pkt = 0;
        tx[k].st       = T_SEND;
      end
    end
    // admit waiting transactions while fewer than MAX_OUT are in flight
    active = 0;
    foreach (tx[k]) if (tx[k].st == T_SEND || tx[k].st == T_PAUSED) active++;
    foreach (tx[k]) begin
      if (tx[k].st == T_WAIT && active < MAX_OUT) begin
        tx[k].st = T_SEND;
        active++;
      end
    end
    // send one packet, round robin over the sending transactions
    pick = -1;
    for (int i = 0; i < tx.size(); i++) begin
      int k;
      k = (rr + i) % tx.size();
      if (tx[k].st == T_SEND) begin
        pick = k;
        break;
      end
    end
    nack_valid = 1'b0;
    if (pick >= 0) begin
      longint addr;
      bit ok;
      rr   = pick + 1;
      addr = tx[pick].base + longint'(tx[pick].next_pkt) * PKT;
      ok   = resident.exists(addr / PAGE);
      if (ok) written[addr] = 1;
      else tx[pick].nacked = 1;
      nack_valid   = 1'b1;
      nack.src_id  = SRC;
      nack.tr_id   = 14'(tx[pick].tr);
      nack.seq_num = 14'(tx[pick].seq);
      nack.pdid    = PDID;
      nack.iova    = {PROC, 39'(addr)} | 43'($urandom_range(0, PKT - 1) & 8'hF0);
      nack.exa_ack = ok ? 2'b00 : 2'b10;
      nack.bresp   = ok ? RESP_OKAY : RESP_SLVERR;
      tx[pick].next_pkt++;
      if (tx[pick].next_pkt == tx[pick].npkts) begin
        if (tx[pick].nacked) begin
          tx[pick].st        = T_PAUSED;
          tx[pick].paused_at = cycle;
        end else begin
          tx[pick].st = T_DONE;
        end
      end
    end
  endtask

  // the filter's decision, predicted and checked in the cycle of the report
  task automatic check_filter();
    bit is_fault, is_dup;
    n_reports += nack_valid;
    is_fault = nack_valid && nack.bresp == RESP_SLVERR;
    is_dup   = is_fault && last_valid && key(nack) == last_key;
    check("dup_drop as predicted", dup_drop == is_dup);
    check("full_drop only when the log is full", !full_drop || (is_fault && !is_dup && log_count == 10'(DEPTH)));
    check("full_drop when a new fault meets a full log", !(is_fault && !is_dup && log_count == 10'(DEPTH)) || full_drop);
    if (is_fault) n_slverr++;
    if (is_dup) n_dup++;
    if (is_fault && !is_dup && full_drop) n_full++;
    if (is_fault && !is_dup && !full_drop) begin
      exp_q.push_back(exp_entry(nack));
      last_key   = key(nack);
      last_valid = 1;
      n_logged++;
    end
  endtask

  always begin
    @(posedge clk);
    #1;
    if (rst_n) begin
      initiator_cycle();
      #1;
      check_filter();
    end
  end

  // ------------------------------------------------------------------
  // driver: AXI-lite reads of the log
  bit driver_on = 0;   // switched on after reset and the empty-log read
  bit touch_ahead = 0;
  bit ooo_next = 0;   // read the second half first for the next entry

  task automatic axil_read(input logic [11:0] a, output logic [63:0] d);
    @(posedge clk);
    #1.5;
    s_araddr  = a;
    s_arvalid = 1'b1;
    s_rready  = 1'b1;
    do begin
      @(posedge clk);
      #1.5;
    end while (!s_rvalid);
    s_arvalid = 1'b0;
    d = s_rdata;
    check("rresp okay", s_rresp == 2'b00);
    @(posedge clk);
    #1.5;
    s_rready = 1'b0;
  endtask

  logic [191:0] last2[$];        // driver's last two handled entries

  task automatic handle_entry(input logic [127:0] e);
    int tr, seq, n_pages;
    longint va, page;
    logic [31:0] f;
    tr  = {e[5:4], e[63:52]};
    seq = e[49:36];
    f   = {e[79:68], e[127:108]};
    va  = longint'(f[26:0]) << 12;
    check("entry: valid bits", e[0] && e[32] && e[64] && e[96]);
    check("entry: source node", e[29:8] == SRC);
    check("entry: protection domain", e[95:80] == PDID);
    check("entry: process index", f[31:28] == PROC && f[27] == 1'b0);
    check("entry: page inside the buffer", va >= buf_lo && va < buf_hi);
    page = va / PAGE;
    if (resident.exists(page)) n_resident_entries++;
    // the driver remembers the last two entries it handled and skips one that
    // repeats them (same transaction, attempt and page)
    foreach (last2[k]) if (last2[k] == {64'(tr), 64'(seq), page}) begin
      n_drv_skip++;
      return;
    end
    last2.push_back({64'(tr), 64'(seq), page});
    if (last2.size() > 2) void'(last2.pop_front());
    n_pages = touch_ahead ? 4 : 1;
    repeat (touch_ahead ? TOUCH_AHEAD_DELAY : TOUCH_ONE_DELAY) @(posedge clk);
    for (int i = 0; i < n_pages; i++) begin
      if ((page + i) * PAGE < buf_hi) resident[page + i] = 1;   // only pages of the buffer
    end
    mbox.push_back('{due: cycle + MBOX_DELAY, tr: tr, seq: seq});
  endtask

  initial begin : driver
    logic [63:0] lo, hi, d;
    forever begin
      @(posedge clk);
      if (!driver_on || log_empty) continue;
      if (ooo_next) begin
        int c;
        ooo_next = 0;
        #1.5;
        c = log_count;
        axil_read(12'h008, d);
        check("second half first: data", d == exp_q[0][127:64]);
        check("second half first: no pop", log_count >= c);
        n_ooo_nopop++;
      end
      axil_read(12'h000, lo);
      axil_read(12'h008, hi);
      check("entry read", exp_q.size() != 0);
      if (exp_q.size() != 0) begin
        logic [127:0] ex;
        ex = exp_q.pop_front();
        check("entry matches the fault that caused it", {hi, lo} == ex);
      end
      n_pops++;
      handle_entry({hi, lo});
    end
  end

  // ------------------------------------------------------------------
  // one transfer of len bytes to a fresh destination buffer
  longint next_buf = 64'h40_0000_0000;

  task automatic run_transfer(input int len, input bit pretouched, output longint cycles);
    longint t0, base;
    int nblk;
    base     = next_buf;
    next_buf = next_buf + 64'h10_0000;
    buf_lo   = base;
    buf_hi   = base + len;
    if (pretouched) for (longint p = base / PAGE; p * PAGE < base + len; p++) resident[p] = 1;
    written.delete();
    nblk = (len + BLK - 1) / BLK;
    for (int b = 0; b < nblk; b++) begin
      trans_t t;
      t.tr       = next_tr;
      next_tr    = (next_tr + 1) % (1 << 14);
      t.seq      = $urandom_range(0, 1000);
      t.base     = base + longint'(b) * BLK;
      t.len      = (len - b * BLK < BLK) ? len - b * BLK : BLK;
      t.npkts    = (t.len + PKT - 1) / PKT;
      t.next_pkt = 0;
      t.nacked   = 0;
      t.retr_req = 0;
      t.paused_at = 0;
      t.st       = T_WAIT;
      tx.push_back(t);
    end
    t0 = cycle;
    forever begin
      bit all_done;
      @(posedge clk);
      all_done = 1;
      foreach (tx[k]) if (tx[k].st != T_DONE) all_done = 0;
      if (all_done) break;
    end
    cycles = cycle - t0;
    // every packet written
    begin
      int missing;
      missing = 0;
      for (int b = 0; b < nblk; b++)
        for (int p = 0; p < tx[b].npkts; p++)
          if (!written.exists(tx[b].base + longint'(p) * PKT)) missing++;
      check("every packet written", missing == 0);
    end
    // let the driver drain what is left (stale entries), then the log is empty
    for (int i = 0; i < 400000 && !(log_empty && exp_q.size() == 0); i++) @(posedge clk);
    repeat (TOUCH_AHEAD_DELAY + MBOX_DELAY + 10) @(posedge clk);
    check("log drained", log_empty && exp_q.size() == 0);
    tx.delete();
    mbox.delete();
  endtask

  initial begin
    int sizes[8] = '{16, 64, 256, 1024, 4096, 16384, 32768, 65536};
    longint cyc;
    int logged_before;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;

    // an empty log reads as zero (Valid = 0)
    begin
      logic [63:0] d;
      driver_on = 0;
      axil_read(12'h000, d);
      check("empty log reads zero", d == 64'h0 && log_empty);
      n_empty_reads++;
      driver_on = 1;
    end

    for (int mode = 0; mode < 2; mode++) begin
      touch_ahead = mode[0];
      foreach (sizes[i]) begin
        ooo_next = 1;
        run_transfer(sizes[i], 0, cyc);
        $display("page faults at destination, %s, %0d bytes: %0d cycles",
                 touch_ahead ? "touch-ahead" : "touch-one-page", sizes[i], cyc);
      end
    end

    // pre-touched buffer: nothing is logged
    logged_before = n_logged;
    run_transfer(65536, 1, cyc);
    $display("pre-touched, 65536 bytes: %0d cycles", cyc);
    check("pre-touched transfer logs nothing", n_logged == logged_before);

    // overload: the driver stalls, time-outs resend interleaved transactions
    // until the log is full; then the driver drains it
    touch_ahead    = 0;
    timeout_cycles = 400;
    driver_on      = 0;
    fork
      run_transfer(32768, 0, cyc);
      begin
        wait (n_full > 0);
        repeat (2000) @(posedge clk);
        driver_on = 1;
      end
    join
    $display("overload, 32768 bytes: %0d cycles", cyc);

    $display("reports=%0d slave errors=%0d logged=%0d repeats dropped=%0d dropped when full=%0d",
             n_reports, n_slverr, n_logged, n_dup, n_full);
    $display("pops=%0d second-half-first reads=%0d empty reads=%0d entries for resident pages=%0d",
             n_pops, n_ooo_nopop, n_empty_reads, n_resident_entries);
    $display("retransmits on request=%0d stale requests=%0d time-out retransmits=%0d driver skips=%0d",
             n_req_retx, n_stale_req, n_timeout_retx, n_drv_skip);
    check("mechanism: fault logged", n_logged > 0);
    check("mechanism: repeat dropped", n_dup > 0);
    check("mechanism: dropped when full", n_full > 0);
    check("mechanism: pop after two reads", n_pops > 0);
    check("mechanism: second half first, no pop", n_ooo_nopop > 0);
    check("mechanism: empty read", n_empty_reads > 0);
    check("mechanism: retransmit on request", n_req_retx > 0);
    check("mechanism: stale request ignored", n_stale_req > 0);
    check("mechanism: driver skips a repeat of its last two entries", n_drv_skip > 0);
    check("mechanism: time-out retransmit", n_timeout_retx > 0);
    check("every logged entry was read", n_pops == n_logged);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
