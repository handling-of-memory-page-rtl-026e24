// tb_nack_dedup: self-checking test of the fault filter and entry formatter.
//
// Each cycle the testbench drives one write-response report and checks, in
// the same cycle, push, dup_drop, full_drop and the 128-bit entry. The
// expected entry is assembled here field by field from the bit positions of
// the log-entry table, independently of the package's formatter. A reference
// keeps the key (node, transaction, sequence number, process index and page)
// of the last pushed fault. Directed cases: OKAY and DECERR responses are
// ignored; a repeat is dropped, also with another page offset or PDID; a
// change of page, sequence number, transaction or node is logged; an A-B-A
// interleave is logged three times (only the last push is compared); a fault
// met while the log is full is dropped without becoming the last key. Then
// random reports drawn from a small pool of identities.
module tb_nack_dedup;
  import pf_log_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic nack_valid = 1'b0, fifo_full = 1'b0;
  pf_nack_t nack = '0;
  logic push, dup_drop, full_drop;
  logic [127:0] entry;

  int checks = 0, failures = 0;
  logic [101:0] ref_key;      // {src, tr, seq, proc, page}
  bit ref_valid = 0;
  int n_push = 0, n_dup = 0, n_full = 0;

  nack_dedup dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

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

  // drive one report for one cycle and check the outputs
  task automatic report(input pf_nack_t n, input logic full, input string what);
    logic fault, dup, e_push;
    nack_valid = 1'b1;
    nack       = n;
    fifo_full  = full;
    #1;
    fault  = (n.bresp == RESP_SLVERR);
    dup    = fault && ref_valid && (key(n) == ref_key);
    e_push = fault && !dup && !full;
    check({what, ": push"}, push == e_push);
    check({what, ": dup_drop"}, dup_drop == dup);
    check({what, ": full_drop"}, full_drop == (fault && !dup && full));
    if (fault) check({what, ": entry"}, entry == exp_entry(n));
    if (e_push) begin
      ref_key   = key(n);
      ref_valid = 1;
      n_push++;
    end
    if (dup) n_dup++;
    if (fault && !dup && full) n_full++;
    @(posedge clk);
    #1;
    nack_valid = 1'b0;
    fifo_full  = 1'b0;
  endtask

  function automatic pf_nack_t mk(input int src, input int tr, input int seq,
                                  input logic [42:0] iova, input axi_resp_e r);
    pf_nack_t n;
    n.src_id  = 22'(src);
    n.tr_id   = 14'(tr);
    n.seq_num = 14'(seq);
    n.pdid    = 16'h0005;
    n.iova    = iova;
    n.exa_ack = 2'b10;
    n.bresp   = r;
    return n;
  endfunction

  initial begin
    pf_nack_t a, b;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    #1;
    // idle: nothing pushed
    check("idle: no push", !push && !dup_drop && !full_drop);

    a = mk(22'h2ABCDE, 14'h3123, 14'h1FFF, {4'hA, 39'h12_3456_7890}, RESP_SLVERR);
    report(mk(1, 2, 3, 43'h1000, RESP_OKAY), 1'b0, "okay ignored");
    report(a, 1'b0, "first fault");
    report(a, 1'b0, "repeat");
    b = a; b.iova[11:0] = 12'hFFF; b.pdid = 16'h1234;
    report(b, 1'b0, "same page, other offset and pdid");
    b = a; b.iova[12] = ~a.iova[12];
    report(b, 1'b0, "next page");
    report(b, 1'b0, "next page repeat");
    b.seq_num = b.seq_num + 1;
    report(b, 1'b0, "new sequence number");
    b.tr_id = 14'h0001;
    report(b, 1'b0, "new transaction");
    b.src_id = 22'h000001;
    report(b, 1'b0, "new node");
    b.iova[42:39] = 4'h3;
    report(b, 1'b0, "new process index");
    report(mk(7, 7, 7, 43'h7000, RESP_DECERR), 1'b0, "decerr ignored");
    // A-B-A interleave of two transactions
    a = mk(5, 10, 0, 43'h10_0000, RESP_SLVERR);
    b = mk(5, 11, 0, 43'h20_0000, RESP_SLVERR);
    report(a, 1'b0, "interleave A");
    report(b, 1'b0, "interleave B");
    report(a, 1'b0, "interleave A again");
    // full: dropped, key unchanged, logged later
    b = mk(9, 9, 9, 43'h30_0000, RESP_SLVERR);
    report(b, 1'b1, "fault while full");
    report(a, 1'b0, "last key still A");
    report(b, 1'b0, "room again: logged");
    check("directed pushes", n_push == 10);
    check("directed dups", n_dup == 4);
    check("directed full drops", n_full == 1);

    // random reports from a small identity pool, random full
    for (int i = 0; i < 5000; i++) begin
      pf_nack_t r;
      r = mk(0, $urandom_range(0, 1), $urandom_range(0, 1),
             {4'h0, 27'($urandom_range(0, 1)), 12'($urandom)},
             $urandom_range(0, 9) < 7 ? RESP_SLVERR : axi_resp_e'($urandom_range(0, 3)));
      r.pdid    = 16'($urandom);
      r.exa_ack = 2'($urandom);
      if ($urandom_range(0, 3) == 0) begin
        nack_valid = 1'b0;          // idle cycle
        #1;
        check("idle: no push", !push);
        @(posedge clk);
        #1;
      end else begin
        report(r, $urandom_range(0, 9) == 0, "random");
      end
    end
    $display("pushes=%0d dups=%0d full drops=%0d", n_push, n_dup, n_full);
    check("random traffic saw drops", n_dup > 50 && n_full > 10);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
