// tb_fifo_read_fsm: self-checking test of the AXI-lite read port and its
// read-then-pop state machine, in the 64-bit configuration and, on further
// instances, the 32-bit and 128-bit ones.
//
// A queue in the testbench stands for the log: it drives head and empty and
// drops its head when the port pops. An AXI-lite master task issues reads
// with random gaps and random rready back-pressure. Every read's data is
// compared with the part of the head entry its address selects (zero when
// the queue is empty or the address is out of range), rvalid is checked to
// rise exactly one cycle after the address handshake, and the pop is checked
// against an independent rule: an entry goes only when its parts were read in
// order 0..N-1, a read of part 0 restarting the order. Directed sequences
// cover the in-order pop, second half read first (no pop), a repeated first
// half, reads of an empty log and out-of-range reads; random reads follow.
module tb_fifo_read_fsm;
  import pf_log_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;

  int checks = 0, failures = 0;
  int n_pops = 0, n_nopop_ooo = 0, n_empty_reads = 0;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- 64-bit instance ----------------
  logic [11:0]  araddr = '0;
  logic         arvalid = 1'b0, arready, rvalid, rready = 1'b0, pop;
  logic [63:0]  rdata;
  logic [1:0]   rresp;
  logic [127:0] q[$];
  logic [127:0] head;
  logic         empty;

  assign empty = (q.size() == 0);
  assign head  = empty ? 128'h0 : q[0];

  fifo_read_fsm #(.DATA_W(64), .ADDR_W(12)) dut (
    .clk, .rst_n,
    .s_araddr (araddr), .s_arvalid (arvalid), .s_arready (arready),
    .s_rdata (rdata), .s_rresp (rresp), .s_rvalid (rvalid), .s_rready (rready),
    .head, .empty, .pop
  );

  // the log drops its head half a cycle step after the edge that pops it
  always @(posedge clk) if (rst_n && pop && q.size() != 0) begin
    #0.5;
    void'(q.pop_front());
  end

  // ---------------- 32-bit instance ----------------
  logic [11:0]  araddr32 = '0;
  logic         arvalid32 = 1'b0, arready32, rvalid32, pop32;
  logic [31:0]  rdata32;
  logic [1:0]   rresp32;
  logic [127:0] q32[$];
  logic [127:0] head32;
  logic         empty32;

  assign empty32 = (q32.size() == 0);
  assign head32  = empty32 ? 128'h0 : q32[0];

  fifo_read_fsm #(.DATA_W(32), .ADDR_W(12)) dut32 (
    .clk, .rst_n,
    .s_araddr (araddr32), .s_arvalid (arvalid32), .s_arready (arready32),
    .s_rdata (rdata32), .s_rresp (rresp32), .s_rvalid (rvalid32), .s_rready (1'b1),
    .head (head32), .empty (empty32), .pop (pop32)
  );

  always @(posedge clk) if (rst_n && pop32 && q32.size() != 0) begin
    #0.5;
    void'(q32.pop_front());
  end

  // ---------------- 128-bit instance ----------------
  logic [11:0]  araddr128 = '0;
  logic         arvalid128 = 1'b0, arready128, rvalid128, pop128;
  logic [127:0] rdata128;
  logic [1:0]   rresp128;
  logic [127:0] q128[$];
  logic [127:0] head128;
  logic         empty128;

  assign empty128 = (q128.size() == 0);
  assign head128  = empty128 ? 128'h0 : q128[0];

  fifo_read_fsm #(.DATA_W(128), .ADDR_W(12)) dut128 (
    .clk, .rst_n,
    .s_araddr (araddr128), .s_arvalid (arvalid128), .s_arready (arready128),
    .s_rdata (rdata128), .s_rresp (rresp128), .s_rvalid (rvalid128), .s_rready (1'b1),
    .head (head128), .empty (empty128), .pop (pop128)
  );

  always @(posedge clk) if (rst_n && pop128 && q128.size() != 0) begin
    #0.5;
    void'(q128.pop_front());
  end

  task automatic rd128(input logic [11:0] a, output logic [127:0] d);
    #1;
    araddr128  = a;
    arvalid128 = 1'b1;
    @(posedge clk);
    #1;
    arvalid128 = 1'b0;
    d = rdata128;
    @(posedge clk);
  endtask

  // reference state for the 64-bit port: next expected half
  int exp_next = 0;

  // one 64-bit read with random handshake timing; checks data, latency, pop
  task automatic rd64(input logic [11:0] a, input string what);
    logic [127:0] h;
    bit was_empty, in_range, exp_pop;
    int part, qsz;
    repeat ($urandom_range(0, 2)) @(posedge clk);
    #1;
    araddr  = a;
    arvalid = 1'b1;
    // handshake happens at the next edge where arready is high
    while (!arready) begin
      @(posedge clk);
      #1;
    end
    h         = head;
    was_empty = empty;
    qsz       = q.size();
    in_range  = (a[11:4] == 0);
    part      = a[3];
    exp_pop   = in_range && !was_empty && part == 1 && exp_next == 1;
    @(posedge clk);
    #1;
    arvalid = 1'b0;
    check({what, ": rvalid one cycle after handshake"}, rvalid);
    check({what, ": pop"}, (q.size() == qsz - 1) == exp_pop);
    if (!in_range || was_empty) check({what, ": zero data"}, rdata == 64'h0);
    else check({what, ": data"}, rdata == h[part*64 +: 64]);
    check({what, ": rresp okay"}, rresp == 2'b00);
    if (was_empty && in_range) n_empty_reads++;
    if (in_range && !was_empty) begin
      if (exp_pop) begin
        exp_next = 0;
        n_pops++;
      end else if (part == exp_next) exp_next = exp_next + 1;
      else if (part == 0) exp_next = 1;
      else n_nopop_ooo++;
    end
    // hold rready low for a while: data must stay
    repeat ($urandom_range(0, 2)) begin
      logic [63:0] d;
      d = rdata;
      @(posedge clk);
      #1;
      check({what, ": data held"}, rvalid && rdata == d);
    end
    rready = 1'b1;
    @(posedge clk);
    #1;
    rready = 1'b0;
    check({what, ": rvalid drops after rready"}, !rvalid);
  endtask

  task automatic rd32(input logic [11:0] a, output logic [31:0] d);
    #1;
    araddr32  = a;
    arvalid32 = 1'b1;
    @(posedge clk);
    #1;
    arvalid32 = 1'b0;
    d = rdata32;
    @(posedge clk);   // rready is tied high: rvalid drops here
  endtask

  function automatic logic [127:0] rnd_entry();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    logic [127:0] e;
    logic [31:0] d32;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);

    // empty log
    rd64(12'h000, "empty, first half");
    rd64(12'h008, "empty, second half");

    // in-order read pops
    q.push_back(rnd_entry());
    q.push_back(rnd_entry());
    rd64(12'h000, "first half");
    rd64(12'h008, "second half pops");
    check("one entry left", q.size() == 1);
    // second half first: no pop
    rd64(12'h008, "second half first");
    check("no pop on second half first", q.size() == 1);
    rd64(12'h008, "second half again");
    // repeated first half, then second: pop
    rd64(12'h000, "first half");
    rd64(12'h000, "first half again");
    rd64(12'h008, "second half pops");
    check("log empty", q.size() == 0);
    // out of range
    q.push_back(rnd_entry());
    rd64(12'h010, "out of range");
    rd64(12'h000, "first half");
    rd64(12'h800, "out of range between halves");
    rd64(12'h008, "second half still pops");
    check("log empty again", q.size() == 0);

    // random reads over a random log
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(0, 3) == 0) q.push_back(rnd_entry());
      case ($urandom_range(0, 9))
        0:       rd64(12'h010, "random out of range");
        1, 2, 3: rd64(12'h008, "random second half");
        default: rd64(12'h000, "random first half");
      endcase
      if ($urandom_range(0, 2) == 0 && q.size() != 0 && exp_next == 1) rd64(12'h008, "random pop");
    end
    check("mechanisms seen", n_pops > 100 && n_nopop_ooo > 50 && n_empty_reads > 2);
    $display("pops=%0d out-of-order reads=%0d empty reads=%0d", n_pops, n_nopop_ooo, n_empty_reads);

    // 32-bit port: four reads in order pop; skipping a word does not
    e = rnd_entry();
    q32.push_back(e);
    q32.push_back(rnd_entry());
    for (int p = 0; p < 4; p++) begin
      rd32(12'(p * 4), d32);
      check("32-bit word data", d32 == e[p*32 +: 32]);
      check("32-bit pop only after last word", q32.size() == ((p == 3) ? 1 : 2));
    end
    e = q32[0];
    rd32(12'h0, d32);
    rd32(12'h8, d32);       // skips word 1
    rd32(12'hC, d32);
    check("32-bit out of order: no pop", q32.size() == 1);
    rd32(12'h0, d32);
    rd32(12'h4, d32);
    rd32(12'h8, d32);
    rd32(12'hC, d32);
    check("32-bit in order: pop", q32.size() == 0);
    rd32(12'h0, d32);
    check("32-bit empty: valid bit 0", d32 == 32'h0);

    // 128-bit port: one read returns the whole entry and pops it
    begin
      logic [127:0] e1, d128;
      e  = rnd_entry();
      e1 = rnd_entry();
      q128.push_back(e);
      q128.push_back(e1);
      rd128(12'h010, d128);
      check("128-bit out of range: zero, no pop", d128 == 128'h0 && q128.size() == 2);
      rd128(12'h000, d128);
      check("128-bit read: whole entry", d128 == e);
      check("128-bit read: popped", q128.size() == 1);
      rd128(12'h000, d128);
      check("128-bit second entry", d128 == e1 && q128.size() == 0);
      rd128(12'h000, d128);
      check("128-bit empty: zero", d128 == 128'h0);
      check("128-bit rresp okay", rresp128 == 2'b00);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
