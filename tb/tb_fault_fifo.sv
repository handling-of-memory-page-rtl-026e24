// tb_fault_fifo: self-checking test of the fault-log queue at its full
// 512 x 128 size. A reference queue in the testbench follows every push and
// pop; each cycle the head, empty, full and count are compared with it. The
// test fills the queue to full (pushes are gated on the reference's full
// flag: a push while full is a caller error the design asserts on), drains it,
// then runs random push/pop traffic with simultaneous push and pop. It also
// checks the fall-through timing: an entry pushed into an empty queue is on
// rd_data one cycle later.
module tb_fault_fifo;
  localparam int unsigned DEPTH = 512;
  localparam int unsigned WIDTH = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  logic push = 1'b0, pop = 1'b0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic empty, full;
  logic [$clog2(DEPTH+1)-1:0] count;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model[$];

  fault_fifo #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare();
    check("empty", empty == (model.size() == 0));
    check("full", full == (model.size() == DEPTH));
    check("count", int'(count) == model.size());
    if (model.size() != 0) check("head", rd_data == model[0]);
  endtask

  // one cycle: drive, clock, update model, compare
  task automatic step(input logic do_push, input logic do_pop);
    logic [WIDTH-1:0] d;
    d = rnd128();
    push    = do_push;   // driven 1 time unit after an edge
    pop     = do_pop;
    wr_data = d;
    @(posedge clk);
    #1;
    begin
      bit acc_push;
      acc_push = do_push && (model.size() < DEPTH);   // full is sampled before the pop
      if (do_pop && model.size() != 0) void'(model.pop_front());
      if (acc_push) model.push_back(d);
    end
    push = 1'b0;
    pop  = 1'b0;
    compare();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    #1;
    compare();

    // fall-through latency: pushed at edge k, visible right after it
    step(1'b1, 1'b0);
    check("latency: head visible 1 cycle after push", !empty && rd_data == model[0]);
    step(1'b0, 1'b1);

    // fill to full, then drain
    while (model.size() < DEPTH) step(1'b1, 1'b0);
    check("reached full", full);
    step(1'b0, 1'b0);
    // pop from full
    pop  = 1'b1;
    @(posedge clk);
    #1;
    void'(model.pop_front());
    pop  = 1'b0;
    compare();
    while (model.size() > 0) step(1'b0, 1'b1);
    check("drained", empty);
    // pop while empty is ignored
    step(1'b0, 1'b1);

    // random traffic, push gated by the model's full flag
    for (int i = 0; i < 20000; i++) begin
      logic p, q;
      p = ($urandom_range(0, 99) < 55) && (model.size() < DEPTH);
      q = ($urandom_range(0, 99) < 50);
      step(p, q);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
