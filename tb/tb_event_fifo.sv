// Self-checking testbench of the event queue.
//
// Random pushes and pops (with phases that fill the queue and phases that drain it)
// are mirrored in a testbench queue; every popped event must equal the oldest
// mirrored one, count must equal the mirror's size, in_ready must drop exactly when
// DEPTH events are held, and a push into an empty queue must be visible one cycle
// later.
module tb_event_fifo;
  import scp_pkg::*;

  localparam int unsigned DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  event_t in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  event_fifo dut (.*);   // default depth 16

  int checks = 0, failures = 0, n_full = 0;
  event_t model [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int push_pct, pop_pct;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && in_ready && count == 0, "empty after reset");

    // latency: one push into the empty queue
    in_data = event_t'({$urandom, $urandom});
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_data == in_data, "push visible one cycle later");
    model.push_back(in_data);

    for (int t = 0; t < 20000; t++) begin
      bit push, pop;
      push_pct = ((t / 500) % 2 == 0) ? 80 : 20;
      pop_pct  = 100 - push_pct;
      push = ($urandom_range(0, 99) < push_pct);
      pop  = ($urandom_range(0, 99) < pop_pct);
      in_valid  = push;
      in_data   = event_t'({$urandom, $urandom});
      out_ready = pop;
      // checks before the edge
      check(int'(count) == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(in_ready == (model.size() < DEPTH), "in_ready reflects full");
      check(out_valid == (model.size() > 0), "out_valid reflects empty");
      if (out_valid && model.size() > 0)
        check(out_data == model[0], $sformatf("order: got %h exp %h", out_data, model[0]));
      if (!in_ready) n_full++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    check(n_full > 0, "queue was full at least once");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
