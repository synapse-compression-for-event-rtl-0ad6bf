// Self-checking testbench of the unified core memory at its full 32768 x 64 size.
//
// Writes random words to random addresses (including the first and last word),
// mirrored in a testbench associative array, then reads back addresses in random
// order and checks that data arrives exactly one cycle after the read and stays
// on rdata while the port is idle.
module tb_core_mem;

  logic clk = 0;
  always #5 clk = ~clk;

  logic        en, we;
  logic [14:0] addr;
  logic [63:0] wdata, rdata;

  core_mem dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] model [int];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int a, input logic [63:0] d);
    @(negedge clk);
    en = 1; we = 1; addr = 15'(a); wdata = d;
    model[a] = d;
    @(negedge clk);
    en = 0; we = 0;
  endtask

  initial begin
    int keys [$];
    en = 0; we = 0; addr = '0; wdata = '0;
    wr(0, 64'h0123_4567_89ab_cdef);
    wr(32767, 64'hfeed_beef_cafe_f00d);
    for (int i = 0; i < 3000; i++) wr($urandom_range(0, 32767), {$urandom, $urandom});
    foreach (model[k]) keys.push_back(k);
    keys.shuffle();
    foreach (keys[i]) begin
      @(negedge clk);
      en = 1; we = 0; addr = 15'(keys[i]);
      @(negedge clk);
      en = 0;
      check(rdata == model[keys[i]], $sformatf("addr %0d: %h vs %h", keys[i], rdata, model[keys[i]]));
      @(negedge clk);
      check(rdata == model[keys[i]], "rdata held while idle");
    end
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
