// Self-checking testbench of the neuron-update unit.
//
// A behavioural memory holds a small block of state words. Random synapses (random
// lane, weight, value and neuron type) are applied one by one, and a reference
// array of 16-bit states is updated in the testbench: saturating s + w*v for
// accumulate neurons, max(s, w*v) for max-pool neurons. Afterwards every word is
// compared, so a wrong lane, a lost write or a wrong saturation shows up. Directed
// cases force positive and negative saturation, and the cycle count of one
// synapse with immediate grants (4 cycles from acceptance to ready) is checked.
// Half-precision neurons are checked against a reference that converts the state to
// a real number, adds w*v and rounds back to nearest even; directed cases cover a
// rounding tie to even, a sign change and overflow to infinity with its pulse.
module tb_neuron_update;
  import scp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic syn_valid, syn_ready, stat_sat, busy;
  syn_t syn;
  mem_req_t mreq;
  mem_rsp_t mrsp;

  neuron_update dut (.*);

  int checks = 0, failures = 0, n_sat = 0;

  logic [63:0] mem [16];
  bit          random_gnt = 0;
  logic        pend;
  logic [63:0] pend_data;

  always_comb begin
    mrsp.gnt    = mreq.req && (!random_gnt || ($urandom_range(0, 2) != 0));
    mrsp.rvalid = pend;
    mrsp.rdata  = pend_data;
  end
  always_ff @(posedge clk) begin
    pend <= mrsp.gnt && !mreq.we;
    if (mrsp.gnt) begin
      if (mreq.we) mem[mreq.addr[3:0]] <= mreq.wdata;
      else         pend_data <= mem[mreq.addr[3:0]];
    end
    if (stat_sat) n_sat++;
  end

  logic signed [15:0] ref_s [64];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // half precision <-> real, written from the IEEE 754 definition
  function automatic real h2r(input logic [15:0] h);
    real m = (h[14:10] == 0) ? real'(h[9:0]) : real'(1024 + h[9:0]);
    int  e = (h[14:10] == 0) ? -24 : int'(h[14:10]) - 25;
    real v = m * (2.0 ** e);
    return h[15] ? -v : v;
  endfunction

  // round a real (exactly representable sum) to half precision, ties to even
  function automatic logic [15:0] r2h(input real x);
    real a = (x < 0.0) ? -x : x;
    logic sg = (x < 0.0);
    int e = -14;
    real q, fl;
    if (a == 0.0) return 16'h0000;
    if (a < 2.0 ** -14) return {sg, 5'd0, 10'(int'(a * (2.0 ** 24)))};
    while (a >= 2.0 ** (e + 1)) e++;
    q  = a / (2.0 ** (e - 10));
    fl = $floor(q);
    if (q - fl > 0.5 || (q - fl == 0.5 && (int'(fl) % 2) == 1)) fl = fl + 1.0;
    if (fl >= 2048.0) begin fl = fl / 2.0; e++; end
    if (e > 15) return {sg, 5'h1f, 10'd0};
    return {sg, 5'(e + 15), 10'(int'(fl) - 1024)};
  endfunction

  task automatic apply(input syn_t s, output int cycles);
    int idx = int'(s.addr[3:0]) * 4 + int'(s.lane);
    int p = int'(s.w) * int'(s.v);
    int r = int'(ref_s[idx]);
    if (s.ntype == NT_ACC_FP16) begin
      if (ref_s[idx][14:10] != 5'h1f) r = int'(r2h(h2r(ref_s[idx]) + real'(p)));
    end else if (s.ntype == NT_MAX) r = (p > r) ? p : r;
    else begin
      r = r + p;
      if (r > 32767) r = 32767;
      if (r < -32768) r = -32768;
    end
    ref_s[idx] = 16'(r);
    @(negedge clk);
    syn = s; syn_valid = 1;
    @(posedge clk);
    while (!syn_ready) @(posedge clk);
    @(negedge clk);
    syn_valid = 0;
    cycles = 1;
    while (busy) begin @(posedge clk); cycles++; @(negedge clk); end
  endtask

  task automatic compare_all(input string tag);
    for (int i = 0; i < 16; i++)
      check(mem[i] == {ref_s[4*i+3], ref_s[4*i+2], ref_s[4*i+1], ref_s[4*i]},
            $sformatf("%s word %0d: %h", tag, i, mem[i]));
  endtask

  initial begin
    int cyc, sat_before;
    syn_t s;
    syn_valid = 0; syn = '0;
    for (int i = 0; i < 16; i++) mem[i] = {$urandom, $urandom};
    for (int i = 0; i < 64; i++) ref_s[i] = mem[i / 4][16 * (i % 4) +: 16];
    repeat (3) @(posedge clk);
    rst_n = 1;

    // directed: one accumulation, timing
    s = '{addr: 15'd3, lane: 2'd2, w: 8'sd10, v: -8'sd3, ntype: NT_ACCUMULATE};
    apply(s, cyc);
    check(cyc == 4, $sformatf("one synapse took %0d cycles, expected 4", cyc));
    compare_all("single");

    // directed: positive then negative saturation on word 5 lane 1
    mem[5][31:16] = 16'sd32000; ref_s[21] = 16'sd32000;
    sat_before = n_sat;
    s = '{addr: 15'd5, lane: 2'd1, w: 8'sd127, v: 8'sd127, ntype: NT_ACCUMULATE};
    apply(s, cyc);
    check(ref_s[21] == 16'sh7fff && n_sat == sat_before + 1, "positive saturation");
    mem[6][15:0] = -16'sd32000; ref_s[24] = -16'sd32000;
    s = '{addr: 15'd6, lane: 2'd0, w: 8'sd127, v: -8'sd128, ntype: NT_ACCUMULATE};
    apply(s, cyc);
    check(n_sat == sat_before + 2, "negative saturation flagged");
    compare_all("saturation");

    // directed: max pooling keeps the larger value
    mem[7][63:48] = 16'sd50; ref_s[31] = 16'sd50;
    s = '{addr: 15'd7, lane: 2'd3, w: 8'sd1, v: 8'sd20, ntype: NT_MAX};
    apply(s, cyc);
    s.v = 8'sd90;
    apply(s, cyc);
    check(mem[7][63:48] == 16'sd90, "max neuron takes the larger product");

    // directed: half-precision states
    mem[8][15:0] = 16'h3c00; ref_s[32] = 16'h3c00;                  // 1.0 + 2*3 = 7.0
    s = '{addr: 15'd8, lane: 2'd0, w: 8'sd2, v: 8'sd3, ntype: NT_ACC_FP16};
    apply(s, cyc);
    check(cyc == 4, $sformatf("half-precision synapse took %0d cycles, expected 4", cyc));
    check(mem[8][15:0] == 16'h4700, $sformatf("fp16 1.0 + 6 = %h, expected 4700", mem[8][15:0]));
    mem[8][31:16] = 16'h6800; ref_s[33] = 16'h6800;                 // 2048 + 1: tie, stays even
    s = '{addr: 15'd8, lane: 2'd1, w: 8'sd1, v: 8'sd1, ntype: NT_ACC_FP16};
    apply(s, cyc);
    check(mem[8][31:16] == 16'h6800, $sformatf("fp16 2048 + 1 = %h, expected 6800", mem[8][31:16]));
    mem[8][47:32] = 16'h6801; ref_s[34] = 16'h6801;                 // 2050 + 1: tie, rounds up
    s.lane = 2'd2;
    apply(s, cyc);
    check(mem[8][47:32] == 16'h6802, $sformatf("fp16 2050 + 1 = %h, expected 6802", mem[8][47:32]));
    mem[8][63:48] = 16'hb800; ref_s[35] = 16'hb800;                 // -0.5 + 1 = 0.5
    s.lane = 2'd3;
    apply(s, cyc);
    check(mem[8][63:48] == 16'h3800, $sformatf("fp16 -0.5 + 1 = %h, expected 3800", mem[8][63:48]));
    sat_before = n_sat;
    mem[9][15:0] = 16'h7bff; ref_s[36] = 16'h7bff;                  // 65504 + 16129 -> inf
    s = '{addr: 15'd9, lane: 2'd0, w: 8'sd127, v: 8'sd127, ntype: NT_ACC_FP16};
    apply(s, cyc);
    check(mem[9][15:0] == 16'h7c00 && n_sat == sat_before + 1, "fp16 overflow to infinity flagged");
    compare_all("fp16 directed");

    // random half-precision accumulation on words 10..15, finite start values
    for (int i = 40; i < 64; i++) begin
      automatic logic [15:0] h = 16'($urandom);
      if (h[14:10] == 5'h1f) h[14] = 1'b0;
      ref_s[i] = h;
      mem[i / 4][16 * (i % 4) +: 16] = h;
    end
    random_gnt = 1;
    for (int t = 0; t < 2000; t++) begin
      s.addr = 15'($urandom_range(10, 15));
      s.lane = 2'($urandom);
      s.w = 8'($urandom);
      s.v = ($urandom_range(0, 3) == 0) ? 8'($urandom_range(0, 2)) : 8'($urandom);
      s.ntype = NT_ACC_FP16;
      apply(s, cyc);
    end
    compare_all("fp16 random");

    // random, all neuron types mixed
    random_gnt = 1;
    for (int t = 0; t < 2000; t++) begin
      s.addr = 15'($urandom_range(0, 15)) | 15'h7ff0;   // upper address bits ignored by the model
      s.lane = 2'($urandom);
      s.w = 8'($urandom);
      s.v = 8'($urandom);
      s.ntype = ntype_e'($urandom_range(0, 2));
      apply(s, cyc);
    end
    compare_all("random");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
