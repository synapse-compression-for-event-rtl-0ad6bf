// Self-checking testbench of the PSL.
//
// A behavioural memory holds a population descriptor, kernel descriptors and
// random weights. Events are sent and every synapse the PSL emits is compared with
// a reference list built from the destination side: for every neuron (c, x, y) of
// the population the reference asks whether the pre-downsampling position
// (x << SL, y << SL) lies inside the transposed kernel anchored at (x_min, y_min);
// if so it expects the weight at index (dx*KH + dy)*KD + c and the state at index
// (y*Wt + x)*D + c. Enumerating neurons by x, then y, then c gives the same order
// as the PSL's dx, dy, c loops. Cases cover anchors partly outside every edge,
// anchors completely outside, stride 2 (SL = 1) and random shapes, with random
// memory grant delays and synapse back-pressure. A directed case checks the cycle
// count of a fully inside 3x3, D=1 kernel.
module tb_psl;
  import scp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ev_valid, ev_ready, syn_valid, syn_ready;
  logic stat_syn, stat_skip_edge, stat_skip_str, busy;
  event_t ev;
  syn_t syn;
  mem_req_t mreq;
  mem_rsp_t mrsp;

  psl dut (.*);

  int checks = 0, failures = 0, n_edge = 0, n_str = 0;

  logic [63:0] mem [int];
  bit          random_gnt = 0, random_rdy = 0;
  logic        pend;
  logic [63:0] pend_data;

  always_comb begin
    mrsp.gnt    = mreq.req && (!random_gnt || ($urandom_range(0, 2) != 0));
    mrsp.rvalid = pend;
    mrsp.rdata  = pend_data;
  end
  always_ff @(posedge clk) begin
    pend <= mrsp.gnt && !mreq.we;
    if (mrsp.gnt) pend_data <= mem.exists(int'(mreq.addr)) ? mem[int'(mreq.addr)] : 64'h0;
  end

  syn_t got [$];
  always_ff @(posedge clk) begin
    syn_ready <= !random_rdy || ($urandom_range(0, 3) != 0);
    if (syn_valid && syn_ready) got.push_back(syn);
    if (stat_skip_edge) n_edge++;
    if (stat_skip_str)  n_str++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic signed [7:0] wbyte(input int wptr, input int idx);
    logic [63:0] w = mem.exists(wptr + idx / 8) ? mem[wptr + idx / 8] : 64'h0;
    return w[8 * (idx % 8) +: 8];
  endfunction

  // Configure population `idp` and the kernel descriptor of source channel `cs`.
  task automatic setup(input int idp, input int wt, ht, d, sl, kw, kh, cs, start, axc,
                       input int kdbase, wptr, input ntype_e nt);
    pop_desc_t p = '0;
    kdesc_t k = '0;
    p.w = XY_W'(wt << sl); p.h = XY_W'(ht << sl); p.d = CH_W'(d);
    p.ntype = nt; p.start = ADDR_W'(start); p.axon_cnt = AXC_W'(axc);
    p.kd_base = ADDR_W'(kdbase);
    mem[idp] = p;
    k.kw_m1 = K_W'(kw - 1); k.kh_m1 = K_W'(kh - 1); k.kd = CH_W'(d);
    k.sl = sl[0]; k.wptr = ADDR_W'(wptr);
    mem[kdbase + cs] = k;
    for (int i = 0; i < (kw * kh * d + 7) / 8; i++) mem[wptr + i] = {$urandom, $urandom};
  endtask

  task automatic run_event(input event_t e, output int cycles);
    pop_desc_t p = pop_desc_t'(mem[int'(e.idp)]);
    kdesc_t k = kdesc_t'(mem[int'(p.kd_base) + int'(e.csrc)]);
    int sl = int'(k.sl), kw = int'(k.kw_m1) + 1, kh = int'(k.kh_m1) + 1, d = int'(p.d);
    int wt = int'(p.w) >> sl, ht = int'(p.h) >> sl;
    int base = int'(p.start) + int'(p.axon_cnt);
    syn_t exp_q [$];
    for (int x = 0; x < wt; x++)
      for (int y = 0; y < ht; y++) begin
        int dx = (x << sl) - int'(e.xmin), dy = (y << sl) - int'(e.ymin);
        if (dx >= 0 && dx < kw && dy >= 0 && dy < kh)
          for (int c = 0; c < d; c++) begin
            syn_t s;
            int n = (y * wt + x) * d + c;
            int wi = (dx * kh + dy) * int'(k.kd) + c;
            s.addr = ADDR_W'(base + n / 4);
            s.lane = 2'(n % 4);
            s.w = wbyte(int'(k.wptr), wi);
            s.v = e.v;
            s.ntype = p.ntype;
            exp_q.push_back(s);
          end
      end
    got.delete();
    @(negedge clk);
    ev = e; ev_valid = 1;
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    @(negedge clk);
    ev_valid = 0;
    cycles = 0;
    while (busy) begin @(posedge clk); cycles++; @(negedge clk); end
    check(got.size() == exp_q.size(), $sformatf("event %h: %0d synapses, expected %0d",
                                               e, got.size(), exp_q.size()));
    for (int i = 0; i < got.size() && i < exp_q.size(); i++)
      check(got[i] == exp_q[i], $sformatf("synapse %0d: got %h exp %h", i, got[i], exp_q[i]));
  endtask

  initial begin
    int cyc;
    event_t e;
    ev_valid = 0; ev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 3x3 kernel, population 6x5x2, stride 1
    setup(1, 6, 5, 2, 0, 3, 3, 4, 500, 2, 400, 600, NT_ACCUMULATE);
    e = '{ad: 0, idp: 1, xmin: 1, ymin: 1, csrc: 4, v: 8'sd7};     // fully inside
    run_event(e, cyc);
    e.xmin = -1; e.ymin = -2; run_event(e, cyc);                      // top-left corner
    e.xmin = 5;  e.ymin = 4;  run_event(e, cyc);                      // bottom-right corner
    e.xmin = -3; e.ymin = 0;  run_event(e, cyc);                      // fully left: nothing
    e.xmin = 2;  e.ymin = 5;  run_event(e, cyc);                      // fully below: nothing
    check(n_edge > 0, "edge skipping seen");

    // D = 1, fully inside: 4 descriptor cycles, 9 synapses, 2 weight-word reads
    setup(2, 8, 8, 1, 0, 3, 3, 0, 700, 0, 690, 680, NT_ACCUMULATE);
    e = '{ad: 0, idp: 2, xmin: 2, ymin: 2, csrc: 0, v: -8'sd4};
    run_event(e, cyc);
    check(cyc == 4 + 9 * 2 + 2 * 3,   // descriptors + 2 per position + 3 per weight word
          $sformatf("3x3x1 event took %0d cycles", cyc));

    // stride 2: true population 4x3, 3x3 kernel, max-pool neuron type
    setup(3, 4, 3, 3, 1, 3, 3, 1, 800, 1, 790, 760, NT_MAX);
    for (int xm = -3; xm <= 8; xm++) begin
      e = '{ad: 0, idp: 3, xmin: EXY_W'(xm), ymin: EXY_W'(xm / 2), csrc: 1, v: 8'sd9};
      run_event(e, cyc);
    end
    check(n_str > 0, "stride skipping seen");

    // random shapes with grant delays and back-pressure
    random_gnt = 1; random_rdy = 1;
    for (int t = 0; t < 150; t++) begin
      automatic int sl = $urandom_range(0, 1), kw = $urandom_range(1, 16), kh = $urandom_range(1, 16);
      automatic int wt = $urandom_range(1, 20), ht = $urandom_range(1, 20), d = $urandom_range(1, 5);
      automatic int cs = $urandom_range(0, 1023);
      setup(9, wt, ht, d, sl, kw, kh, cs, 4000, $urandom_range(0, 15), 2000, 3000,
            ntype_e'($urandom_range(0, 1)));
      e.ad = 0; e.idp = 9; e.csrc = CH_W'(cs); e.v = VAL_W'($urandom);
      e.xmin = EXY_W'($urandom_range(0, 50) - 20);
      e.ymin = EXY_W'($urandom_range(0, 50) - 20);
      run_event(e, cyc);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
