// Self-checking testbench of the SCU.
//
// A behavioural memory answers the SCU's reads (with random grant delays in the
// random phase). Directed cases reproduce the feature-map cut of the paper's
// fragmentation example: a 3x3 "same" convolution, source fragment at (C0, X0, Y0) =
// (0, 4, 4), destination fragments at X0 = 0 and X0 = 4 (4 wide, hit detection
// rounds them to 8) and a channel fragment at C0 = 2 (8 wide). Axon offsets are
// computed here from the paper's offset equations, and the expected events from the
// firing neuron's coordinates in the uncut feature map, so the reference never
// reuses the SCU's own arithmetic order. A random phase then checks upsampling,
// channel offsets, kernel sizes, filtering and back-pressure against the same
// reference. The directed phase also checks the latency: with immediate grants the
// SCU needs 2 cycles for the descriptor and 3 per axon.
module tb_scu;
  import scp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     fire_valid, fire_ready, ev_valid, ev_ready, stat_filtered, stat_emitted, busy;
  fire_t    fire;
  event_t   ev;
  mem_req_t mreq;
  mem_rsp_t mrsp;

  scu dut (.*);

  int checks = 0, failures = 0;
  int n_filtered = 0, n_emitted = 0;

  // ---------------- behavioural memory ----------------
  logic [63:0] mem [int];
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
    if (mrsp.gnt) pend_data <= mem.exists(int'(mreq.addr)) ? mem[int'(mreq.addr)] : 64'h0;
  end

  // ---------------- event capture ----------------
  event_t got [$];
  bit random_rdy = 0;
  always_ff @(posedge clk) begin
    ev_ready <= !random_rdy || ($urandom_range(0, 3) != 0);
    if (ev_valid && ev_ready) got.push_back(ev);
    if (stat_filtered) n_filtered++;
    if (stat_emitted)  n_emitted++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference: one axon applied to one firing neuron
  function automatic bit ref_event(input axon_t a, input fire_t f, output event_t e);
    int xm, ym, kw, kh;
    xm = (int'(f.x) << a.us) + int'(a.x_off);
    ym = (int'(f.y) << a.us) + int'(a.y_off);
    kw = int'(a.kw_m1) + 1;
    kh = int'(a.kh_m1) + 1;
    e.ad   = a.ad;
    e.idp  = a.idp;
    e.xmin = EXY_W'(xm);
    e.ymin = EXY_W'(ym);
    e.csrc = CH_W'(int'(f.c) + int'(a.c_off));
    e.v    = f.v;
    return (xm < 8 * int'(a.wq)) && (xm + kw > 0) && (ym < 8 * int'(a.hq)) && (ym + kh > 0);
  endfunction

  function automatic axon_t mk_axon(input int xoff, yoff, coff, w, h, kw, kh, us, ad, idp);
    axon_t a;
    a.x_off = OFF_W'(xoff); a.y_off = OFF_W'(yoff); a.c_off = CH_W'(coff);
    a.wq = QWH_W'((w + 7) / 8); a.hq = QWH_W'((h + 7) / 8);
    a.kw_m1 = K_W'(kw - 1); a.kh_m1 = K_W'(kh - 1);
    a.us = US_W'(us); a.ad = AD_W'(ad); a.idp = PID_W'(idp);
    return a;
  endfunction

  task automatic set_pop(input int idp, input int start, input int cnt);
    pop_desc_t p = '0;
    p.start = ADDR_W'(start);
    p.axon_cnt = AXC_W'(cnt);
    mem[idp] = p;
  endtask

  // fire one neuron and return the cycles until the SCU is ready again
  task automatic do_fire(input fire_t f, output int cycles);
    @(negedge clk);
    fire = f; fire_valid = 1;
    @(posedge clk);
    while (!fire_ready) @(posedge clk);
    @(negedge clk);
    fire_valid = 0;
    cycles = 0;
    while (!fire_ready) begin @(posedge clk); cycles++; @(negedge clk); end
  endtask

  initial begin
    int cyc;
    fire_t f;
    event_t exp_q [$];
    event_t e;
    axon_t ax [3];
    fire_valid = 0; fire = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- directed: paper's fragmentation example, KW=KH=3, XP=YP=1 ----
    // X_off = X0src - KW + XP + 1 - X0dst, C_off = C0src
    ax[0] = mk_axon(4 - 3 + 1 + 1 - 0, 4 - 3 + 1 + 1 - 0, 0, 4, 8, 3, 3, 0, 8'h00, 1);
    ax[1] = mk_axon(4 - 3 + 1 + 1 - 4, 4 - 3 + 1 + 1 - 0, 0, 4, 8, 3, 3, 0, 8'h10, 2);
    ax[2] = mk_axon(4 - 3 + 1 + 1 - 0, 4 - 3 + 1 + 1 - 0, 0, 8, 8, 3, 3, 0, 8'h01, 3);
    set_pop(0, 100, 3);
    for (int i = 0; i < 3; i++) mem[100 + i] = ax[i];

    // neuron (c,x,y) = (0,0,1) of the source fragment: uncut (0,4,5), anchor (3,4)
    f = '{idp: 0, x: 0, y: 1, c: 0, v: 8'sd5};
    got.delete();
    do_fire(f, cyc);
    check(got.size() == 3, $sformatf("fig example: %0d events, expected 3", got.size()));
    if (got.size() == 3) begin
      check(got[0].xmin == 3 && got[0].ymin == 4 && got[0].ad == 8'h00 && got[0].idp == 1,
            "fragment 0 anchor (3,4)");
      check(got[1].xmin == -1 && got[1].ymin == 4 && got[1].ad == 8'h10 && got[1].idp == 2,
            "fragment 1 anchor (-1,4)");
      check(got[2].xmin == 3 && got[2].csrc == 0 && got[2].v == 5, "fragment 2 anchor and value");
    end
    check(cyc == 2 + 3 * 3, $sformatf("latency %0d cycles, expected %0d", cyc, 2 + 3 * 3));

    // neuron (0,1,1): the paper's example anchor x_min = 4 for fragment 0
    f = '{idp: 0, x: 1, y: 1, c: 0, v: -8'sd3};
    got.delete();
    do_fire(f, cyc);
    check(got.size() == 3 && got[0].xmin == 4, "x_min = 4 for fragment 0 (paper example)");

    // a fragment 8 wide at X0 = 8: neuron far left must be filtered
    mem[100] = mk_axon(4 - 3 + 1 + 1 - 8, 4 - 3 + 1 + 1 - 0, 0, 8, 8, 3, 3, 0, 0, 1);
    mem[101] = mk_axon(4 - 3 + 1 + 1 - 0, 4 - 3 + 1 + 1 - 8, 0, 8, 8, 3, 3, 0, 0, 2);  // Y cut
    f = '{idp: 0, x: 0, y: 0, c: 0, v: 8'sd1};   // uncut (4,4): anchor (3,3)
    got.delete();
    n_filtered = 0;
    do_fire(f, cyc);
    check(got.size() == 1 && n_filtered == 2, "hit detection drops X and Y misses");
    f = '{idp: 0, x: 3, y: 3, c: 0, v: 8'sd1};   // uncut (7,7): anchor (6,6) -> touches x,y>=8
    got.delete();
    do_fire(f, cyc);
    check(got.size() == 3, "kernel reaching into the next fragment is kept");
    if (got.size() == 3) check(got[0].xmin == -2 && got[1].ymin == -2, "anchors relative to fragment");

    // population without axons
    set_pop(5, 300, 0);
    got.delete();
    do_fire('{idp: 5, x: 1, y: 1, c: 1, v: 1}, cyc);
    check(got.size() == 0, "no axons, no events");

    // ---- random phase ----
    random_gnt = 1; random_rdy = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int n = $urandom_range(1, 15);
      axon_t a;
      automatic int pid = $urandom_range(0, 31);
      set_pop(pid, 1000 + 16 * pid, n);
      exp_q.delete();
      f.idp = PID_W'(pid);
      f.x = XY_W'($urandom_range(0, 255));
      f.y = XY_W'($urandom_range(0, 255));
      f.c = CH_W'($urandom_range(0, 1023));
      f.v = VAL_W'($urandom);
      for (int i = 0; i < n; i++) begin
        automatic int us = ($urandom_range(0, 3) == 0) ? $urandom_range(1, 7) : 0;
        a = mk_axon($urandom_range(0, 511) - 256, $urandom_range(0, 511) - 256,
                    $urandom_range(0, 1023), $urandom_range(1, 255), $urandom_range(1, 255),
                    $urandom_range(1, 16), $urandom_range(1, 16), us,
                    $urandom_range(0, 255), $urandom_range(0, 31));
        // keep upsampled coordinates in a range the mapper would use
        if (us != 0) begin f.x = f.x >> us; f.y = f.y >> us; end
        mem[1000 + 16 * pid + i] = a;
      end
      for (int i = 0; i < n; i++)
        if (ref_event(axon_t'(mem[1000 + 16 * pid + i]), f, e)) exp_q.push_back(e);
      got.delete();
      do_fire(f, cyc);
      check(got.size() == exp_q.size(), $sformatf("rand %0d: %0d events, expected %0d",
                                                 t, got.size(), exp_q.size()));
      for (int i = 0; i < exp_q.size() && i < got.size(); i++)
        check(got[i] == exp_q[i], $sformatf("rand %0d event %0d: got %h exp %h", t, i, got[i], exp_q[i]));
    end
    check(n_filtered > 0 && n_emitted > 0, "both emitted and filtered events seen");

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
