// End-to-end testbench of one neuron core at its default (full) size.
//
// The testbench acts as compiler, neighbouring cores and host:
//  * through the loader port it writes population descriptors, axons, kernel
//    descriptors, XY-transposed weights and zeroed neuron states;
//  * it fires neurons of source population 0 (2 x 16 x 4) whose six axons reach
//      - a 3x3 "same" convolution (3 output channels) cut in X into two 8-wide
//        fragments, populations 1 and 5, that share one set of weights (hit
//        detection drops events for the fragment the kernel misses),
//      - a stride-2 3x3 convolution, population 2 (stored width/height doubled),
//      - a 3x3 convolution after 2x source upsampling, population 4,
//      - a fragment on another core (relative address 0x11), which must leave
//        through the network port; the sink applies random back-pressure;
//      - a copy of the first convolution fragment with half-precision states,
//        population 7, checked against IEEE round-to-nearest-even in firing order;
//  * at the same time it plays a remote core sending events of a 2x2/stride-2 max
//    pooling into population 6 through the network input.
// Afterwards all states are read back and compared with a reference that evaluates
// the layers in the ordinary output-centric way (source index = x_out*S + j - XP on
// the upsampled source, weight W[c][cs][j][k], 16-bit saturation applied in firing
// order), which shares no code with the event-based path. The mechanisms the core
// implements are counted and each must occur: local loopback, network out, network
// in, network back-pressure, hit-detection drops, edge skips, stride skips,
// saturation, a full event queue, upsampled updates, max-pool updates and
// half-precision updates.
module tb_neuron_core;
  import scp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     fire_valid, fire_ready, noc_in_valid, noc_in_ready, noc_out_valid, noc_out_ready;
  fire_t    fire;
  event_t   noc_in, noc_out;
  mem_req_t host_req;
  mem_rsp_t host_rsp;
  logic     idle, stat_loopback, stat_noc_in, stat_noc_out, stat_filtered, stat_syn;
  logic     stat_skip_edge, stat_skip_str, stat_sat, stat_queue_full;

  neuron_core dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- loader port ----------------
  task automatic host_write(input int a, input logic [63:0] d);
    @(negedge clk);
    host_req = '{req: 1'b1, we: 1'b1, addr: ADDR_W'(a), wdata: d};
    @(posedge clk);
    while (!host_rsp.gnt) @(posedge clk);
    @(negedge clk);
    host_req = '0;
  endtask

  task automatic host_read(input int a, output logic [63:0] d);
    @(negedge clk);
    host_req = '{req: 1'b1, we: 1'b0, addr: ADDR_W'(a), wdata: '0};
    @(posedge clk);
    while (!host_rsp.gnt) @(posedge clk);
    @(negedge clk);
    host_req = '0;
    d = host_rsp.rdata;
  endtask

  // ---------------- network layers ----------------
  localparam int DS = 2, WS = 16, HS = 4;          // source population 0
  // layer table: 0 conv (pops 1,5), 1 stride-2 conv (pop 2), 2 upsampled conv (pop 4)
  int L_D [3]  = '{3, 2, 1};
  int L_W [3]  = '{16, 8, 32};                      // true output width
  int L_H [3]  = '{4, 2, 8};
  int L_S [3]  = '{1, 2, 1};
  int L_U [3]  = '{1, 1, 2};
  logic signed [7:0] wreg [3][3][DS][3][3];         // [layer][c][cs][j][k]
  int refst [3][3][32][8];                          // [layer][c][x][y]
  logic [15:0] reffp [3][8][4];                     // half-precision population [c][x][y]

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
  int pool_ref [4][4];

  localparam int KD_BASE = 400;

  function automatic axon_t mk_axon(input int xoff, yoff, w, h, us, ad, idp);
    axon_t a = '0;
    a.x_off = OFF_W'(xoff); a.y_off = OFF_W'(yoff); a.c_off = '0;
    a.wq = QWH_W'((w + 7) / 8); a.hq = QWH_W'((h + 7) / 8);
    a.kw_m1 = 4'd2; a.kh_m1 = 4'd2; a.us = US_W'(us); a.ad = AD_W'(ad); a.idp = PID_W'(idp);
    return a;
  endfunction

  function automatic logic [63:0] pop_word(input int w, h, d, start, axc, kdb, input ntype_e nt);
    pop_desc_t p = '0;
    p.w = XY_W'(w); p.h = XY_W'(h); p.d = CH_W'(d); p.start = ADDR_W'(start);
    p.axon_cnt = AXC_W'(axc); p.kd_base = ADDR_W'(kdb); p.ntype = nt;
    return p;
  endfunction

  function automatic logic [63:0] kd_word(input int kw, kh, kd, sl, wptr);
    kdesc_t k = '0;
    k.kw_m1 = K_W'(kw - 1); k.kh_m1 = K_W'(kh - 1); k.kd = CH_W'(kd); k.sl = sl[0];
    k.wptr = ADDR_W'(wptr);
    return k;
  endfunction

  // weights of layer l, source channel cs, XY-transposed, channel-first
  task automatic load_weights(input int l, input int cs, input int wptr);
    logic [7:0] bytes [$];
    int d = L_D[l];
    for (int dx = 0; dx < 3; dx++)
      for (int dy = 0; dy < 3; dy++)
        for (int c = 0; c < d; c++) bytes.push_back(wreg[l][c][cs][2 - dx][2 - dy]);
    while (bytes.size() % 8 != 0) bytes.push_back(8'h0);
    for (int i = 0; i < bytes.size() / 8; i++)
      host_write(wptr + i, {bytes[8*i+7], bytes[8*i+6], bytes[8*i+5], bytes[8*i+4],
                            bytes[8*i+3], bytes[8*i+2], bytes[8*i+1], bytes[8*i]});
  endtask

  // state word/lane of neuron (c,x,y) in a population with true width wt, depth d
  function automatic int st_idx(input int x, y, c, wt, d);
    return (y * wt + x) * d + c;
  endfunction

  // ---------------- monitors ----------------
  int n_loop = 0, n_nin = 0, n_nout = 0, n_nout_stall = 0, n_filt = 0, n_edge = 0;
  int n_str = 0, n_sat = 0, n_qfull = 0, n_syn = 0;
  event_t nout_got [$];
  bit rand_nout = 1;
  always_ff @(posedge clk) begin
    noc_out_ready <= !rand_nout || ($urandom_range(0, 3) == 0);
    if (rst_n) begin
      if (stat_loopback)   n_loop++;
      if (stat_noc_in)     n_nin++;
      if (stat_noc_out)    nout_got.push_back(noc_out);
      if (stat_noc_out)    n_nout++;
      if (noc_out_valid && !noc_out_ready) n_nout_stall++;
      if (stat_filtered)   n_filt++;
      if (stat_skip_edge)  n_edge++;
      if (stat_skip_str)   n_str++;
      if (stat_sat)        n_sat++;
      if (stat_queue_full) n_qfull++;
      if (stat_syn)        n_syn++;
    end
  end

  fire_t  fires [$];
  event_t nout_exp [$];
  event_t pool_ev [$];

  initial begin
    logic [63:0] d;
    int idle_run;
    fire_valid = 0; fire = '0; noc_in_valid = 0; noc_in = '0; host_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------- random weights ----------
    foreach (wreg[l, c, cs, j, k]) wreg[l][c][cs][j][k] = 8'($urandom);

    // ---------- configuration ----------
    // population 0: source, axons at 64..69
    host_write(0, pop_word(WS, HS, DS, 64, 6, 0, NT_ACCUMULATE));
    // X_off = X0src - KW + XP + 1 - (X0dst << SL), upsampled: (X0src << US) ...
    host_write(64, mk_axon(-1, -1, 8, 4, 0, 8'h00, 1));        // conv, fragment x 0..7
    host_write(65, mk_axon(-5, -1, 8, 8, 0, 8'h11, 3));        // remote fragment at X0 = 4
    host_write(66, mk_axon(-1, -1, 16, 4, 0, 8'h00, 2));       // stride 2: W,H stored << 1
    host_write(67, mk_axon(-1, -1, 32, 8, 1, 8'h00, 4));       // 2x upsampling
    host_write(68, mk_axon(-1 - 8, -1, 8, 4, 0, 8'h00, 5));    // conv, fragment x 8..15
    host_write(69, mk_axon(-1, -1, 8, 4, 0, 8'h00, 7));        // same conv, half-precision states
    // destination populations; states follow the (empty) axon list
    host_write(1, pop_word(8, 4, 3, 200, 0, KD_BASE + 0, NT_ACCUMULATE));
    host_write(5, pop_word(8, 4, 3, 230, 0, KD_BASE + 2, NT_ACCUMULATE));
    host_write(2, pop_word(16, 4, 2, 260, 0, KD_BASE + 4, NT_ACCUMULATE));
    host_write(4, pop_word(32, 8, 1, 270, 0, KD_BASE + 6, NT_ACCUMULATE));
    host_write(6, pop_word(8, 8, 1, 340, 0, KD_BASE + 8, NT_MAX));
    host_write(7, pop_word(8, 4, 3, 360, 0, KD_BASE + 0, NT_ACC_FP16));
    // kernel descriptors: fragments 1 and 5 share the same weights
    for (int cs = 0; cs < DS; cs++) begin
      host_write(KD_BASE + 0 + cs, kd_word(3, 3, 3, 0, 500 + 4 * cs));
      host_write(KD_BASE + 2 + cs, kd_word(3, 3, 3, 0, 500 + 4 * cs));
      host_write(KD_BASE + 4 + cs, kd_word(3, 3, 2, 1, 510 + 3 * cs));
      host_write(KD_BASE + 6 + cs, kd_word(3, 3, 1, 0, 520 + 2 * cs));
      load_weights(0, cs, 500 + 4 * cs);
      load_weights(1, cs, 510 + 3 * cs);
      load_weights(2, cs, 520 + 2 * cs);
    end
    host_write(KD_BASE + 8, kd_word(2, 2, 1, 1, 530));
    host_write(530, 64'h0000_0000_0101_0101);                   // four weights of 1
    for (int a = 200; a < 350; a++) host_write(a, 64'h0);       // zero all states
    for (int a = 360; a < 384; a++) host_write(a, 64'h0);

    // ---------- stimulus ----------
    for (int i = 0; i < 80; i++) begin
      fire_t f;
      f.idp = 0;
      f.c = CH_W'($urandom_range(0, DS - 1));
      f.x = XY_W'($urandom_range(0, WS - 1));
      f.y = XY_W'($urandom_range(0, HS - 1));
      f.v = ($urandom_range(0, 3) == 0) ? 8'sd127 : VAL_W'($urandom);
      fires.push_back(f);
    end
    for (int i = 0; i < 40; i++) begin
      event_t e;
      automatic int xs = $urandom_range(0, 7), ys = $urandom_range(0, 7);
      e.ad = 0; e.idp = 6; e.csrc = 0; e.v = VAL_W'($urandom_range(1, 127));
      e.xmin = EXY_W'(xs - 2 + 0 + 1);   // remote SCU: x - KW + XP + 1, XP = 0
      e.ymin = EXY_W'(ys - 2 + 0 + 1);
      pool_ev.push_back(e);
    end

    fork
      begin
        foreach (fires[i]) begin
          @(negedge clk);
          fire = fires[i]; fire_valid = 1;
          @(posedge clk);
          while (!fire_ready) @(posedge clk);
          @(negedge clk);
          fire_valid = 0;
        end
      end
      begin
        foreach (pool_ev[i]) begin
          repeat ($urandom_range(0, 60)) @(negedge clk);
          @(negedge clk);
          noc_in = pool_ev[i]; noc_in_valid = 1;
          @(posedge clk);
          while (!noc_in_ready) @(posedge clk);
          @(negedge clk);
          noc_in_valid = 0;
        end
      end
    join

    idle_run = 0;
    while (idle_run < 20) begin
      @(posedge clk);
      idle_run = idle ? idle_run + 1 : 0;
    end

    // ---------- reference ----------
    foreach (refst[l, c, x, y]) refst[l][c][x][y] = 0;
    foreach (reffp[c, x, y]) reffp[c][x][y] = 16'h0000;
    foreach (fires[i]) begin
      automatic fire_t f = fires[i];
      // remote axon: anchor relative to the fragment at X0 = 4, 8x8, hit detection
      begin
        automatic int xm = int'(f.x) - 3 + 1 + 1 - 4, ym = int'(f.y) - 3 + 1 + 1;
        if (xm < 8 && xm + 3 > 0 && ym < 8 && ym + 3 > 0)
          nout_exp.push_back('{ad: 8'h11, idp: 5'd3, xmin: EXY_W'(xm), ymin: EXY_W'(ym),
                               csrc: f.c, v: f.v});
      end
      // half-precision copy of the first fragment of layer 0, updated in firing order
      for (int c = 0; c < 3; c++)
        for (int xo = 0; xo < 8; xo++)
          for (int yo = 0; yo < 4; yo++) begin
            automatic int j = int'(f.x) - xo + 1, k = int'(f.y) - yo + 1;
            if (j >= 0 && j < 3 && k >= 0 && k < 3 && reffp[c][xo][yo][14:10] != 5'h1f)
              reffp[c][xo][yo] = r2h(h2r(reffp[c][xo][yo]) + real'(int'(wreg[0][c][f.c][j][k]) * int'(f.v)));
          end
      for (int l = 0; l < 3; l++)
        for (int c = 0; c < L_D[l]; c++)
          for (int xo = 0; xo < L_W[l]; xo++)
            for (int yo = 0; yo < L_H[l]; yo++) begin
              automatic int j = int'(f.x) * L_U[l] - xo * L_S[l] + 1;
              automatic int k = int'(f.y) * L_U[l] - yo * L_S[l] + 1;
              if (j >= 0 && j < 3 && k >= 0 && k < 3) begin
                automatic int s = refst[l][c][xo][yo] + int'(wreg[l][c][f.c][j][k]) * int'(f.v);
                refst[l][c][xo][yo] = (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
              end
            end
    end
    foreach (pool_ref[x, y]) pool_ref[x][y] = 0;
    foreach (pool_ev[i]) begin
      automatic int xs = int'(pool_ev[i].xmin) + 1, ys = int'(pool_ev[i].ymin) + 1;
      if (int'(pool_ev[i].v) > pool_ref[xs / 2][ys / 2]) pool_ref[xs / 2][ys / 2] = int'(pool_ev[i].v);
    end

    // ---------- compare ----------
    begin
      automatic int nz_up = 0, nz_pool = 0, nz_fp = 0;
      for (int l = 0; l < 3; l++)
        for (int c = 0; c < L_D[l]; c++)
          for (int xo = 0; xo < L_W[l]; xo++)
            for (int yo = 0; yo < L_H[l]; yo++) begin
              int start, lx, wt, n;
              logic signed [15:0] got;
              case (l)
                0: begin start = (xo < 8) ? 200 : 230; lx = xo % 8; wt = 8; end
                1: begin start = 260; lx = xo; wt = 8; end
                default: begin start = 270; lx = xo; wt = 32; end
              endcase
              n = st_idx(lx, yo, c, wt, L_D[l]);
              host_read(start + n / 4, d);
              got = d[16 * (n % 4) +: 16];
              check(int'(got) == refst[l][c][xo][yo],
                    $sformatf("layer %0d neuron (%0d,%0d,%0d): %0d, expected %0d",
                              l, c, xo, yo, got, refst[l][c][xo][yo]));
              if (l == 2 && got != 0) nz_up++;
            end
      for (int x = 0; x < 4; x++)
        for (int y = 0; y < 4; y++) begin
          automatic int n = st_idx(x, y, 0, 4, 1);
          logic signed [15:0] got;
          host_read(340 + n / 4, d);
          got = d[16 * (n % 4) +: 16];
          check(int'(got) == pool_ref[x][y], $sformatf("max pool (%0d,%0d): %0d, expected %0d",
                                                       x, y, got, pool_ref[x][y]));
          if (got != 0) nz_pool++;
        end

      for (int c = 0; c < 3; c++)
        for (int x = 0; x < 8; x++)
          for (int y = 0; y < 4; y++) begin
            automatic int n = st_idx(x, y, c, 8, 3);
            logic [15:0] got;
            host_read(360 + n / 4, d);
            got = d[16 * (n % 4) +: 16];
            check(got == reffp[c][x][y], $sformatf("half-precision neuron (%0d,%0d,%0d): %h, expected %h",
                                                   c, x, y, got, reffp[c][x][y]));
            if (got != 16'h0000) nz_fp++;
          end

      check(nout_got.size() == nout_exp.size(),
            $sformatf("network events %0d, expected %0d", nout_got.size(), nout_exp.size()));
      for (int i = 0; i < nout_got.size() && i < nout_exp.size(); i++)
        check(nout_got[i] == nout_exp[i], $sformatf("network event %0d: %h vs %h", i,
                                                    nout_got[i], nout_exp[i]));

      $display("mechanisms: loopback=%0d noc_out=%0d noc_out_stall=%0d noc_in=%0d filtered=%0d",
               n_loop, n_nout, n_nout_stall, n_nin, n_filt);
      $display("            edge_skip=%0d stride_skip=%0d saturation=%0d queue_full=%0d synapses=%0d",
               n_edge, n_str, n_sat, n_qfull, n_syn);
      $display("            upsampled_nonzero=%0d maxpool_nonzero=%0d fp16_nonzero=%0d", nz_up, nz_pool, nz_fp);
      check(n_loop > 0, "local loopback happened");
      check(n_nout > 0, "network output happened");
      check(n_nout_stall > 0, "network back-pressure happened");
      check(n_nin == pool_ev.size(), "all network input events accepted");
      check(n_filt > 0, "hit detection dropped events");
      check(n_edge > 0, "edge skipping happened");
      check(n_str > 0, "stride skipping happened");
      check(n_sat > 0, "saturation happened");
      check(n_qfull > 0, "event queue filled up");
      check(nz_up > 0, "upsampled convolution produced updates");
      check(nz_pool > 0, "max pooling produced updates");
      check(nz_fp > 0, "half-precision accumulation produced updates");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
