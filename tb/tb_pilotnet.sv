// Workload testbench: the whole PilotNet network, layer by layer, on one neuron core.
//
// PilotNet (the end-to-end steering network) maps a 3 x 66 x 200 image through five
// convolutions and four dense layers:
//     conv1  3 x 66 x 200 -> 24 x 31 x 98   5x5 stride 2
//     conv2 24 x 31 x 98  -> 36 x 14 x 47   5x5 stride 2
//     conv3 36 x 14 x 47  -> 48 x  5 x 22   5x5 stride 2
//     conv4 48 x  5 x 22  -> 64 x  3 x 20   3x3
//     conv5 64 x  3 x 20  -> 64 x  1 x 18   3x3
//     fc1   flatten 1152  -> 100            one 18x1 convolution over 64 x 1 x 18
//     fc2   100 -> 50, fc3 50 -> 10, fc4 10 -> 1   1x1 convolutions on N x 1 x 1 maps
// The whole network needs about 0.45 MB, more than one core holds, so the testbench
// loads the core again for every layer: source population l (its axons), destination
// population l+1 (descriptor, kernel descriptors, XY-transposed weights, zeroed
// states). Every layer on its own fits into the default 256 kB memory.
//
// Mapping details exercised here:
//  * valid (unpadded) convolutions: X_off = -KW + 1, Y_off = -KH + 1;
//  * stride 2: stride field set, destination width/height stored doubled;
//  * flatten + dense as one convolution whose kernel covers the source map; an 18-wide
//    kernel does not fit the 4-bit kernel-size field, so it is split into two 9-wide
//    halves: two axons, the second with X_off = -17 and C_off = 64 so that its events
//    select a second set of 64 kernel descriptors. Hit detection drops each source
//    neuron's event for the half its window misses;
//  * dense layers as 1x1 convolutions.
//
// The testbench plays compiler, host and activation unit. It fires every non-zero
// input value, waits until the core is idle, reads back all states and compares them
// with an ordinary output-centric convolution. Between layers it applies ReLU and a
// right shift chosen from the layer's largest output (the result lies in 0..15) and
// fires the non-zero results into the next layer. Per layer it also checks the number
// of events (from the hit-detection rule), dropped events and synapses, and that
// the core needed at least 4 cycles per synapse (the neuron-update rate). Weight
// ranges are chosen per layer so that no partial sum can leave 16 bits (fan-in * 15 *
// max|w| < 32768), which makes the result independent of the accumulation order.
module tb_pilotnet;
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
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- monitors ----------------
  longint n_syn = 0, n_loop = 0, n_nout = 0, n_sat = 0, n_filt = 0, n_cyc = 0;
  always_ff @(posedge clk) begin
    n_cyc <= n_cyc + 1;
    if (rst_n) begin
      if (stat_syn)      n_syn++;
      if (stat_loopback) n_loop++;
      if (stat_noc_out)  n_nout++;
      if (stat_sat)      n_sat++;
      if (stat_filtered) n_filt++;
    end
  end

  // ---------------- loader port and firing ----------------
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

  task automatic fire_neuron(input fire_t f);
    @(negedge clk);
    fire = f; fire_valid = 1;
    @(posedge clk);
    while (!fire_ready) @(posedge clk);
    @(negedge clk);
    fire_valid = 0;
  endtask

  // wait until the core has been idle for 20 cycles; returns the cycle it became idle
  task automatic wait_idle(output longint t_idle);
    int run = 0;
    while (run < 20) begin
      @(posedge clk);
      run = idle ? run + 1 : 0;
    end
    t_idle = n_cyc - 20;
  endtask

  // ---------------- network ----------------
  localparam int NL = 9;
  //                          conv1 conv2 conv3 conv4 conv5 fc1  fc2  fc3  fc4
  localparam int L_DIN [NL] = '{3,   24,   36,   48,   64,   64,  100, 50,  10};
  localparam int L_HIN [NL] = '{66,  31,   14,   5,    3,    1,   1,   1,   1};
  localparam int L_WIN [NL] = '{200, 98,   47,   22,   20,   18,  1,   1,   1};
  localparam int L_DO  [NL] = '{24,  36,   48,   64,   64,   100, 50,  10,  1};
  localparam int L_KW  [NL] = '{5,   5,    5,    3,    3,    18,  1,   1,   1};
  localparam int L_KH  [NL] = '{5,   5,    5,    3,    3,    1,   1,   1,   1};
  localparam int L_S   [NL] = '{2,   2,    2,    1,    1,    1,   1,   1,   1};
  localparam int L_NSP [NL] = '{1,   1,    1,    1,    1,    2,   1,   1,   1};  // kernel splits in X

  // memory map of one loaded layer (word addresses)
  localparam int SRC_AX = 64;      // axons of the source population
  localparam int KDB    = 128;     // kernel descriptors, one per (split, c_src)
  localparam int DST_ST = 1024;    // states of the destination population, then weights

  int act [];                      // current layer input  [(c*H + y)*W + x], 0..15
  int wt  [];                      // current layer weights [((c*Din + cs)*KW + j)*KH + k]
  int refo [];                     // reference output      [(c*Ho + y)*Wo + x]

  function automatic logic [63:0] pop_word(input int w, h, d, start, axc, kdb);
    pop_desc_t p = '0;
    p.w = XY_W'(w); p.h = XY_W'(h); p.d = CH_W'(d); p.start = ADDR_W'(start);
    p.axon_cnt = AXC_W'(axc); p.kd_base = ADDR_W'(kdb); p.ntype = NT_ACCUMULATE;
    return p;
  endfunction

  function automatic logic [63:0] axon_word(input int xoff, yoff, coff, kw, kh, w, h, idp);
    axon_t a = '0;
    a.x_off = OFF_W'(xoff); a.y_off = OFF_W'(yoff); a.c_off = CH_W'(coff);
    a.wq = QWH_W'((w + 7) / 8); a.hq = QWH_W'((h + 7) / 8);
    a.kw_m1 = K_W'(kw - 1); a.kh_m1 = K_W'(kh - 1); a.us = '0; a.ad = '0;
    a.idp = PID_W'(idp);
    return a;
  endfunction

  function automatic logic [63:0] kd_word(input int kw, kh, kd, sl, wptr);
    kdesc_t k = '0;
    k.kw_m1 = K_W'(kw - 1); k.kh_m1 = K_W'(kh - 1); k.kd = CH_W'(kd); k.sl = sl[0];
    k.wptr = ADDR_W'(wptr);
    return k;
  endfunction

  // number of window positions of an event that land inside a destination of stored
  // size (w, h) and survive the stride test
  function automatic int positions(input int xmin, ymin, kw, kh, w, h, sl);
    int nx = 0, ny = 0;
    for (int dx = 0; dx < kw; dx++)
      if (xmin + dx >= 0 && xmin + dx < w && (sl == 0 || (xmin + dx) % 2 == 0)) nx++;
    for (int dy = 0; dy < kh; dy++)
      if (ymin + dy >= 0 && ymin + dy < h && (sl == 0 || (ymin + dy) % 2 == 0)) ny++;
    return nx * ny;
  endfunction

  task automatic run_layer(input int l);
    int din = L_DIN[l], hin = L_HIN[l], win = L_WIN[l], dout = L_DO[l];
    int kw = L_KW[l], kh = L_KH[l], s = L_S[l], nsp = L_NSP[l];
    int sl = (s == 2) ? 1 : 0;
    int kwa = kw / nsp;                                   // kernel width per split
    int ho = (hin - kh) / s + 1, wo = (win - kw) / s + 1;
    int ws = wo << sl, hs = ho << sl;                     // stored destination size
    int nst = (dout * ho * wo + 3) / 4;                   // state words
    int wpw = (kwa * kh * dout + 7) / 8;                  // weight words per descriptor
    int wp = DST_ST + nst + 8;
    int wmax = 32767 / (din * kw * kh * 15);
    longint t0, t1, syn0, loop0, filt0, exp_syn = 0, exp_ev = 0, fires = 0;
    int maxpos = 0, sh = 0;
    logic [63:0] d;
    if (wmax > 7) wmax = 7;
    check(wp + wpw * din * nsp <= 32768, $sformatf("layer %0d fits into the core memory", l));

    // ---------- weights and configuration ----------
    wt = new[dout * din * kw * kh];
    foreach (wt[i]) wt[i] = $urandom_range(0, 2 * wmax) - wmax;
    host_write(l, pop_word(win, hin, din, SRC_AX, nsp, 0));
    host_write(l + 1, pop_word(ws, hs, dout, DST_ST, 0, KDB));
    for (int h = 0; h < nsp; h++)
      host_write(SRC_AX + h, axon_word(-(h + 1) * kwa + 1, -kh + 1, h * din, kwa, kh, ws, hs, l + 1));
    for (int h = 0; h < nsp; h++)
      for (int cs = 0; cs < din; cs++) begin
        automatic logic [7:0] bytes [$];
        automatic int a = wp + wpw * (h * din + cs);
        host_write(KDB + h * din + cs, kd_word(kwa, kh, dout, sl, a));
        for (int dx = 0; dx < kwa; dx++)
          for (int dy = 0; dy < kh; dy++)
            for (int c = 0; c < dout; c++)
              bytes.push_back(8'(wt[((c * din + cs) * kw + h * kwa + kwa - 1 - dx) * kh + kh - 1 - dy]));
        while (bytes.size() % 8 != 0) bytes.push_back(8'h0);
        for (int i = 0; i < bytes.size() / 8; i++)
          host_write(a + i, {bytes[8*i+7], bytes[8*i+6], bytes[8*i+5], bytes[8*i+4],
                             bytes[8*i+3], bytes[8*i+2], bytes[8*i+1], bytes[8*i]});
      end
    for (int a = DST_ST; a < DST_ST + nst; a++) host_write(a, 64'h0);

    // ---------- fire the layer input ----------
    syn0 = n_syn; loop0 = n_loop; filt0 = n_filt;
    t0 = n_cyc;
    for (int y = 0; y < hin; y++)
      for (int x = 0; x < win; x++)
        for (int c = 0; c < din; c++)
          if (act[(c * hin + y) * win + x] != 0) begin
            automatic fire_t f = '{idp: PID_W'(l), x: XY_W'(x), y: XY_W'(y), c: CH_W'(c),
                                   v: VAL_W'(act[(c * hin + y) * win + x])};
            fire_neuron(f);
            fires++;
            for (int h = 0; h < nsp; h++) begin
              automatic int xm = x - (h + 1) * kwa + 1, ym = y - kh + 1;
              if (xm < 8 * ((ws + 7) / 8) && xm + kwa > 0 && ym < 8 * ((hs + 7) / 8) && ym + kh > 0) begin
                exp_ev++;
                exp_syn += longint'(positions(xm, ym, kwa, kh, ws, hs, sl) * dout);
              end
            end
          end
    wait_idle(t1);

    // ---------- reference and read-back ----------
    refo = new[dout * ho * wo];
    foreach (refo[i]) begin
      automatic int c = i / (ho * wo), y = (i / wo) % ho, x = i % wo, acc = 0;
      for (int cs = 0; cs < din; cs++)
        for (int j = 0; j < kw; j++)
          for (int k = 0; k < kh; k++)
            acc += wt[((c * din + cs) * kw + j) * kh + k] * act[(cs * hin + s * y + k) * win + s * x + j];
      refo[i] = acc;
      if (acc > maxpos) maxpos = acc;
    end
    for (int wd = 0; wd < nst; wd++) begin
      host_read(DST_ST + wd, d);
      for (int ln = 0; ln < 4; ln++) begin
        automatic int n = 4 * wd + ln;             // (y*wo + x)*dout + c
        if (n < dout * ho * wo) begin
          automatic int c = n % dout, x = (n / dout) % wo, y = n / (dout * wo);
          automatic logic signed [15:0] got = d[16 * ln +: 16];
          check(int'(got) == refo[(c * ho + y) * wo + x],
                $sformatf("layer %0d neuron (%0d,%0d,%0d): %0d, expected %0d", l, c, x, y,
                          got, refo[(c * ho + y) * wo + x]));
        end
      end
    end

    $display("layer %0d: %0d x %0d x %0d, %0d firing, %0d events (%0d dropped), %0d synapses, %0d cycles",
             l, dout, ho, wo, fires, n_loop - loop0, n_filt - filt0, n_syn - syn0, t1 - t0);
    check(fires > 0, $sformatf("layer %0d has firing inputs", l));
    check(n_loop - loop0 == exp_ev, $sformatf("layer %0d events %0d, expected %0d", l, n_loop - loop0, exp_ev));
    check(n_filt - filt0 == fires * nsp - exp_ev, $sformatf("layer %0d dropped events", l));
    check(n_syn - syn0 == exp_syn, $sformatf("layer %0d synapses %0d, expected %0d", l, n_syn - syn0, exp_syn));
    check(t1 - t0 >= 4 * (n_syn - syn0), $sformatf("layer %0d at most one synapse per 4 cycles", l));

    // ---------- activation: next layer's input ----------
    while ((maxpos >>> sh) > 15) sh++;
    act = new[refo.size()];
    foreach (refo[i]) act[i] = (refo[i] <= 0) ? 0 : (refo[i] >>> sh);
  endtask

  initial begin
    fire_valid = 0; fire = '0; noc_in_valid = 0; noc_in = '0; host_req = '0;
    noc_out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // random image, values 0..15, about 30 % zeros
    act = new[L_DIN[0] * L_HIN[0] * L_WIN[0]];
    foreach (act[i]) act[i] = ($urandom_range(0, 9) < 3) ? 0 : $urandom_range(1, 15);

    for (int l = 0; l < NL; l++) run_layer(l);

    check(n_nout == 0, "no event left the core");
    check(n_sat == 0, "no saturation");
    $display("network output (steering value): %0d", refo[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
