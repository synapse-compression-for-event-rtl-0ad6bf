// Workload testbench: MobileNet and ResNet building blocks on one neuron core.
//
// The larger networks cannot be held by one core, but their characteristic layer
// types can be run on one. Twelve populations are configured together on one core at
// its default size:
//  * depthwise-separable block (MobileNet): a 4 x 8 x 8 input kept as four depth-1
//    populations S0..S3, a depthwise 3x3 convolution with padding 1 into four depth-1
//    populations DW0..DW3 (one axon and one kernel descriptor each), and a pointwise
//    1x1 convolution from all DWi into one 6 x 8 x 8 population P. The DWi axons
//    carry C_off = i, so each selects the kernel descriptor of its input channel;
//  * residual blocks (ResNet): a 2 x 8 x 8 input X with four axons:
//      - a 3x3 padded convolution into R (2 x 8 x 8);
//      - an identity shortcut into R: a 1x1 connection with C_off = 2, whose kernel
//        descriptors hold weight 1 for the same channel and 0 otherwise;
//      - a 3x3 stride-2 padded convolution into R2 (3 x 4 x 4, stored as 8 x 8);
//      - a 1x1 stride-2 projection shortcut into R2, C_off = 2.
// The testbench plays compiler, host and activation unit. It fires random values
// 0..15 into S0..S3 and X and reads back DW, R and R2. It then applies ReLU and a
// right shift to DW, fires the results into P and reads P. Every state is compared
// with an ordinary output-centric model (zero padding, stride, sum of both residual
// branches). The event count is checked against the number of axons the firing
// populations have. Synapse counts are checked against the kernel windows.
module tb_cnn_blocks;
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

  longint n_syn = 0, n_loop = 0, n_nout = 0, n_sat = 0, n_str = 0, n_edge = 0;
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (stat_syn)       n_syn++;
      if (stat_loopback)  n_loop++;
      if (stat_noc_out)   n_nout++;
      if (stat_sat)       n_sat++;
      if (stat_skip_str)  n_str++;
      if (stat_skip_edge) n_edge++;
    end
  end

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

  task automatic wait_idle();
    int run = 0;
    while (run < 20) begin
      @(posedge clk);
      run = idle ? run + 1 : 0;
    end
  endtask

  // ---------------- populations ----------------
  localparam int NP = 12;
  localparam int S0 = 0, DW0 = 4, P = 8, X = 9, R = 10, R2 = 11;
  //                     S0..S3      DW0..DW3    P  X  R  R2
  int pd  [NP] = '{1, 1, 1, 1, 1, 1, 1, 1, 6, 2, 2, 3};   // depth
  int pw  [NP] = '{8, 8, 8, 8, 8, 8, 8, 8, 8, 8, 8, 4};   // true width = height
  int psl [NP] = '{0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 1};   // stride field of its kernels
  int pax [NP] = '{1, 1, 1, 1, 1, 1, 1, 1, 0, 4, 0, 0};   // axon count
  int pcs [NP] = '{0, 0, 0, 0, 1, 1, 1, 1, 4, 0, 4, 4};   // kernel descriptors (c_src)
  int pstart [NP], pkdb [NP];
  int next_free = 64;

  function automatic int alloc(input int n);
    alloc = next_free;
    next_free += n;
  endfunction

  function automatic int nwords(input int p);
    return (pd[p] * pw[p] * pw[p] + 3) / 4;
  endfunction

  // weights and reference states, indexed [pop][((c*CS + cs)*K + j)*K + k] and
  // [pop][(c*W + y)*W + x]; each destination has one K for all its c_src here
  int wts [NP][$];
  int val [NP][$];       // firing values of source populations
  int refv [NP][$];      // expected states

  task automatic write_pop(input int p);
    pop_desc_t pdsc = '0;
    pdsc.w = XY_W'(pw[p] << psl[p]); pdsc.h = XY_W'(pw[p] << psl[p]); pdsc.d = CH_W'(pd[p]);
    pdsc.start = ADDR_W'(pstart[p]); pdsc.axon_cnt = AXC_W'(pax[p]);
    pdsc.kd_base = ADDR_W'(pkdb[p]); pdsc.ntype = NT_ACCUMULATE;
    host_write(p, pdsc);
  endtask

  // axon number n of population src into dst: kernel k x k, padding pad, channel offset
  task automatic write_axon(input int src, n, dst, k, pad, coff);
    axon_t a = '0;
    a.x_off = OFF_W'(-k + pad + 1); a.y_off = OFF_W'(-k + pad + 1); a.c_off = CH_W'(coff);
    a.wq = QWH_W'(((pw[dst] << psl[dst]) + 7) / 8); a.hq = a.wq;
    a.kw_m1 = K_W'(k - 1); a.kh_m1 = K_W'(k - 1); a.ad = '0; a.us = '0; a.idp = PID_W'(dst);
    host_write(pstart[src] + n, a);
  endtask

  // kernel descriptor of (dst, cs) with a k x k kernel; w(c, j, k) from wsrc/cs_w
  task automatic write_kd(input int dst, cs, k, input int ws [$], input int ncs, cs_w);
    kdesc_t kd = '0;
    logic [7:0] bytes [$];
    int a;
    for (int dx = 0; dx < k; dx++)
      for (int dy = 0; dy < k; dy++)
        for (int c = 0; c < pd[dst]; c++)
          bytes.push_back(8'(ws[((c * ncs + cs_w) * k + k - 1 - dx) * k + k - 1 - dy]));
    while (bytes.size() % 8 != 0) bytes.push_back(8'h0);
    a = alloc(bytes.size() / 8);
    for (int i = 0; i < bytes.size() / 8; i++)
      host_write(a + i, {bytes[8*i+7], bytes[8*i+6], bytes[8*i+5], bytes[8*i+4],
                         bytes[8*i+3], bytes[8*i+2], bytes[8*i+1], bytes[8*i]});
    kd.kw_m1 = K_W'(k - 1); kd.kh_m1 = K_W'(k - 1); kd.kd = CH_W'(pd[dst]);
    kd.sl = psl[dst][0]; kd.wptr = ADDR_W'(a);
    host_write(pkdb[dst] + cs, kd);
  endtask

  // reference: dst += conv(src values, weights ws [c][cs][j][k], k, pad, stride)
  task automatic ref_conv(input int src, dst, input int ws [$], input int k, pad, s);
    int ncs = pd[src];
    for (int c = 0; c < pd[dst]; c++)
      for (int y = 0; y < pw[dst]; y++)
        for (int x = 0; x < pw[dst]; x++) begin
          automatic int acc = 0;
          for (int cs = 0; cs < ncs; cs++)
            for (int j = 0; j < k; j++)
              for (int l = 0; l < k; l++) begin
                automatic int xi = s * x + j - pad, yi = s * y + l - pad;
                if (xi >= 0 && xi < pw[src] && yi >= 0 && yi < pw[src])
                  acc += ws[((c * ncs + cs) * k + j) * k + l] * val[src][(cs * pw[src] + yi) * pw[src] + xi];
              end
          refv[dst][(c * pw[dst] + y) * pw[dst] + x] += acc;
        end
  endtask

  // synapses one event causes: window positions inside the stored map, stride test
  function automatic int positions(input int xs, ys, k, pad, dst);
    int ws = pw[dst] << psl[dst], nx = 0, ny = 0;
    for (int d = 0; d < k; d++) begin
      automatic int x = xs - k + pad + 1 + d, y = ys - k + pad + 1 + d;
      if (x >= 0 && x < ws && (psl[dst] == 0 || x % 2 == 0)) nx++;
      if (y >= 0 && y < ws && (psl[dst] == 0 || y % 2 == 0)) ny++;
    end
    return nx * ny * pd[dst];
  endfunction

  task automatic compare(input int p, input string name);
    logic [63:0] d;
    for (int wd = 0; wd < nwords(p); wd++) begin
      host_read(pstart[p] + pax[p] + wd, d);
      for (int ln = 0; ln < 4; ln++) begin
        automatic int n = 4 * wd + ln;
        if (n < pd[p] * pw[p] * pw[p]) begin
          automatic int c = n % pd[p], x = (n / pd[p]) % pw[p], y = n / (pd[p] * pw[p]);
          automatic logic signed [15:0] got = d[16 * ln +: 16];
          automatic int e = refv[p][(c * pw[p] + y) * pw[p] + x];
          check(int'(got) == e, $sformatf("%s (%0d,%0d,%0d): %0d, expected %0d", name, c, x, y, got, e));
        end
      end
    end
  endtask

  // fire all non-zero values of population p; returns events and expected synapses
  task automatic fire_pop(input int p, inout int ev, syn);
    for (int y = 0; y < pw[p]; y++)
      for (int x = 0; x < pw[p]; x++)
        for (int c = 0; c < pd[p]; c++)
          if (val[p][(c * pw[p] + y) * pw[p] + x] != 0) begin
            automatic fire_t f = '{idp: PID_W'(p), x: XY_W'(x), y: XY_W'(y), c: CH_W'(c),
                                   v: VAL_W'(val[p][(c * pw[p] + y) * pw[p] + x])};
            fire_neuron(f);
            ev += pax[p];
            if (p < DW0) syn += positions(x, y, 3, 1, DW0 + p);
            else if (p < P) syn += positions(x, y, 1, 0, P);
            else syn += positions(x, y, 3, 1, R) + positions(x, y, 1, 0, R)
                      + positions(x, y, 3, 1, R2) + positions(x, y, 1, 0, R2);
          end
  endtask

  initial begin
    automatic int ev = 0, syn = 0;
    longint l0, s0;
    automatic int id [$];
    fire_valid = 0; fire = '0; noc_in_valid = 0; noc_in = '0; host_req = '0;
    noc_out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------- memory allocation and descriptors ----------
    for (int p = 0; p < NP; p++) begin
      pstart[p] = alloc(pax[p] + nwords(p));
      pkdb[p] = alloc(pcs[p]);
      write_pop(p);
      for (int a = pstart[p] + pax[p]; a < pstart[p] + pax[p] + nwords(p); a++) host_write(a, 64'h0);
      refv[p] = {};
      for (int i = 0; i < pd[p] * pw[p] * pw[p]; i++) refv[p].push_back(0);
    end
    // depthwise 3x3 (pad 1): Si -> DWi, one weight set per channel
    for (int i = 0; i < 4; i++) begin
      wts[DW0 + i] = {};
      for (int n = 0; n < 9; n++) wts[DW0 + i].push_back($urandom_range(0, 15) - 8);
      write_axon(S0 + i, 0, DW0 + i, 3, 1, 0);
      write_kd(DW0 + i, 0, 3, wts[DW0 + i], 1, 0);
    end
    // pointwise 1x1: DWi -> P with C_off = i; weights [c][cs] for c in 0..5, cs in 0..3
    wts[P] = {};
    for (int n = 0; n < 6 * 4; n++) wts[P].push_back($urandom_range(0, 15) - 8);
    for (int i = 0; i < 4; i++) begin
      write_axon(DW0 + i, 0, P, 1, 0, i);
      write_kd(P, i, 1, wts[P], 4, i);
    end
    // residual: X -> R (3x3 conv, c_src 0..1, plus identity, c_src 2..3)
    //           X -> R2 (3x3 stride-2 conv, c_src 0..1, plus 1x1 stride-2 projection, c_src 2..3)
    wts[R] = {};
    for (int n = 0; n < 2 * 2 * 9; n++) wts[R].push_back($urandom_range(0, 15) - 8);
    wts[R2] = {};
    for (int n = 0; n < 3 * 2 * 9; n++) wts[R2].push_back($urandom_range(0, 15) - 8);
    write_axon(X, 0, R, 3, 1, 0);
    write_axon(X, 1, R, 1, 0, 2);
    write_axon(X, 2, R2, 3, 1, 0);
    write_axon(X, 3, R2, 1, 0, 2);
    id = {1, 0, 0, 1};                                   // identity [c][cs]
    wts[X] = {};                                         // projection weights [c][cs]
    for (int n = 0; n < 3 * 2; n++) wts[X].push_back($urandom_range(0, 15) - 8);
    for (int cs = 0; cs < 2; cs++) begin
      write_kd(R, cs, 3, wts[R], 2, cs);
      write_kd(R, 2 + cs, 1, id, 2, cs);
      write_kd(R2, cs, 3, wts[R2], 2, cs);
      write_kd(R2, 2 + cs, 1, wts[X], 2, cs);
    end
    check(next_free <= 32768, "configuration fits into the core memory");

    // ---------- phase 1: inputs S0..S3 and X ----------
    for (int p = 0; p < NP; p++) begin
      val[p] = {};
      for (int i = 0; i < pd[p] * pw[p] * pw[p]; i++)
        val[p].push_back((p < DW0 || p == X) ? (($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, 15)) : 0);
    end
    l0 = n_loop; s0 = n_syn;
    for (int i = 0; i < 4; i++) fire_pop(S0 + i, ev, syn);
    fire_pop(X, ev, syn);
    wait_idle();
    check(n_loop - l0 == longint'(ev), $sformatf("phase 1 events %0d, expected %0d", n_loop - l0, ev));
    check(n_syn - s0 == longint'(syn), $sformatf("phase 1 synapses %0d, expected %0d", n_syn - s0, syn));
    for (int i = 0; i < 4; i++) ref_conv(S0 + i, DW0 + i, wts[DW0 + i], 3, 1, 1);
    ref_conv(X, R, wts[R], 3, 1, 1);
    ref_conv(X, R, id, 1, 0, 1);
    ref_conv(X, R2, wts[R2], 3, 1, 2);
    ref_conv(X, R2, wts[X], 1, 0, 2);
    for (int i = 0; i < 4; i++) compare(DW0 + i, $sformatf("depthwise %0d", i));
    compare(R, "residual");
    compare(R2, "strided residual");

    // ---------- phase 2: activated depthwise output -> pointwise ----------
    for (int i = 0; i < 4; i++) begin
      val[DW0 + i] = {};
      foreach (refv[DW0 + i][n])
        val[DW0 + i].push_back((refv[DW0 + i][n] <= 0) ? 0 :
                               (refv[DW0 + i][n] >= 16 * 16) ? 15 : refv[DW0 + i][n] >>> 4);
    end
    ev = 0; syn = 0; l0 = n_loop; s0 = n_syn;
    for (int i = 0; i < 4; i++) fire_pop(DW0 + i, ev, syn);
    wait_idle();
    check(ev > 0, "depthwise output fired");
    check(n_loop - l0 == longint'(ev), $sformatf("phase 2 events %0d, expected %0d", n_loop - l0, ev));
    check(n_syn - s0 == longint'(syn), $sformatf("phase 2 synapses %0d, expected %0d", n_syn - s0, syn));
    begin
      // pointwise reference with the four depth-1 sources taken as channels 0..3
      for (int c = 0; c < 6; c++)
        for (int n = 0; n < 64; n++) begin
          automatic int acc = 0;
          for (int i = 0; i < 4; i++) acc += wts[P][c * 4 + i] * val[DW0 + i][n];
          refv[P][c * 64 + n] = acc;
        end
    end
    compare(P, "pointwise");

    $display("events=%0d synapses=%0d stride_skips=%0d edge_skips=%0d", n_loop, n_syn, n_str, n_edge);
    check(n_str > 0 && n_edge > 0, "stride and edge skipping happened");
    check(n_nout == 0 && n_sat == 0, "no network output, no saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
