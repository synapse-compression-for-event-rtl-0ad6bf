// Synapse computation unit (SCU), the event generator at the source core.
//
// A firing neuron (population ID, x, y, c and value v) is turned into at most one
// event per axon of its population, without any per-neuron connectivity memory.
// The unit reads the population descriptor of the source population (axon count and
// start address), then walks the axons stored at start .. start+axon_cnt-1. For each
// axon it computes, as in the paper's final SCU algorithm,
//     x_up, y_up   = (x, y) << US                       (source upsampling)
//     x_min, y_min = (x_up, y_up) + (X_off, Y_off)      (kernel anchor, fragment shift)
//     c            = c + C_off                          (channel fragment shift)
//     x_max, y_max = (x_min, y_min) + (KW, KH)
// and emits the event (AD_c, ID_p, x_min, y_min, c, v) only when the kernel window
// overlaps the destination fragment:
//     x_min < W  and  x_max > 0  and  y_min < H  and  y_max > 0   (hit detection).
// Offsets already contain the kernel shape, padding, fragment origins and the
// destination stride, all worked out by the compiler.
//
// Own choices: the axon keeps the destination width and height in units of 8
// neurons (W = 8*wq), so hit detection is conservative for fragments whose size is
// not a multiple of 8; an event that slips through decodes to no synapse in the
// PSL, so results are unchanged. Handshakes are valid/ready; memory reads go
// through the shared memory port.
//
// Timing: per firing neuron 2 cycles for the descriptor read plus, per axon, 2 cycles
// for the axon read and 1 cycle to emit or drop the event, plus any wait for a
// memory grant or for ev_ready.
module scu
  import scp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // firing neuron
  input  logic     fire_valid,
  output logic     fire_ready,
  input  fire_t    fire,
  // memory port
  output mem_req_t mreq,
  input  mem_rsp_t mrsp,
  // generated events
  output logic     ev_valid,
  input  logic     ev_ready,
  output event_t   ev,
  // one-cycle pulses for statistics
  output logic     stat_filtered,
  output logic     stat_emitted,
  output logic     busy
);

  typedef enum logic [2:0] {S_IDLE, S_RD_POP, S_W_POP, S_RD_AX, S_W_AX, S_EMIT} state_e;
  state_e state;

  fire_t              f_q;
  logic [ADDR_W-1:0]  start_q;
  logic [AXC_W-1:0]   cnt_q;
  logic [AXC_W-1:0]   ax_i;
  axon_t              ax_q;

  localparam int unsigned CW = 18;  // wide enough for (255 << 7) + offset

  logic signed [CW-1:0] xup, yup, xmin, ymin, xmax, ymax, wlim, hlim;
  logic                 hit;

  always_comb begin
    xup  = signed'(CW'(f_q.x) << ax_q.us);
    yup  = signed'(CW'(f_q.y) << ax_q.us);
    xmin = xup + CW'(ax_q.x_off);
    ymin = yup + CW'(ax_q.y_off);
    xmax = xmin + signed'(CW'(ax_q.kw_m1) + CW'(1));
    ymax = ymin + signed'(CW'(ax_q.kh_m1) + CW'(1));
    wlim = signed'(CW'(ax_q.wq) << 3);
    hlim = signed'(CW'(ax_q.hq) << 3);
    hit  = (xmin < wlim) && (xmax > 0) && (ymin < hlim) && (ymax > 0);
  end

  always_comb begin
    ev.ad   = ax_q.ad;
    ev.idp  = ax_q.idp;
    ev.xmin = xmin[EXY_W-1:0];
    ev.ymin = ymin[EXY_W-1:0];
    ev.csrc = f_q.c + ax_q.c_off;
    ev.v    = f_q.v;
  end

  assign fire_ready    = (state == S_IDLE);
  assign ev_valid      = (state == S_EMIT) && hit;
  assign stat_filtered = (state == S_EMIT) && !hit;
  assign stat_emitted  = ev_valid && ev_ready;
  assign busy          = (state != S_IDLE);

  always_comb begin
    mreq       = '0;
    mreq.req   = (state == S_RD_POP) || (state == S_RD_AX);
    mreq.addr  = (state == S_RD_POP) ? POP_TABLE_BASE + ADDR_W'(f_q.idp)
                                     : start_q + ADDR_W'(ax_i);
  end

  wire last_axon = (ax_i == cnt_q - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      f_q     <= '0;
      start_q <= '0;
      cnt_q   <= '0;
      ax_i    <= '0;
      ax_q    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (fire_valid) begin
          f_q   <= fire;
          state <= S_RD_POP;
        end
        S_RD_POP: if (mrsp.gnt) state <= S_W_POP;
        S_W_POP: if (mrsp.rvalid) begin
          pop_desc_t pd;
          pd      = pop_desc_t'(mrsp.rdata);
          start_q <= pd.start;
          cnt_q   <= pd.axon_cnt;
          ax_i    <= '0;
          state   <= (pd.axon_cnt == '0) ? S_IDLE : S_RD_AX;
        end
        S_RD_AX: if (mrsp.gnt) state <= S_W_AX;
        S_W_AX: if (mrsp.rvalid) begin
          ax_q  <= axon_t'(mrsp.rdata);
          state <= S_EMIT;
        end
        S_EMIT: if (!hit || ev_ready) begin
          ax_i  <= ax_i + 1'b1;
          state <= last_axon ? S_IDLE : S_RD_AX;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_ev_stable : assert property (@(posedge clk) disable iff (!rst_n)
                                 ev_valid && !ev_ready |=> ev_valid && $stable(ev));

endmodule
