// Pattern/synapse lookup (PSL), the event decoder at the destination core.
//
// An event (ID_p, x_min, y_min, c_src, v) names the top-left anchor of the
// XY-transposed kernel in the destination population. The PSL reads the population
// descriptor selected by ID_p (shape W, H, D, neuron type, state block) and the
// kernel descriptor selected by ID_p and c_src (kd_base + c_src: KW, KH, KD, SL,
// weight pointer), and then runs the paper's strided PSL loop:
//     for dx in [0, KW):  x = x_min + dx; skip column if x outside [0, W) or (SL and x odd)
//       for dy in [0, KH): y = y_min + dy; skip if y outside [0, H) or (SL and y odd)
//         (x, y) >>= SL
//         for c in [0, D): update_neuron(P[c, x, y], W[c, dx, dy], v)
// Iteration is channel-first, so at most KW*KH positions are ever skipped. W and H in
// the descriptor are the true sizes shifted left by SL, which undoes the stride
// downsampling exactly as in the paper.
//
// Memory layout (own choice where the paper is silent): weights of one c_src are
// stored from wptr on, 8 signed 8-bit weights per word, byte 0 in bits 7:0, at linear
// index (dx*KH + dy)*KD + c. Neuron states are 16-bit, 4 per word, at state index
// ((y*Wt) + x)*D + c from word start + axon_cnt on (axons and states form one block).
// The loop runs over the population depth D; KD is used as the weight stride and is
// expected to equal D.
//
// Interface: event in (valid/ready), shared memory port, synapse out (valid/ready)
// to the neuron-update unit, one-cycle statistics pulses.
// Timing (immediate grants, synapse sink always ready): 4 cycles for the two
// descriptor reads, 1 cycle per visited or skipped kernel position (a whole skipped
// column also costs 1 cycle), 1 cycle per synapse, and 3 more cycles whenever a new
// weight word is fetched (at most every 8 weights). A fully inside 3x3 kernel on a
// depth-1 population therefore takes 4 + 9*2 + 2*3 = 28 cycles.
module psl
  import scp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     ev_valid,
  output logic     ev_ready,
  input  event_t   ev,
  output mem_req_t mreq,
  input  mem_rsp_t mrsp,
  output logic     syn_valid,
  input  logic     syn_ready,
  output syn_t     syn,
  output logic     stat_syn,       // synapse handed on
  output logic     stat_skip_edge, // column or position outside the population
  output logic     stat_skip_str,  // position removed by stride downsampling
  output logic     busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_RD_POP, S_W_POP, S_RD_KD, S_W_KD, S_POS, S_SYN, S_RD_W, S_W_W
  } state_e;
  state_e state;

  localparam int unsigned WI_W = 20;   // weight index: 16*16*1024 = 2^18
  localparam int unsigned NI_W = 28;   // neuron index: 255*255*1023 < 2^26

  event_t             e_q;
  pop_desc_t          pd_q;
  kdesc_t             kd_q;
  logic [K_W-1:0]     dx, dy;
  logic [CH_W-1:0]    c;
  logic [WI_W-1:0]    col_base, pos_base, col_stride;
  logic [NI_W-1:0]    n0;
  logic [ADDR_W-1:0]  wc_addr;
  logic               wc_valid;
  logic [WORD_W-1:0]  wc_data;

  // current position
  logic signed [EXY_W:0] x, y;
  logic                  x_in, y_in, x_str, y_str;
  logic [XY_W-1:0]       xd, yd, wt;
  logic [NI_W-1:0]       n_pos;

  always_comb begin
    x     = (EXY_W+1)'(e_q.xmin) + signed'((EXY_W+1)'(dx));
    y     = (EXY_W+1)'(e_q.ymin) + signed'((EXY_W+1)'(dy));
    x_in  = (x >= 0) && (x < signed'((EXY_W+1)'(pd_q.w)));
    y_in  = (y >= 0) && (y < signed'((EXY_W+1)'(pd_q.h)));
    x_str = kd_q.sl & x[0];               // x mod 2^SL != 0 for a 1-bit SL
    y_str = kd_q.sl & y[0];
    xd    = XY_W'(x >> kd_q.sl);          // XY downsampling
    yd    = XY_W'(y >> kd_q.sl);
    wt    = pd_q.w >> kd_q.sl;            // true width
    n_pos = (NI_W'(yd) * NI_W'(wt) + NI_W'(xd)) * NI_W'(pd_q.d);
  end

  wire x_ok = x_in && !x_str;
  wire y_ok = y_in && !y_str;

  // current synapse
  logic [WI_W-1:0]   widx;
  logic [ADDR_W-1:0] w_addr;
  logic [NI_W-1:0]   n_syn;
  always_comb begin
    widx   = pos_base + WI_W'(c);
    w_addr = kd_q.wptr + ADDR_W'(widx >> 3);
    n_syn  = n0 + NI_W'(c);
  end
  wire w_hit = wc_valid && (wc_addr == w_addr);

  always_comb begin
    syn.addr  = pd_q.start + ADDR_W'(pd_q.axon_cnt) + ADDR_W'(n_syn >> 2);
    syn.lane  = n_syn[1:0];
    syn.w     = wc_data[8*widx[2:0] +: 8];
    syn.v     = e_q.v;
    syn.ntype = pd_q.ntype;
  end

  assign ev_ready       = (state == S_IDLE);
  assign syn_valid      = (state == S_SYN) && w_hit;
  assign stat_syn       = syn_valid && syn_ready;
  assign stat_skip_edge = (state == S_POS) && (!x_in || (!x_str && !y_in));
  assign stat_skip_str  = (state == S_POS) && x_in && (x_str || (y_in && y_str));
  assign busy           = (state != S_IDLE);

  always_comb begin
    mreq     = '0;
    mreq.req = (state == S_RD_POP) || (state == S_RD_KD) || (state == S_RD_W);
    unique case (state)
      S_RD_POP: mreq.addr = POP_TABLE_BASE + ADDR_W'(e_q.idp);
      S_RD_KD:  mreq.addr = pd_q.kd_base + ADDR_W'(e_q.csrc);
      default:  mreq.addr = w_addr;
    endcase
  end

  wire last_dx = (dx == kd_q.kw_m1);
  wire last_dy = (dy == kd_q.kh_m1);
  wire last_c  = (c == pd_q.d - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      e_q        <= '0;
      pd_q       <= '0;
      kd_q       <= '0;
      dx         <= '0;
      dy         <= '0;
      c          <= '0;
      col_base   <= '0;
      pos_base   <= '0;
      col_stride <= '0;
      n0         <= '0;
      wc_valid   <= 1'b0;
      wc_addr    <= '0;
      wc_data    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (ev_valid) begin
          e_q      <= ev;
          wc_valid <= 1'b0;
          state    <= S_RD_POP;
        end
        S_RD_POP: if (mrsp.gnt) state <= S_W_POP;
        S_W_POP: if (mrsp.rvalid) begin
          pd_q  <= pop_desc_t'(mrsp.rdata);
          state <= S_RD_KD;
        end
        S_RD_KD: if (mrsp.gnt) state <= S_W_KD;
        S_W_KD: if (mrsp.rvalid) begin
          kdesc_t k;
          k          = kdesc_t'(mrsp.rdata);
          kd_q       <= k;
          col_stride <= (WI_W'(k.kh_m1) + WI_W'(1)) * WI_W'(k.kd);
          dx         <= '0;
          dy         <= '0;
          col_base   <= '0;
          pos_base   <= '0;
          state      <= S_POS;
        end
        S_POS: begin
          if (!x_ok) begin
            // whole column out of range or removed by the stride
            dy       <= '0;
            dx       <= dx + 1'b1;
            col_base <= col_base + col_stride;
            pos_base <= col_base + col_stride;
            if (last_dx) state <= S_IDLE;
          end else if (!y_ok) begin
            if (last_dy) begin
              dy       <= '0;
              dx       <= dx + 1'b1;
              col_base <= col_base + col_stride;
              pos_base <= col_base + col_stride;
              if (last_dx) state <= S_IDLE;
            end else begin
              dy       <= dy + 1'b1;
              pos_base <= pos_base + WI_W'(kd_q.kd);
            end
          end else begin
            n0    <= n_pos;
            c     <= '0;
            state <= S_SYN;
          end
        end
        S_SYN: begin
          if (!w_hit) state <= S_RD_W;
          else if (syn_ready) begin
            if (!last_c) c <= c + 1'b1;
            else begin
              state <= S_POS;
              if (last_dy) begin
                dy       <= '0;
                dx       <= dx + 1'b1;
                col_base <= col_base + col_stride;
                pos_base <= col_base + col_stride;
                if (last_dx) state <= S_IDLE;
              end else begin
                dy       <= dy + 1'b1;
                pos_base <= pos_base + WI_W'(kd_q.kd);
              end
            end
          end
        end
        S_RD_W: if (mrsp.gnt) state <= S_W_W;
        S_W_W: if (mrsp.rvalid) begin
          wc_data  <= mrsp.rdata;
          wc_addr  <= w_addr;
          wc_valid <= 1'b1;
          state    <= S_SYN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_syn_stable : assert property (@(posedge clk) disable iff (!rst_n)
                                  syn_valid && !syn_ready |=> syn_valid && $stable(syn));

endmodule
