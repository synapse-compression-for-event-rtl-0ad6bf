// Neuron-update unit: applies one weighted synapse to one neuron state.
//
// The PSL hands over (state word address, lane, weight w, event value v, neuron
// type). The unit reads the 64-bit word holding four 16-bit states, changes the
// selected lane and writes the word back:
//     NT_ACCUMULATE: s = sat16(s + w*v)    (convolution, average pooling, dense layers)
//     NT_MAX:        s = max(s, w*v)       (max pooling: same connectivity, weight 1)
//     NT_ACC_FP16:   s = fp16(s + w*v)     (half-precision state, see fp16_acc)
// The paper leaves update_neuron to the neuron model and only states that the
// accumulation is a multiply-add and that max pooling differs only in this routine.
// It stores states as 16-bit floats and weights in adaptive float. This design keeps
// 16-bit states either as half-precision floats (NT_ACC_FP16, the paper's format) or
// as signed integers with saturation (NT_ACCUMULATE, NT_MAX). Weights and event
// values are 8-bit signed integers, and the neuron-type code selecting the format is
// this design's own. One synapse is handled at a time, so two synapses on the same
// word never overlap.
//
// Interface: syn_valid/syn_ready/syn, shared memory port, stat_sat pulses when an
// accumulation saturated (integer) or overflowed to infinity (half precision). Timing: accept, read request, read data, write request:
// one synapse every 4 cycles without memory contention.
module neuron_update
  import scp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     syn_valid,
  output logic     syn_ready,
  input  syn_t     syn,
  output mem_req_t mreq,
  input  mem_rsp_t mrsp,
  output logic     stat_sat,
  output logic     busy
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_WAIT, S_WR} state_e;
  state_e state;

  syn_t              s_q;
  logic [WORD_W-1:0] word_q;
  logic              sat_q;

  logic signed [ST_W-1:0]  old_s, new_s, prod;
  logic signed [ST_W:0]    sum;
  logic                    sat;
  logic [ST_W-1:0]         fp_r;
  logic                    fp_ovf;

  fp16_acc u_fp16 (.s(old_s), .p(prod), .r(fp_r), .overflow(fp_ovf));

  always_comb begin
    old_s = mrsp.rdata[ST_W*s_q.lane +: ST_W];
    prod  = ST_W'(s_q.w * s_q.v);            // |w*v| <= 2^14 fits 16 bits
    sum   = (ST_W+1)'(old_s) + (ST_W+1)'(prod);
    sat   = 1'b0;
    if (s_q.ntype == NT_ACC_FP16) begin
      new_s = fp_r;
      sat   = fp_ovf;
    end else if (s_q.ntype == NT_MAX) begin
      new_s = (prod > old_s) ? prod : old_s;
    end else if (sum > (ST_W+1)'(32767)) begin
      new_s = 16'sh7fff;
      sat   = 1'b1;
    end else if (sum < -(ST_W+1)'(32768)) begin
      new_s = 16'sh8000;
      sat   = 1'b1;
    end else begin
      new_s = sum[ST_W-1:0];
    end
  end

  assign syn_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);
  assign stat_sat  = (state == S_WR) && mrsp.gnt && sat_q;

  always_comb begin
    mreq       = '0;
    mreq.req   = (state == S_RD) || (state == S_WR);
    mreq.we    = (state == S_WR);
    mreq.addr  = s_q.addr;
    mreq.wdata = word_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      s_q    <= '0;
      word_q <= '0;
      sat_q  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (syn_valid) begin
          s_q   <= syn;
          state <= S_RD;
        end
        S_RD: if (mrsp.gnt) state <= S_WAIT;
        S_WAIT: if (mrsp.rvalid) begin
          word_q                    <= mrsp.rdata;
          word_q[ST_W*s_q.lane +: ST_W] <= new_s;
          sat_q                     <= sat;
          state                     <= S_WR;
        end
        S_WR: if (mrsp.gnt) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
