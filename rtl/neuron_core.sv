// One event-based neuron core with axon-based synapse compression.
//
// The core connects the two halves of the scheme around a unified memory:
//   source side:      firing neuron -> SCU -> events, one per hitting axon
//   destination side: event queue -> PSL -> weighted synapses -> neuron update
// Events the SCU addresses to relative core 0 (this core) are put straight into the
// local event queue; all others leave through the network output. Events arriving
// from the network enter the same queue. The local loopback wins when both arrive in
// the same cycle. All four users of the memory (neuron update, PSL, SCU, host/loader
// port, in that priority) share its single port through a fixed-priority arbiter.
//
// What the paper gives: the SCU and PSL algorithms, the descriptor fields and widths,
// the 256 kB unified memory with 64-bit words, the event queue and the local
// injection of events. This design's own choices: the valid/ready handshakes, the
// loader port, the arbitration order and the queue depth. The network, the neuron
// activation (which neurons fire, and when) and the host are outside the core, so
// the firing-neuron input, the network ports and the loader port are top-level
// ports.
//
// Interface: fire_* (firing neuron), noc_in_* / noc_out_* (events), host_req /
// host_rsp (memory access, one request per grant, read data one cycle after grant),
// idle (no unit busy and queue empty), stat_* one-cycle pulses for monitoring.
module neuron_core
  import scp_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned MEM_DEPTH  = 32768
) (
  input  logic     clk,
  input  logic     rst_n,
  // firing neurons of this core's populations
  input  logic     fire_valid,
  output logic     fire_ready,
  input  fire_t    fire,
  // network side
  input  logic     noc_in_valid,
  output logic     noc_in_ready,
  input  event_t   noc_in,
  output logic     noc_out_valid,
  input  logic     noc_out_ready,
  output event_t   noc_out,
  // loader / host access to the unified memory
  input  mem_req_t host_req,
  output mem_rsp_t host_rsp,
  // status
  output logic     idle,
  output logic     stat_loopback,
  output logic     stat_noc_in,
  output logic     stat_noc_out,
  output logic     stat_filtered,
  output logic     stat_syn,
  output logic     stat_skip_edge,
  output logic     stat_skip_str,
  output logic     stat_sat,
  output logic     stat_queue_full
);

  localparam int unsigned CNT_W = $clog2(FIFO_DEPTH + 1);

  // ---------------- SCU ----------------
  logic     scu_ev_valid, scu_ev_ready, scu_busy;
  event_t   scu_ev;
  mem_req_t req [4];
  mem_rsp_t rsp [4];

  scu u_scu (
    .clk, .rst_n,
    .fire_valid, .fire_ready, .fire,
    .mreq(req[2]), .mrsp(rsp[2]),
    .ev_valid(scu_ev_valid), .ev_ready(scu_ev_ready), .ev(scu_ev),
    .stat_filtered, .stat_emitted(), .busy(scu_busy)
  );

  // ---------------- event routing ----------------
  logic   q_in_valid, q_in_ready, q_out_valid, q_out_ready;
  event_t q_in, q_out;
  logic [CNT_W-1:0] q_count;

  wire scu_local = (scu_ev.ad == '0);

  always_comb begin
    noc_out       = scu_ev;
    noc_out_valid = scu_ev_valid && !scu_local;
    if (scu_ev_valid && scu_local) begin
      q_in_valid   = 1'b1;
      q_in         = scu_ev;
      noc_in_ready = 1'b0;
    end else begin
      q_in_valid   = noc_in_valid;
      q_in         = noc_in;
      noc_in_ready = q_in_ready;
    end
    scu_ev_ready = scu_local ? q_in_ready : noc_out_ready;
  end

  assign stat_loopback   = scu_ev_valid && scu_local && q_in_ready;
  assign stat_noc_in     = noc_in_valid && noc_in_ready;
  assign stat_noc_out    = noc_out_valid && noc_out_ready;
  assign stat_queue_full = q_in_valid && !q_in_ready;

  event_fifo #(.DEPTH(FIFO_DEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid(q_in_valid), .in_ready(q_in_ready), .in_data(q_in),
    .out_valid(q_out_valid), .out_ready(q_out_ready), .out_data(q_out),
    .count(q_count)
  );

  // ---------------- PSL ----------------
  logic psl_busy, syn_valid, syn_ready;
  syn_t syn;

  psl u_psl (
    .clk, .rst_n,
    .ev_valid(q_out_valid), .ev_ready(q_out_ready), .ev(q_out),
    .mreq(req[1]), .mrsp(rsp[1]),
    .syn_valid, .syn_ready, .syn,
    .stat_syn, .stat_skip_edge, .stat_skip_str, .busy(psl_busy)
  );

  // ---------------- neuron update ----------------
  logic nu_busy;

  neuron_update u_nu (
    .clk, .rst_n,
    .syn_valid, .syn_ready, .syn,
    .mreq(req[0]), .mrsp(rsp[0]),
    .stat_sat, .busy(nu_busy)
  );

  // ---------------- unified memory ----------------
  assign req[3]   = host_req;
  assign host_rsp = rsp[3];

  logic              mem_en, mem_we;
  logic [ADDR_W-1:0] mem_addr;
  logic [WORD_W-1:0] mem_wdata, mem_rdata;

  mem_arbiter #(.N(4)) u_arb (
    .clk, .rst_n, .req, .rsp,
    .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata
  );

  core_mem #(.WORDS(MEM_DEPTH), .WIDTH(WORD_W), .ADDR_W(ADDR_W)) u_mem (
    .clk, .en(mem_en), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata), .rdata(mem_rdata)
  );

  assign idle = !scu_busy && !psl_busy && !nu_busy && (q_count == '0) && !fire_valid;

  // An event offered to the network is held until it is taken.
  a_noc_out_stable : assert property (@(posedge clk) disable iff (!rst_n)
                                      noc_out_valid && !noc_out_ready |=> noc_out_valid && $stable(noc_out));

endmodule
