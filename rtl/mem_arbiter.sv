// Fixed-priority arbiter that shares the single port of the core memory.
//
// N clients each present a request struct (req, we, addr, wdata) and hold it until
// they see gnt. Client 0 has the highest priority. One request is granted per
// cycle; for a granted read, rvalid and rdata are returned to that client in the next
// cycle. The priority order (neuron update, PSL, SCU, host) is this design's choice;
// the paper only says the memory is unified.
module mem_arbiter
  import scp_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  mem_req_t            req [N],
  output mem_rsp_t            rsp [N],
  // memory side
  output logic                mem_en,
  output logic                mem_we,
  output logic [ADDR_W-1:0]   mem_addr,
  output logic [WORD_W-1:0]   mem_wdata,
  input  logic [WORD_W-1:0]   mem_rdata
);

  logic [N-1:0] grant;
  logic [N-1:0] rd_pending;

  always_comb begin
    grant = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i].req) grant = N'(1) << i;
    end
  end

  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_wdata = '0;
    for (int i = 0; i < N; i++) begin
      if (grant[i]) begin
        mem_en    = 1'b1;
        mem_we    = req[i].we;
        mem_addr  = req[i].addr;
        mem_wdata = req[i].wdata;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_pending <= '0;
    else begin
      for (int i = 0; i < N; i++) rd_pending[i] <= grant[i] && !req[i].we;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      rsp[i].gnt    = grant[i];
      rsp[i].rvalid = rd_pending[i];
      rsp[i].rdata  = mem_rdata;
    end
  end

  // At most one client is granted at a time.
  a_onehot : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));

endmodule
