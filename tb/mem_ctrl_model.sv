// Behavioural model of the DRAM controller behind the NoC (testbench only).
//
// Accepts reduced-AXI requests (random ready, at most QMAX queued), keeps
// them in one FIFO in arrival order and serves them one at a time: it
// announces the start of service of the oldest request with a one-cycle
// serve_valid (with the request's initiator, the upper half of its AXI ID,
// and its write flag), keeps it in service for LAT_MIN..LAT_MAX cycles and
// then returns the response, holding it until rsp_ready. Memory contents live
// in an associative array; unwritten words read as zero. For the checks of
// the testbench it also exports, per owner ID (the QoS bits), which
// requests are queued and which one is in service.
module mem_ctrl_model
  import selene_qos_pkg::*;
#(
  parameter int NID = 9,
  parameter int IW = 2,
  parameter int QMAX = 32,
  parameter int LAT_MIN = 3,
  parameter int LAT_MAX = 12
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  input  axi_req_t       req,
  output logic           req_ready,
  output logic           rsp_valid,
  output axi_rsp_t       rsp,
  input  logic           rsp_ready,
  output logic           serve_valid,
  output logic           serve_write,
  output logic [IW-1:0]  serve_init,
  output logic [NID-1:0] exp_pending,
  output logic [NID-1:0] exp_serving,
  output int             accepted
);
  axi_req_t q[$];
  logic [DATA_W-1:0] mem [logic [ADDR_W-1:0]];
  logic in_service;
  int   cnt;

  always_comb begin
    serve_valid = rst_n && !in_service && q.size() > 0;
    serve_write = (q.size() > 0) ? q[0].write : 1'b0;
    serve_init  = (q.size() > 0) ? q[0].id[MID_W +: IW] : '0;
    exp_pending = '0;
    exp_serving = '0;
    foreach (q[k]) begin
      if (k == 0 && in_service) exp_serving[q[k].qos] = 1'b1;
      else exp_pending[q[k].qos] = 1'b1;
    end
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 0; rsp_valid <= 0; in_service <= 0; cnt <= 0; accepted <= 0;
    end else begin
      if (req_valid && req_ready) begin
        q.push_back(req);
        accepted <= accepted + 1;
      end
      req_ready <= (q.size() < QMAX) && ($urandom_range(0, 3) != 0);
      if (serve_valid) begin
        in_service <= 1;
        cnt <= $urandom_range(LAT_MIN, LAT_MAX);
      end else if (in_service && !rsp_valid) begin
        if (cnt == 0) begin
          rsp_valid <= 1;
          rsp.id    <= q[0].id;
          rsp.write <= q[0].write;
          if (q[0].write) begin
            mem[q[0].addr] = q[0].wdata;
            rsp.rdata <= '0;
          end else
            rsp.rdata <= mem.exists(q[0].addr) ? mem[q[0].addr] : '0;
        end else cnt <= cnt - 1;
      end else if (rsp_valid && rsp_ready) begin
        rsp_valid  <= 0;
        in_service <= 0;
        void'(q.pop_front());
      end
    end
  end
endmodule
