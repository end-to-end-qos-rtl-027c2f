// Bus-to-AXI bridge that tags every request with the initiating core's ID.
//
// Requests of all cores reach the NoC over one AXI link, so the NoC cannot
// tell them apart by port. This bridge, standing where the shared L2 cache
// forwards its traffic to the NoC, writes the index of the bus owner
// (s_master, the AHB HMASTER) into the AXI QoS bits of each request it
// forwards. Downstream units (crossbar, memory-controller request monitor,
// statistics unit) read the owner from those bits. The ID injection follows
// the paper; the L2 cache itself is not modelled, every bus transfer is
// forwarded as one single-beat AXI transfer.
//
// Timing: in ISSUE the AXI request is valid as soon as the bus presents a
// transfer (s_valid) and stays valid until m_ready; the bridge then waits in
// RESP for the response, which it accepts at once (m_rsp_ready) and returns
// combinationally to the bus as a one-cycle s_done with s_rdata. One
// transfer is outstanding at a time. The AXI ID is the constant AXI_ID.
module ahb2axi_id_bridge
  import selene_qos_pkg::*;
#(
  parameter int unsigned N      = 6,
  parameter logic [MID_W-1:0] AXI_ID = '0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // bus slave side
  input  logic                 s_valid,
  input  bus_req_t             s_req,
  input  logic [$clog2(N)-1:0] s_master,
  output logic                 s_done,
  output logic [DATA_W-1:0]    s_rdata,
  // AXI master side
  output logic                 m_valid,
  output axi_req_t             m_req,
  input  logic                 m_ready,
  input  logic                 m_rsp_valid,
  input  axi_rsp_t             m_rsp,
  output logic                 m_rsp_ready
);

  typedef enum logic {ISSUE, RESP} state_e;
  state_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= ISSUE;
    else unique case (state)
      ISSUE: if (s_valid && m_ready) state <= RESP;
      RESP:  if (m_rsp_valid)        state <= ISSUE;
    endcase
  end

  always_comb begin
    m_valid     = (state == ISSUE) && s_valid;
    m_req.addr  = s_req.addr;
    m_req.write = s_req.write;
    m_req.wdata = s_req.wdata;
    m_req.id    = ID_W'(AXI_ID);
    m_req.qos   = QOS_W'(s_master);      // initiator (core) ID injection
    m_rsp_ready = (state == RESP);
    s_done      = (state == RESP) && m_rsp_valid;
    s_rdata     = m_rsp.rdata;
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_req));

endmodule
