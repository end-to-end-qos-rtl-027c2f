// AXI crossbar of the network-on-chip.
//
// NM masters (the L2/bridge port and the accelerators) reach NS slaves (the
// memory controller, the peripherals) through a full crossbar. Each slave
// port has its own round-robin arbiter among the masters addressing it; each
// master port has a round-robin arbiter among the slaves returning responses
// to it. Round robin is the paper's default NoC policy; the QoS bits, which
// hold the initiator ID, pass through unchanged so that units behind the
// crossbar know the owner of each request.
//
// Decode: the slave is selected by the top $clog2(NS) address bits (this
// design's address map). Request IDs are extended on the way to a slave: the
// upper MID_W bits of the ID carry the master index, which routes the
// response back and tells the memory controller which initiator a request
// came from. Masters use only the lower MID_W ID bits; responses come back
// with the upper bits cleared.
//
// Timing: the path is combinational from master to slave (valid, request) and
// from slave to master (ready). A choice that met a stalled slave is locked
// until the handshake so that the slave sees a stable request. Response
// channels work the same way. slave_conflict[s] is high in any cycle in which
// more than one master requests slave s. For the statistics unit, the
// crossbar also reports per slave port whether a request holds it
// (port_held, i.e. s_valid), the owner ID in that request's QoS bits
// (port_holder) and the owner IDs of the other masters waiting for the port
// (port_waiting, one bit per QoS value).
module axi_xbar
  import selene_qos_pkg::*;
#(
  parameter int unsigned NM = 4,
  parameter int unsigned NS = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // master ports
  input  logic     [NM-1:0]    m_valid,
  input  axi_req_t [NM-1:0]    m_req,
  output logic     [NM-1:0]    m_ready,
  output logic     [NM-1:0]    m_rsp_valid,
  output axi_rsp_t [NM-1:0]    m_rsp,
  input  logic     [NM-1:0]    m_rsp_ready,
  // slave ports
  output logic     [NS-1:0]    s_valid,
  output axi_req_t [NS-1:0]    s_req,
  input  logic     [NS-1:0]    s_ready,
  input  logic     [NS-1:0]    s_rsp_valid,
  input  axi_rsp_t [NS-1:0]    s_rsp,
  output logic     [NS-1:0]    s_rsp_ready,
  output logic     [NS-1:0]    slave_conflict,
  // contention snoop: per slave port, the QoS (owner ID) of the request
  // holding it and the set of owner IDs whose requests wait for it
  output logic     [NS-1:0]              port_held,
  output logic     [NS-1:0][QOS_W-1:0]   port_holder,
  output logic     [NS-1:0][2**QOS_W-1:0] port_waiting
);

  localparam int unsigned SW = $clog2(NS);
  localparam int unsigned MW = $clog2(NM);

  // ---------------- request path ----------------
  logic [NS-1:0][NM-1:0] cand;
  logic [NS-1:0][MW-1:0] gsel, last_m, lock_m;
  logic [NS-1:0]         lock_s;

  always_comb begin
    for (int unsigned s = 0; s < NS; s++) begin
      for (int unsigned m = 0; m < NM; m++)
        cand[s][m] = m_valid[m] && (m_req[m].addr[ADDR_W-1 -: SW] == SW'(s));
      slave_conflict[s] = (cand[s] & (cand[s] - 1'b1)) != '0;
      gsel[s]    = lock_s[s] ? lock_m[s] : MW'(rr_pick(16'(cand[s]), 32'(last_m[s]), NM));
      s_valid[s] = lock_s[s] || (cand[s] != '0);
      s_req[s]   = m_req[gsel[s]];
      s_req[s].id = {MID_W'(gsel[s]), m_req[gsel[s]].id[MID_W-1:0]};
    end
  end

  always_comb begin
    for (int unsigned s = 0; s < NS; s++) begin
      port_held[s]    = s_valid[s];
      port_holder[s]  = m_req[gsel[s]].qos;
      port_waiting[s] = '0;
      for (int unsigned m = 0; m < NM; m++)
        if (cand[s][m] && !(s_valid[s] && gsel[s] == MW'(m)))
          port_waiting[s][m_req[m].qos] = 1'b1;
    end
  end

  always_comb begin
    m_ready = '0;
    for (int unsigned s = 0; s < NS; s++)
      if (s_valid[s] && s_ready[s]) m_ready[gsel[s]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_s <= '0;
      lock_m <= '0;
      for (int unsigned s = 0; s < NS; s++) last_m[s] <= MW'(NM - 1);
    end else begin
      for (int unsigned s = 0; s < NS; s++) begin
        if (s_valid[s] && s_ready[s]) begin
          last_m[s] <= gsel[s];
          lock_s[s] <= 1'b0;
        end else if (s_valid[s]) begin
          lock_s[s] <= 1'b1;
          lock_m[s] <= gsel[s];
        end
      end
    end
  end

  // ---------------- response path ----------------
  logic [NM-1:0][NS-1:0] rcand;
  logic [NM-1:0][SW-1:0] rsel, last_s, lock_rs;
  logic [NM-1:0]         rlock;

  always_comb begin
    for (int unsigned m = 0; m < NM; m++) begin
      for (int unsigned s = 0; s < NS; s++)
        rcand[m][s] = s_rsp_valid[s] && (s_rsp[s].id[ID_W-1:MID_W] == MID_W'(m));
      rsel[m]        = rlock[m] ? lock_rs[m] : SW'(rr_pick(16'(rcand[m]), 32'(last_s[m]), NS));
      m_rsp_valid[m] = rlock[m] || (rcand[m] != '0);
      m_rsp[m]       = s_rsp[rsel[m]];
      m_rsp[m].id    = {MID_W'(0), s_rsp[rsel[m]].id[MID_W-1:0]};
    end
  end

  always_comb begin
    s_rsp_ready = '0;
    for (int unsigned m = 0; m < NM; m++)
      if (m_rsp_valid[m] && m_rsp_ready[m]) s_rsp_ready[rsel[m]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rlock   <= '0;
      lock_rs <= '0;
      for (int unsigned m = 0; m < NM; m++) last_s[m] <= SW'(NS - 1);
    end else begin
      for (int unsigned m = 0; m < NM; m++) begin
        if (m_rsp_valid[m] && m_rsp_ready[m]) begin
          last_s[m] <= rsel[m];
          rlock[m]  <= 1'b0;
        end else if (m_rsp_valid[m]) begin
          rlock[m]   <= 1'b1;
          lock_rs[m] <= rsel[m];
        end
      end
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_chk
    a_stable: assert property (@(posedge clk) disable iff (!rst_n)
      s_valid[s] && !s_ready[s] |=> s_valid[s] && $stable(s_req[s]));
  end

endmodule
