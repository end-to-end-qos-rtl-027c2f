// On-chip shared bus between the cores and the L2/NoC path.
//
// The bus is modelled as a single-transfer, non-pipelined AHB: a core holds
// m_valid[i] with its transfer (address, write flag, write data) until it
// sees m_done[i]; the granted core's transfer is passed to the single slave
// port (s_valid/s_req) together with the index of the owning core (s_master,
// the AHB HMASTER), and the slave answers with a one-cycle s_done carrying
// s_rdata. A transfer therefore occupies the bus from grant to s_done, so
// occupancy depends on how long the slave takes, not on the transfer count,
// which is what makes contention a matter of cycles rather than transactions.
//
// Arbitration is round robin with hardware quota stalls (ahb_qos_arbiter).
// The busy/grant/owner signals are exported so the statistics unit can snoop
// bus activity. The paper fixes the round-robin policy and the quota stall;
// the reduced handshake is this design's.
module ahb_bus
  import selene_qos_pkg::*;
#(
  parameter int unsigned N = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // core (master) side
  input  logic     [N-1:0]     m_valid,
  input  bus_req_t [N-1:0]     m_req,
  output logic     [N-1:0]     m_done,
  output logic [DATA_W-1:0]    m_rdata,
  // quota stall from the statistics unit
  input  logic     [N-1:0]     stall,
  // slave side
  output logic                 s_valid,
  output bus_req_t             s_req,
  output logic [$clog2(N)-1:0] s_master,
  input  logic                 s_done,
  input  logic [DATA_W-1:0]    s_rdata,
  // snoop outputs
  output logic                 busy,
  output logic     [N-1:0]     grant,
  output logic                 quota_skip
);

  logic [$clog2(N)-1:0] owner;

  ahb_qos_arbiter #(.N(N)) u_arb (
    .clk, .rst_n,
    .req       (m_valid),
    .stall,
    .done      (s_done),
    .busy,
    .grant,
    .owner,
    .quota_skip
  );

  assign s_valid  = busy;
  assign s_req    = m_req[owner];
  assign s_master = owner;
  assign m_done   = grant & {N{s_done}};
  assign m_rdata  = s_rdata;

  // The owner must keep its request up until its transfer is done.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (m_valid & grant) == grant);

endmodule
