// End-to-end QoS subsystem of a six-core RISC-V SoC.
//
// Path of a core's request: the core raises a transfer on the shared on-chip
// bus (ahb_bus, round robin with hardware quota stalls); the bus owner's
// transfer goes through the bridge that stands in for the L2 cache's NoC
// port (ahb2axi_id_bridge), which writes the core's index into the AXI QoS
// bits; the AXI crossbar (axi_xbar) arbitrates it, round robin, against the
// accelerators, which put their own IDs (N_CORES..N_CORES+N_ACC-1) in the QoS
// bits; it then reaches the memory controller port or the peripheral port.
// At the memory controller, two request monitors (reads and writes,
// mc_request_monitor) track per initiator which requests are pending and
// which are served, and turn that into per-ID pending/serving bits. The
// statistics unit (safesu) counts bus and memory contention between every
// pair of IDs and enforces per-core contention quotas, by interrupt or by
// stalling the offending core at the bus arbiter. It also counts NoC
// contention from the crossbar's per-port holder/waiter report.
//
// Parts outside this module: the cores (core_* ports), the accelerators
// (acc_* ports, AXI masters 1..N_ACC of the crossbar), the DRAM controller
// (mem_* ports, crossbar slave 0, selected by address bit 31 = 0) and the
// peripheral bridge (per_* ports, slave 1, address bit 31 = 1). The memory
// controller tells the monitors when it starts serving a request with
// mem_serve_valid / mem_serve_write / mem_serve_init (initiator = upper half
// of the request's AXI ID). The controller is held back (mem_valid low) while
// the monitor FIFO of the request's initiator is full.
//
// The statistics unit is a slave of the on-chip bus, as in the paper's SoC
// figure: a core (the monitoring task) programs quotas and reads counters
// with ordinary bus transfers to the 4 KiB window at PMU_BASE (register n at
// PMU_BASE + 4*n, see safesu); these accesses complete in the cycle they are
// presented and never reach the NoC.
//
// The structure (bus, PMU with quota line to the bus controller, ID
// injection before the NoC, crossbar, request monitor in the memory
// controller) follows the paper's figures; the L2 cache is not modelled.
module selene_qos_top
  import selene_qos_pkg::*;
#(
  parameter int unsigned N_CORES  = 6,
  parameter int unsigned N_ACC    = 3,
  parameter int unsigned MC_DEPTH = 8,
  parameter logic [ADDR_W-1:0] PMU_BASE = 32'hFFFF_F000,  // 4 KiB bus window of the statistics unit
  localparam int unsigned NM  = 1 + N_ACC,       // crossbar masters
  localparam int unsigned NS  = 2,               // crossbar slaves
  localparam int unsigned NID = N_CORES + N_ACC, // IDs in the QoS bits
  localparam int unsigned IW  = $clog2(NM)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // cores
  input  logic     [N_CORES-1:0]  core_valid,
  input  bus_req_t [N_CORES-1:0]  core_req,
  output logic     [N_CORES-1:0]  core_done,
  output logic [DATA_W-1:0]       core_rdata,
  // accelerators (AXI masters)
  input  logic     [N_ACC-1:0]    acc_valid,
  input  axi_req_t [N_ACC-1:0]    acc_req,
  output logic     [N_ACC-1:0]    acc_ready,
  output logic     [N_ACC-1:0]    acc_rsp_valid,
  output axi_rsp_t [N_ACC-1:0]    acc_rsp,
  input  logic     [N_ACC-1:0]    acc_rsp_ready,
  // memory controller (AXI slave)
  output logic                    mem_valid,
  output axi_req_t                mem_req,
  input  logic                    mem_ready,
  input  logic                    mem_rsp_valid,
  input  axi_rsp_t                mem_rsp,
  output logic                    mem_rsp_ready,
  input  logic                    mem_serve_valid,
  input  logic                    mem_serve_write,
  input  logic [IW-1:0]           mem_serve_init,
  // peripherals (AXI slave)
  output logic                    per_valid,
  output axi_req_t                per_req,
  input  logic                    per_ready,
  input  logic                    per_rsp_valid,
  input  axi_rsp_t                per_rsp,
  output logic                    per_rsp_ready,
  // statistics unit interrupt
  output logic                    irq,
  // observation
  output logic [N_CORES-1:0]      quota_stall,
  output logic [N_CORES-1:0]      bus_grant,
  output logic                    bus_quota_skip,
  output logic [NS-1:0]           noc_conflict,
  output logic [NID-1:0]          mem_pending,
  output logic [NID-1:0]          mem_serving,
  output logic                    mc_backpressure
);

  // ---------------- on-chip bus ----------------
  logic                       bus_busy, s_valid, s_done;
  bus_req_t                   s_req;
  logic [$clog2(N_CORES)-1:0] s_master;
  logic [DATA_W-1:0]          s_rdata;

  ahb_bus #(.N(N_CORES)) u_bus (
    .clk, .rst_n,
    .m_valid  (core_valid),
    .m_req    (core_req),
    .m_done   (core_done),
    .m_rdata  (core_rdata),
    .stall    (quota_stall),
    .s_valid, .s_req, .s_master, .s_done, .s_rdata,
    .busy     (bus_busy),
    .grant    (bus_grant),
    .quota_skip (bus_quota_skip)
  );

  // ---------------- bus slaves: statistics-unit window or the NoC ----------------
  // A transfer inside the PMU window is a register access answered in the
  // same cycle (zero wait states); all others go to the bridge.
  logic              pmu_sel, b_valid, b_done, reg_valid, reg_write;
  logic [DATA_W-1:0] b_rdata;
  logic [9:0]        reg_addr;
  logic [31:0]       reg_wdata, reg_rdata;

  always_comb begin
    pmu_sel   = s_req.addr[ADDR_W-1:12] == PMU_BASE[ADDR_W-1:12];
    b_valid   = s_valid && !pmu_sel;
    reg_valid = s_valid && pmu_sel;
    reg_write = s_req.write;
    reg_addr  = s_req.addr[11:2];           // 32-bit registers at a 4-byte stride
    reg_wdata = s_req.wdata[31:0];
    s_done    = pmu_sel ? s_valid : b_done;
    s_rdata   = pmu_sel ? DATA_W'(reg_rdata) : b_rdata;
  end

  // ---------------- ID injection towards the NoC ----------------
  logic     [NM-1:0] x_valid, x_ready, x_rsp_valid, x_rsp_ready;
  axi_req_t [NM-1:0] x_req;
  axi_rsp_t [NM-1:0] x_rsp;

  ahb2axi_id_bridge #(.N(N_CORES)) u_bridge (
    .clk, .rst_n,
    .s_valid (b_valid), .s_req, .s_master, .s_done (b_done), .s_rdata (b_rdata),
    .m_valid     (x_valid[0]),
    .m_req       (x_req[0]),
    .m_ready     (x_ready[0]),
    .m_rsp_valid (x_rsp_valid[0]),
    .m_rsp       (x_rsp[0]),
    .m_rsp_ready (x_rsp_ready[0])
  );

  always_comb begin
    for (int unsigned a = 0; a < N_ACC; a++) begin
      x_valid[a+1]     = acc_valid[a];
      x_req[a+1]       = acc_req[a];
      x_rsp_ready[a+1] = acc_rsp_ready[a];
      acc_ready[a]     = x_ready[a+1];
      acc_rsp_valid[a] = x_rsp_valid[a+1];
      acc_rsp[a]       = x_rsp[a+1];
    end
  end

  // ---------------- NoC crossbar ----------------
  logic     [NS-1:0] y_valid, y_ready, y_rsp_valid, y_rsp_ready;
  axi_req_t [NS-1:0] y_req;
  axi_rsp_t [NS-1:0] y_rsp;
  logic     [NS-1:0]               port_held;
  logic     [NS-1:0][QOS_W-1:0]    port_holder;
  logic     [NS-1:0][2**QOS_W-1:0] port_waiting;

  axi_xbar #(.NM(NM), .NS(NS)) u_xbar (
    .clk, .rst_n,
    .m_valid (x_valid), .m_req (x_req), .m_ready (x_ready),
    .m_rsp_valid (x_rsp_valid), .m_rsp (x_rsp), .m_rsp_ready (x_rsp_ready),
    .s_valid (y_valid), .s_req (y_req), .s_ready (y_ready),
    .s_rsp_valid (y_rsp_valid), .s_rsp (y_rsp), .s_rsp_ready (y_rsp_ready),
    .slave_conflict (noc_conflict),
    .port_held, .port_holder, .port_waiting
  );

  // ---------------- memory controller port and request monitors ----------------
  logic [NM-1:0]  rd_full, wr_full;
  logic [NID-1:0] rd_pending, rd_serving, wr_pending, wr_serving;
  logic [IW-1:0]  req_init, rsp_init;
  logic           mon_full, acc_mem, ret_mem;

  assign req_init        = y_req[0].id[MID_W +: IW];
  assign rsp_init        = mem_rsp.id[MID_W +: IW];
  assign mon_full        = y_req[0].write ? wr_full[req_init] : rd_full[req_init];
  assign mem_valid       = y_valid[0] && !mon_full;
  assign mem_req         = y_req[0];
  assign y_ready[0]      = mem_ready && !mon_full;
  assign mc_backpressure = y_valid[0] && mon_full;
  assign y_rsp_valid[0]  = mem_rsp_valid;
  assign y_rsp[0]        = mem_rsp;
  assign mem_rsp_ready   = y_rsp_ready[0];
  assign acc_mem         = mem_valid && mem_ready;
  assign ret_mem         = mem_rsp_valid && mem_rsp_ready;

  mc_request_monitor #(.NI(NM), .NC(NID), .DEPTH(MC_DEPTH)) u_mon_rd (
    .clk, .rst_n,
    .push_valid  (acc_mem && !mem_req.write),
    .push_init   (req_init),
    .push_core   (mem_req.qos),
    .serve_valid (mem_serve_valid && !mem_serve_write),
    .serve_init  (mem_serve_init),
    .pop_valid   (ret_mem && !mem_rsp.write),
    .pop_init    (rsp_init),
    .full        (rd_full),
    .numpending  (),
    .pending     (rd_pending),
    .serving     (rd_serving),
    .overflow    ()
  );

  mc_request_monitor #(.NI(NM), .NC(NID), .DEPTH(MC_DEPTH)) u_mon_wr (
    .clk, .rst_n,
    .push_valid  (acc_mem && mem_req.write),
    .push_init   (req_init),
    .push_core   (mem_req.qos),
    .serve_valid (mem_serve_valid && mem_serve_write),
    .serve_init  (mem_serve_init),
    .pop_valid   (ret_mem && mem_rsp.write),
    .pop_init    (rsp_init),
    .full        (wr_full),
    .numpending  (),
    .pending     (wr_pending),
    .serving     (wr_serving),
    .overflow    ()
  );

  assign mem_pending = rd_pending | wr_pending;
  assign mem_serving = rd_serving | wr_serving;

  // ---------------- peripheral port ----------------
  assign per_valid      = y_valid[1];
  assign per_req        = y_req[1];
  assign y_ready[1]     = per_ready;
  assign y_rsp_valid[1] = per_rsp_valid;
  assign y_rsp[1]       = per_rsp;
  assign per_rsp_ready  = y_rsp_ready[1];

  // ---------------- statistics unit ----------------
  safesu #(.NC(N_CORES), .NID(NID), .NSL(NS)) u_pmu (
    .clk, .rst_n,
    .bus_req     (core_valid),
    .bus_busy    (bus_busy),
    .bus_grant   (bus_grant),
    .noc_held    (port_held),
    .noc_holder  (port_holder),
    .noc_waiting (port_waiting),
    .mem_pending (mem_pending),
    .mem_serving (mem_serving),
    .reg_valid, .reg_write, .reg_addr, .reg_wdata, .reg_rdata,
    .exhausted   (),
    .quota_stall (quota_stall),
    .irq         (irq)
  );

endmodule
