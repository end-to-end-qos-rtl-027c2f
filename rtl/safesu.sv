// SafeSU-style statistics unit (PMU) with contention quotas.
//
// The unit snoops the on-chip bus, the NoC crossbar and the memory-controller
// request monitor and, every cycle, charges each delay to the pair
// (victim i, offender j):
//   bus:    core i requests the bus while core j owns it;
//   NoC:    a request of i waits for a crossbar slave port that a request of
//           j holds (i != j);
//   memory: a request of i is pending while a request of j is served
//           (i != j).
// NoC and memory IDs cover cores and accelerators.
// Each pair has a 32-bit counter, so software can read how much contention
// each initiator causes on each other one. Attribution relies on the
// initiator IDs that the bus (owner index) and the AXI QoS bits carry.
//
// Quotas: each core j can be given a budget of bus-contention cycles it may
// cause. Every cycle the budget drops by the number of cores j is delaying;
// when it reaches zero the core is "exhausted". Exhaustion then has two
// possible consequences, selected by software: an interrupt to a monitoring
// task (irq), or the hardware quota, which drives quota_stall to the bus
// arbiter so that the offending core is stalled. Both options follow the
// paper. The counter layout, the per-cycle pair-wise charging, the quota
// applied to bus contention and the register map below are this design's
// choices; the paper refers to the SafeSU for the details.
//
// Register port (10-bit word addresses, 32-bit data, write on
// reg_valid&reg_write, combinational read data):
//   0x000 CTRL       [0] count enable, [1] hardware-quota enable, [2] irq enable,
//                    [31] write 1: clear all counters (reads 0)
//   0x001 QUOTA_EN   [NC-1:0] cores whose quota is enforced
//   0x002 STATUS     [NC-1:0] exhausted cores (read only)
//   0x008+j          remaining quota of core j (write loads it)
//   0x040+i*NC+j     bus contention caused by core j on core i (read only)
//   0x100+i*NID+j    memory contention caused by ID j on ID i (read only)
//   0x200+i*NID+j    NoC contention caused by ID j on ID i (read only)
module safesu
  import selene_qos_pkg::*;
#(
  parameter int unsigned NC  = 6,   // cores on the bus
  parameter int unsigned NID = 9,   // IDs seen at the memory controller
  parameter int unsigned CW  = 32,  // counter width
  parameter int unsigned NSL = 2    // crossbar slave ports snooped
) (
  input  logic            clk,
  input  logic            rst_n,
  // bus snoop
  input  logic [NC-1:0]   bus_req,
  input  logic            bus_busy,
  input  logic [NC-1:0]   bus_grant,
  // NoC snoop, per crossbar slave port
  input  logic [NSL-1:0]               noc_held,
  input  logic [NSL-1:0][QOS_W-1:0]    noc_holder,
  input  logic [NSL-1:0][2**QOS_W-1:0] noc_waiting,
  // memory-controller snoop
  input  logic [NID-1:0]  mem_pending,
  input  logic [NID-1:0]  mem_serving,
  // register port
  input  logic            reg_valid,
  input  logic            reg_write,
  input  logic [9:0]      reg_addr,
  input  logic [31:0]     reg_wdata,
  output logic [31:0]     reg_rdata,
  // quota outputs
  output logic [NC-1:0]   exhausted,
  output logic [NC-1:0]   quota_stall,
  output logic            irq
);

  localparam logic [9:0] A_CTRL = 10'h000, A_QEN = 10'h001, A_STAT = 10'h002,
                         A_QUOTA = 10'h008, A_BUS = 10'h040, A_MEM = 10'h100,
                         A_NOC = 10'h200;

  typedef struct packed {
    logic irq_en;
    logic hwq_en;
    logic count_en;
  } ctrl_t;

  ctrl_t                    ctrl;
  logic [NC-1:0]            quota_en;
  logic [NC-1:0][CW-1:0]    quota;
  logic [NC-1:0][NC-1:0][CW-1:0]   bus_cnt;
  logic [NID-1:0][NID-1:0][CW-1:0] mem_cnt;
  logic [NID-1:0][NID-1:0][CW-1:0] noc_cnt;

  logic [NC-1:0][NC-1:0]    bus_hit;     // [victim][offender]
  logic [NID-1:0][NID-1:0]  mem_hit;
  logic [NID-1:0][NID-1:0]  noc_hit;
  logic [NC-1:0][$clog2(NC+1)-1:0] victims;
  logic wr, clear;

  assign wr    = reg_valid && reg_write;
  assign clear = wr && reg_addr == A_CTRL && reg_wdata[31];

  always_comb begin
    for (int unsigned i = 0; i < NC; i++)
      for (int unsigned j = 0; j < NC; j++)
        bus_hit[i][j] = bus_busy && bus_req[i] && !bus_grant[i] && bus_grant[j];
    for (int unsigned i = 0; i < NID; i++)
      for (int unsigned j = 0; j < NID; j++)
        mem_hit[i][j] = (i != j) && mem_pending[i] && mem_serving[j];
    for (int unsigned i = 0; i < NID; i++)
      for (int unsigned j = 0; j < NID; j++) begin
        noc_hit[i][j] = 1'b0;
        for (int unsigned s = 0; s < NSL; s++)
          if (i != j && noc_held[s] && 32'(noc_holder[s]) == j && noc_waiting[s][i])
            noc_hit[i][j] = 1'b1;
      end
    for (int unsigned j = 0; j < NC; j++) begin
      victims[j] = '0;
      for (int unsigned i = 0; i < NC; i++)
        victims[j] += $clog2(NC+1)'(bus_hit[i][j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl     <= '0;
      quota_en <= '0;
      quota    <= '0;
      bus_cnt  <= '0;
      mem_cnt  <= '0;
      noc_cnt  <= '0;
    end else begin
      if (wr && reg_addr == A_CTRL) ctrl     <= ctrl_t'(reg_wdata[2:0]);
      if (wr && reg_addr == A_QEN)  quota_en <= reg_wdata[NC-1:0];
      for (int unsigned j = 0; j < NC; j++) begin
        if (wr && reg_addr == A_QUOTA + 10'(j))
          quota[j] <= CW'(reg_wdata);
        else if (ctrl.count_en && quota_en[j])
          quota[j] <= (quota[j] > CW'(victims[j])) ? quota[j] - CW'(victims[j]) : '0;
      end
      if (clear) begin
        bus_cnt <= '0;
        mem_cnt <= '0;
        noc_cnt <= '0;
      end else if (ctrl.count_en) begin
        for (int unsigned i = 0; i < NC; i++)
          for (int unsigned j = 0; j < NC; j++)
            if (bus_hit[i][j]) bus_cnt[i][j] <= bus_cnt[i][j] + 1'b1;
        for (int unsigned i = 0; i < NID; i++)
          for (int unsigned j = 0; j < NID; j++)
            if (mem_hit[i][j]) mem_cnt[i][j] <= mem_cnt[i][j] + 1'b1;
        for (int unsigned i = 0; i < NID; i++)
          for (int unsigned j = 0; j < NID; j++)
            if (noc_hit[i][j]) noc_cnt[i][j] <= noc_cnt[i][j] + 1'b1;
      end
    end
  end

  always_comb begin
    for (int unsigned j = 0; j < NC; j++)
      exhausted[j] = quota_en[j] && quota[j] == '0;
    quota_stall = ctrl.hwq_en ? exhausted : '0;
    irq         = ctrl.irq_en && (exhausted != '0);
  end

  // Read mux.
  always_comb begin
    reg_rdata = '0;
    if (reg_addr == A_CTRL) reg_rdata = 32'(ctrl);
    if (reg_addr == A_QEN)  reg_rdata = 32'(quota_en);
    if (reg_addr == A_STAT) reg_rdata = 32'(exhausted);
    for (int unsigned j = 0; j < NC; j++)
      if (reg_addr == A_QUOTA + 10'(j)) reg_rdata = 32'(quota[j]);
    for (int unsigned i = 0; i < NC; i++)
      for (int unsigned j = 0; j < NC; j++)
        if (reg_addr == A_BUS + 10'(i * NC + j)) reg_rdata = 32'(bus_cnt[i][j]);
    for (int unsigned i = 0; i < NID; i++)
      for (int unsigned j = 0; j < NID; j++)
        if (reg_addr == A_MEM + 10'(i * NID + j)) reg_rdata = 32'(mem_cnt[i][j]);
    for (int unsigned i = 0; i < NID; i++)
      for (int unsigned j = 0; j < NID; j++)
        if (reg_addr == A_NOC + 10'(i * NID + j)) reg_rdata = 32'(noc_cnt[i][j]);
  end

  // The register windows must not overlap.
  initial begin
    assert (NC <= 8 && NC * NC <= 192 && NID * NID <= 256 && NID <= 2**QOS_W)
      else $error("safesu: NC/NID too large for the register map");
  end

endmodule
