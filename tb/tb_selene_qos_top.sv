// End-to-end testbench of selene_qos_top at its default size (6 cores,
// 3 accelerators, 8-entry monitor FIFOs).
//
// Traffic: six core models issue single bus transfers, reads and writes,
// to their own memory region (address bits 30:27 = core index) and now and
// then to the peripheral window (bit 31 set). Three accelerator models issue
// up to 12 outstanding AXI requests each to their own regions (IDs 6..8 in
// the QoS bits). A behavioural DRAM controller and a peripheral model answer.
//
// Checks:
//  - every read returns the last value that initiator wrote there (reference
//    memory per initiator, updated at issue time; each initiator's requests
//    are served in order);
//  - every request reaching the memory controller carries in its QoS bits
//    the ID of the initiator whose region it addresses (ID injection);
//  - every cycle, the per-ID pending/serving bits equal those derived from
//    the controller model's own queue;
//  - at the end, the statistics unit's bus and memory contention matrices
//    equal counts kept by the testbench, and its NoC matrix is non-zero but
//    zero between cores (they share one crossbar port);
//  - interrupt mode raises irq and does not stall; hardware-quota mode
//    stalls the offending cores.
// Every mechanism (bus contention, quota interrupt, quota stall, lone
// offender still served, crossbar conflict, monitor backpressure, memory
// contention, peripheral access) is counted and must occur.
module tb_selene_qos_top;
  import selene_qos_pkg::*;
  localparam int NC = 6, NA = 3, NID = NC + NA, IW = 2;
  logic clk = 0, rst_n = 0;

  logic     [NC-1:0] core_valid, core_done;
  bus_req_t [NC-1:0] core_req;
  logic [DATA_W-1:0] core_rdata;
  logic     [NA-1:0] acc_valid, acc_ready, acc_rsp_valid, acc_rsp_ready;
  axi_req_t [NA-1:0] acc_req;
  axi_rsp_t [NA-1:0] acc_rsp;
  logic mem_valid, mem_ready, mem_rsp_valid, mem_rsp_ready, mem_serve_valid, mem_serve_write;
  axi_req_t mem_req; axi_rsp_t mem_rsp;
  logic [IW-1:0] mem_serve_init;
  logic per_valid, per_ready, per_rsp_valid, per_rsp_ready;
  axi_req_t per_req; axi_rsp_t per_rsp;
  localparam logic [31:0] PMU = 32'hFFFF_F000;
  logic irq, bus_quota_skip, mc_backpressure;
  logic [NC-1:0] quota_stall, bus_grant;
  logic [1:0] noc_conflict;
  logic [NID-1:0] mem_pending, mem_serving, exp_pending, exp_serving;
  int accepted;

  selene_qos_top dut (.*);

  mem_ctrl_model #(.NID(NID), .IW(IW), .LAT_MIN(1), .LAT_MAX(6)) u_mem (
    .clk, .rst_n,
    .req_valid (mem_valid), .req (mem_req), .req_ready (mem_ready),
    .rsp_valid (mem_rsp_valid), .rsp (mem_rsp), .rsp_ready (mem_rsp_ready),
    .serve_valid (mem_serve_valid), .serve_write (mem_serve_write), .serve_init (mem_serve_init),
    .exp_pending, .exp_serving, .accepted
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_bus_cont = 0, n_irq = 0, n_skip = 0, n_lone = 0, n_conf = 0, n_bp = 0,
      n_memcont = 0, n_noccont = 0, n_per = 0, n_rd = 0, n_wr = 0, n_qos = 0, n_stall = 0;
  int RUN, acc_gap, n_core;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] region_addr(int who, int word);
    return {1'b0, 4'(who), 24'(word), 3'b000};
  endfunction

  // ---------------- core models ----------------
  logic [DATA_W-1:0] ref_mem [NID][64];
  bit   traffic_on;
  logic [DATA_W-1:0] core_exp [NC];
  bit   core_chk [NC];
  int   core_rate;
  logic     [NC-1:0] mdl_valid;
  bus_req_t [NC-1:0] mdl_req;
  bit       sw_mode, sw_valid;
  bus_req_t sw_req;
  always_comb begin
    core_valid = mdl_valid;
    core_req   = mdl_req;
    if (sw_mode) begin
      core_valid[0] = sw_valid;
      core_req[0]   = sw_req;
    end
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) mdl_valid <= 0;
    else for (int i = (sw_mode ? 1 : 0); i < NC; i++) begin
      if (core_done[i]) begin
        n_core++;
        if (core_chk[i]) begin
          checks++;
          if (core_rdata !== core_exp[i]) begin failures++; if (failures < 10) $display("core %0d read %h expected %h", i, core_rdata, core_exp[i]); end
          n_rd++;
        end
        if (core_valid[i] && quota_stall[i]) n_lone++;
      end
      if ((core_done[i] || !core_valid[i])) begin
        if (traffic_on && !(i == 0 && sw_req_pending) && $urandom_range(0, 99) < core_rate) begin
          int w; bit wr; logic [DATA_W-1:0] d;
          w = $urandom_range(0, 63); wr = 1'($urandom); d = {$urandom, $urandom};
          mdl_valid[i] <= 1;
          if ($urandom_range(0, 9) == 0) begin   // peripheral access (outside the PMU window)
            mdl_req[i] <= '{addr: {1'b1, 31'($urandom) & 31'h3FFF_FFF8}, write: 1'b0, wdata: '0};
            core_chk[i] <= 0;
          end else begin
            mdl_req[i] <= '{addr: region_addr(i, w), write: wr, wdata: d};
            core_chk[i] <= !wr;
            core_exp[i] <= ref_mem[i][w];
            if (wr) begin ref_mem[i][w] = d; n_wr++; end
          end
        end else mdl_valid[i] <= 0;
      end
    end
  end

  // ---------------- accelerator models ----------------
  logic [DATA_W-1:0] acc_exp [NA][$];
  bit   acc_isrd [NA][$];
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin acc_valid <= 0; acc_rsp_ready <= 0; end
    else for (int a = 0; a < NA; a++) begin
      acc_rsp_ready[a] <= ($urandom_range(0, 3) != 0);
      if (acc_rsp_valid[a] && acc_rsp_ready[a]) begin
        logic [DATA_W-1:0] e; bit r;
        e = acc_exp[a].pop_front(); r = acc_isrd[a].pop_front();
        checks++;
        if (acc_rsp[a].id !== 8'(a + 1) || acc_rsp[a].write === r || (r && acc_rsp[a].rdata !== e)) begin
          failures++; if (failures < 10) $display("acc %0d bad response", a);
        end
        if (r) n_rd++;
      end
      if (!acc_valid[a] || acc_ready[a]) begin
        if (traffic_on && acc_exp[a].size() < 12 && $urandom_range(0, acc_gap) == 0) begin
          int w; bit wr; logic [DATA_W-1:0] d;
          w = $urandom_range(0, 63); wr = 1'($urandom); d = {$urandom, $urandom};
          acc_valid[a] <= 1;
          acc_req[a] <= '{addr: region_addr(NC + a, w), write: wr, wdata: d, id: 8'(a + 1), qos: 4'(NC + a)};
          acc_exp[a].push_back(ref_mem[NC + a][w]);
          acc_isrd[a].push_back(!wr);
          if (wr) begin ref_mem[NC + a][w] = d; n_wr++; end
        end else acc_valid[a] <= 0;
      end
    end
  end

  // ---------------- peripheral model ----------------
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin per_ready <= 0; per_rsp_valid <= 0; end
    else begin
      per_ready <= !per_rsp_valid && !per_ready;
      if (per_valid && per_ready) begin
        per_rsp_valid <= 1; per_rsp <= '{rdata: ~64'(per_req.addr), write: per_req.write, id: per_req.id};
        per_ready <= 0; n_per++;
      end else if (per_rsp_valid && per_rsp_ready) per_rsp_valid <= 0;
    end
  end

  // ---------------- cycle checks and reference counters ----------------
  longint bus_ref [NC][NC];
  longint mem_ref [NID][NID];
  bit     count_en;
  always @(negedge clk) if (rst_n) begin
    // ID injection: the QoS bits name the owner of the region addressed
    if (mem_valid && mem_ready) begin
      checks++; n_qos++;
      if (mem_req.qos !== mem_req.addr[30:27]) begin failures++; if (failures < 10) $display("QoS %0d for region %0d", mem_req.qos, mem_req.addr[30:27]); end
    end
    checks++;
    if (mem_pending !== exp_pending || mem_serving !== exp_serving) begin
      failures++; if (failures < 10) $display("t=%0t pending %b/%b serving %b/%b", $time, mem_pending, exp_pending, mem_serving, exp_serving);
    end
    if ($countones(core_valid & ~bus_grant) > 0 && (bus_grant != 0)) n_bus_cont++;
    if (irq) n_irq++;
    if (bus_quota_skip) n_skip++;
    if (quota_stall != 0) n_stall++;
    if (noc_conflict[0]) n_conf++;
    if (mc_backpressure) n_bp++;
    if (count_en) begin
      for (int i = 0; i < NC; i++) for (int j = 0; j < NC; j++)
        if ((bus_grant != 0) && core_valid[i] && !bus_grant[i] && bus_grant[j]) bus_ref[i][j]++;
      for (int i = 0; i < NID; i++) for (int j = 0; j < NID; j++)
        if (i != j && exp_pending[i] && exp_serving[j]) begin mem_ref[i][j]++; n_memcont++; end
    end
  end

  // Core 0 acting as software: one bus transfer to the PMU window.
  bit sw_req_pending;
  task automatic sw_access(input bit write, input logic [9:0] a, input logic [31:0] d, output logic [31:0] q);
    sw_req_pending = 1;
    while (mdl_valid[0]) @(negedge clk);   // let core 0's own traffic finish
    @(negedge clk);
    sw_mode = 1;
    sw_req = '{addr: PMU | {20'h0, a, 2'b00}, write: write, wdata: 64'(d)};
    sw_valid = 1;
    do @(negedge clk); while (!core_done[0]);
    q = core_rdata[31:0];
    @(posedge clk);
    if (write && a == 10'h000) count_en = d[0];
    #1 sw_valid = 0;
    @(negedge clk);
    sw_mode = 0; sw_req_pending = 0;
  endtask
  task automatic wr(input logic [9:0] a, input logic [31:0] d);
    logic [31:0] q;
    sw_access(1, a, d, q);
  endtask
  task automatic rd(input logic [9:0] a, output logic [31:0] q);
    sw_access(0, a, 0, q);
  endtask

  initial begin
    RUN = 4000; acc_gap = 60;
    sw_mode = 0; sw_valid = 0; sw_req = '0; sw_req_pending = 0; mdl_req = '0; acc_req = '0; per_rsp = '0; traffic_on = 0; count_en = 0; core_rate = 60;
    foreach (ref_mem[i, k]) ref_mem[i][k] = '0;
    foreach (bus_ref[i, j]) bus_ref[i][j] = 0;
    foreach (mem_ref[i, j]) mem_ref[i][j] = 0;
    foreach (core_chk[i]) core_chk[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: counting on, interrupt mode, quota on core 1. Core 0 is the
    // monitoring task: on the interrupt it reads STATUS, which must name
    // core 1, and withdraws the quota, which must drop the interrupt.
    wr(8'h09, 400); wr(8'h01, 32'h2); wr(8'h00, 32'h5);
    traffic_on = 1;
    begin
      logic [31:0] st;
      fork
        begin wait (irq); end
        begin repeat (RUN) @(posedge clk); end
      join_any
      disable fork;
      checks++;
      if (!irq) begin failures++; $display("quota interrupt never raised"); end
      else begin
        rd(8'h02, st);
        checks++;
        if (st !== 32'h2) begin failures++; $display("STATUS %h after interrupt", st); end
        wr(8'h01, 32'h0);
        @(negedge clk);
        checks++;
        if (irq) begin failures++; $display("interrupt not withdrawn"); end
      end
    end
    repeat (RUN / 4) @(posedge clk);
    checks++;
    if (n_irq == 0 || n_stall != 0) begin failures++; $display("interrupt mode wrong: irq=%0d stall=%0d", n_irq, n_stall); end
    // phase 2: hardware quota on cores 1 and 2, lighter traffic so offenders are sometimes alone
    wr(8'h09, 200); wr(8'h0A, 200); wr(8'h01, 32'h6); wr(8'h00, 32'h3);
    repeat (RUN) @(posedge clk);
    core_rate = 10; acc_gap = 2;
    repeat (RUN) @(posedge clk);
    // drain
    traffic_on = 0;
    repeat (400) @(posedge clk);
    wr(8'h00, 32'h2);   // stop counting, then read the matrices
    @(negedge clk);
    for (int i = 0; i < NC; i++) for (int j = 0; j < NC; j++) begin
      logic [31:0] q;
      rd(10'h040 + 10'(i * NC + j), q); checks++;
      if (q !== 32'(bus_ref[i][j])) begin failures++; $display("bus contention [%0d][%0d] %0d expected %0d", i, j, q, bus_ref[i][j]); end
    end
    for (int i = 0; i < NID; i++) for (int j = 0; j < NID; j++) begin
      logic [31:0] q;
      rd(10'h100 + 10'(i * NID + j), q); checks++;
      if (q !== 32'(mem_ref[i][j])) begin failures++; $display("mem contention [%0d][%0d] %0d expected %0d", i, j, q, mem_ref[i][j]); end
    end
    // NoC contention: the six cores share one crossbar port, so they can
    // never hold each other up there; accelerators and the core port can.
    begin
      longint noc_tot, noc_cc;
      noc_tot = 0; noc_cc = 0;
      for (int i = 0; i < NID; i++) for (int j = 0; j < NID; j++) begin
        logic [31:0] q;
        rd(10'h200 + 10'(i * NID + j), q);
        noc_tot += q;
        if (i < NC && j < NC) noc_cc += q;
      end
      checks++;
      if (noc_cc != 0 || noc_tot == 0) begin failures++; $display("NoC contention: core-core %0d total %0d", noc_cc, noc_tot); end
      n_noccont = int'(noc_tot);
    end
    // all outstanding work finished
    checks++;
    if (core_valid != 0 || acc_valid != 0 || mem_pending != 0 || mem_serving != 0) begin failures++; $display("traffic did not drain"); end
    $display("core transfers=%0d", n_core);
    $display("mechanisms: bus_contention=%0d quota_irq=%0d quota_stall=%0d quota_skip=%0d lone_offender=%0d noc_conflict=%0d mc_backpressure=%0d mem_contention=%0d noc_contention=%0d peripheral=%0d reads=%0d writes=%0d qos_checked=%0d",
             n_bus_cont, n_irq, n_stall, n_skip, n_lone, n_conf, n_bp, n_memcont, n_noccont, n_per, n_rd, n_wr, n_qos);
    checks++; if (n_bus_cont == 0) begin failures++; $display("no bus contention"); end
    checks++; if (n_irq == 0)      begin failures++; $display("no quota interrupt"); end
    checks++; if (n_skip == 0)     begin failures++; $display("no quota stall skip"); end
    checks++; if (n_lone == 0)     begin failures++; $display("no lone offender grant"); end
    checks++; if (n_conf == 0)     begin failures++; $display("no crossbar conflict"); end
    checks++; if (n_bp == 0)       begin failures++; $display("no monitor backpressure"); end
    checks++; if (n_memcont == 0)  begin failures++; $display("no memory contention"); end
    checks++; if (n_per == 0)      begin failures++; $display("no peripheral access"); end
    checks++; if (n_rd == 0 || n_wr == 0 || n_qos == 0) begin failures++; $display("no reads/writes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
