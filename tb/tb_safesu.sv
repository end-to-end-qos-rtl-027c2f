// Self-checking testbench of safesu.
//
// Random bus snoop inputs (requests, owner), NoC port holder/waiter reports
// and memory pending/serving bits
// drive the unit while a reference model in the testbench keeps its own
// pair-wise counters and quota budgets. At intervals all counters, quotas
// and the status register are read back over the register port and
// compared. Checked mechanisms: counting enable, counter clear, quota
// decrement by the number of delayed cores, exhaustion, interrupt only when
// irq is enabled, quota_stall only in hardware-quota mode.
module tb_safesu;
  localparam int NC = 6, NID = 9, NSL = 2;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] bus_req, bus_grant, exhausted, quota_stall;
  logic bus_busy, irq;
  logic [NID-1:0] mem_pending, mem_serving;
  logic [NSL-1:0] noc_held;
  logic [NSL-1:0][3:0] noc_holder;
  logic [NSL-1:0][15:0] noc_waiting;
  logic reg_valid, reg_write;
  logic [9:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  int checks = 0, failures = 0, n_exh = 0, n_irq = 0, n_stall = 0;

  safesu #(.NC(NC), .NID(NID)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint bus_ref [NC][NC];
  longint mem_ref [NID][NID];
  longint noc_ref [NID][NID];
  longint quota_ref [NC];
  bit [NC-1:0] qen;
  bit count_en, hwq, irq_en;

  // snoop inputs are idle while registers are accessed, so nothing is counted
  task automatic idle_inputs();
    bus_req = 0; bus_busy = 0; bus_grant = 0; mem_pending = 0; mem_serving = 0;
    noc_held = 0; noc_holder = 0; noc_waiting = 0;
  endtask

  task automatic wr(input logic [9:0] a, input logic [31:0] d);
    @(negedge clk);
    idle_inputs();
    reg_valid = 1; reg_write = 1; reg_addr = a; reg_wdata = d;
    @(posedge clk);
    if (a == 10'h000) begin
      count_en = d[0]; hwq = d[1]; irq_en = d[2];
      if (d[31]) begin
        foreach (bus_ref[i, j]) bus_ref[i][j] = 0;
        foreach (mem_ref[i, j]) mem_ref[i][j] = 0;
        foreach (noc_ref[i, j]) noc_ref[i][j] = 0;
      end
    end
    if (a == 10'h001) qen = d[NC-1:0];
    if (a >= 10'h008 && a < 10'h008 + NC) quota_ref[a - 10'h008] = d;
    #1 reg_valid = 0; reg_write = 0;
  endtask

  task automatic rd_check(input logic [9:0] a, input longint exp, input string what);
    reg_addr = a; #1;
    checks++;
    if (reg_rdata !== 32'(exp)) begin
      failures++;
      if (failures < 12) $display("%s @%h: got %0d expected %0d", what, a, reg_rdata, exp);
    end
  endtask

  task automatic read_all();
    @(negedge clk);
    idle_inputs();
    for (int i = 0; i < NC; i++) for (int j = 0; j < NC; j++) rd_check(10'h040 + 10'(i * NC + j), bus_ref[i][j], "bus counter");
    for (int i = 0; i < NID; i++) for (int j = 0; j < NID; j++) rd_check(10'h100 + 10'(i * NID + j), mem_ref[i][j], "mem counter");
    for (int i = 0; i < NID; i++) for (int j = 0; j < NID; j++) rd_check(10'h200 + 10'(i * NID + j), noc_ref[i][j], "noc counter");
    for (int j = 0; j < NC; j++) rd_check(10'h008 + 10'(j), quota_ref[j], "quota");
  endtask

  // one cycle of random snoop activity with reference update
  task automatic step();
    int owner, v;
    @(negedge clk);
    bus_req = NC'($urandom);
    bus_busy = ($urandom_range(0, 3) != 0);
    owner = $urandom_range(0, NC - 1);
    bus_grant = bus_busy ? NC'(1) << owner : '0;
    if (bus_busy) bus_req[owner] = 1;
    mem_pending = NID'($urandom);
    mem_serving = NID'($urandom) & NID'($urandom);
    for (int s = 0; s < NSL; s++) begin
      noc_held[s]    = 1'($urandom);
      noc_holder[s]  = 4'($urandom_range(0, 15));
      noc_waiting[s] = 16'($urandom);
    end
    #1;
    // outputs depend on state only: check them here
    begin
      bit [NC-1:0] ex;
      for (int j = 0; j < NC; j++) ex[j] = qen[j] && quota_ref[j] == 0;
      checks++;
      if (exhausted !== ex || quota_stall !== (hwq ? ex : '0) || irq !== (irq_en && ex != 0)) begin
        failures++; if (failures < 12) $display("quota outputs wrong: exh %b/%b stall %b irq %b", exhausted, ex, quota_stall, irq);
      end
      if (ex != 0) n_exh++;
      if (irq) n_irq++;
      if (quota_stall != 0) n_stall++;
    end
    @(posedge clk);
    if (count_en) begin
      for (int i = 0; i < NC; i++) if (bus_busy && bus_req[i] && i != owner) bus_ref[i][owner]++;
      for (int i = 0; i < NID; i++) for (int j = 0; j < NID; j++)
        if (i != j && mem_pending[i] && mem_serving[j]) mem_ref[i][j]++;
      for (int i = 0; i < NID; i++) for (int j = 0; j < NID; j++) begin
        bit hit; hit = 0;
        for (int s = 0; s < NSL; s++) if (i != j && noc_held[s] && noc_holder[s] == 4'(j) && noc_waiting[s][i]) hit = 1;
        if (hit) noc_ref[i][j]++;
      end
      for (int j = 0; j < NC; j++) if (qen[j]) begin
        v = 0;
        if (bus_busy && j == owner) for (int i = 0; i < NC; i++) if (i != j && bus_req[i]) v++;
        quota_ref[j] = (quota_ref[j] > v) ? quota_ref[j] - v : 0;
      end
    end
  endtask

  initial begin
    reg_valid = 0; reg_write = 0; reg_addr = 0; reg_wdata = 0;
    idle_inputs();
    foreach (bus_ref[i, j]) bus_ref[i][j] = 0;
    foreach (mem_ref[i, j]) mem_ref[i][j] = 0;
    foreach (noc_ref[i, j]) noc_ref[i][j] = 0;
    foreach (quota_ref[j]) quota_ref[j] = 0;
    qen = 0; count_en = 0; hwq = 0; irq_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // counting disabled: nothing moves
    repeat (50) step();
    read_all();
    // counting, interrupt mode, quotas on cores 1 and 3
    wr(10'h008 + 1, 200); wr(10'h008 + 3, 5000); wr(10'h001, 6'b001010);
    wr(10'h000, 32'h5);
    repeat (600) step();
    read_all();
    // hardware-quota mode, new budgets
    wr(10'h008 + 1, 150); wr(10'h008 + 4, 100); wr(10'h001, 6'b010010);
    wr(10'h000, 32'h3);
    repeat (600) step();
    read_all();
    // clear counters and keep counting
    wr(10'h000, 32'h8000_0007);
    repeat (300) step();
    read_all();
    @(negedge clk);
    rd_check(10'h001, qen, "quota enable");
    checks++;
    if (n_exh == 0 || n_irq == 0 || n_stall == 0) begin failures++; $display("not exercised exh=%0d irq=%0d stall=%0d", n_exh, n_irq, n_stall); end
    $display("cycles exhausted=%0d irq=%0d stall=%0d", n_exh, n_irq, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
