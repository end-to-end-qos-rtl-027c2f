// Self-checking testbench of mc_request_monitor.
//
// A reference model keeps, per initiator, an SV queue of the owner IDs of
// accepted requests and a flag telling whether its head is being served.
// Random push / serve / pop events are applied (pushes also to full FIFOs,
// pops also to empty ones), and after each edge the DUT's full, numpending,
// per-ID pending and serving bits and overflow flag are compared with the
// values derived from the queues. The test also checks that each mechanism
// (serving, full, overflow) happened.
module tb_mc_request_monitor;
  import selene_qos_pkg::*;
  localparam int NI = 4, NC = 9, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic push_valid, serve_valid, pop_valid, overflow;
  logic [1:0] push_init, serve_init, pop_init;
  logic [QOS_W-1:0] push_core;
  logic [NI-1:0] full;
  logic [NI-1:0][$clog2(DEPTH+1)-1:0] numpending;
  logic [NC-1:0] pending, serving;
  int checks = 0, failures = 0, n_full = 0, n_ovf = 0, n_serving = 0;

  mc_request_monitor #(.NI(NI), .NC(NC), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int  rq [NI][$];
  bit  rserve [NI];
  bit  rovf;

  task automatic ref_step();
    bit popped;
    rovf = 0;
    popped = 0;
    for (int i = 0; i < NI; i++) begin
      if (pop_valid && pop_init == 2'(i) && rq[i].size() > 0) begin
        void'(rq[i].pop_front()); rserve[i] = 0; popped = (push_init == 2'(i));
      end else if (serve_valid && serve_init == 2'(i) && rq[i].size() > 0) rserve[i] = 1;
    end
    if (push_valid) begin
      if (rq[push_init].size() < DEPTH) rq[push_init].push_back(int'(push_core));
      else rovf = 1;
    end
  endtask

  task automatic compare();
    logic [NC-1:0] ep, es;
    ep = 0; es = 0;
    for (int i = 0; i < NI; i++)
      foreach (rq[i][k]) begin
        if (k == 0 && rserve[i]) es[rq[i][k]] = 1; else ep[rq[i][k]] = 1;
      end
    checks++;
    if (pending !== ep || serving !== es || overflow !== rovf) begin
      failures++;
      if (failures < 10) $display("t=%0t pending %b/%b serving %b/%b ovf %b/%b", $time, pending, ep, serving, es, overflow, rovf);
    end
    for (int i = 0; i < NI; i++) begin
      checks++;
      if (int'(numpending[i]) != rq[i].size() || full[i] !== (rq[i].size() == DEPTH)) begin
        failures++;
        if (failures < 10) $display("init %0d numpending %0d/%0d", i, numpending[i], rq[i].size());
      end
    end
    if (serving != 0) n_serving++;
    if (full != 0) n_full++;
    if (overflow) n_ovf++;
  endtask

  initial begin
    push_valid = 0; serve_valid = 0; pop_valid = 0;
    push_init = 0; serve_init = 0; pop_init = 0; push_core = 0;
    rovf = 0;
    for (int i = 0; i < NI; i++) rserve[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 8000; cyc++) begin
      @(negedge clk);
      // phases: filling (pushes dominate) and draining
      push_valid  = ($urandom_range(0, 99) < ((cyc / 500) % 2 == 0 ? 70 : 25));
      push_init   = 2'($urandom);
      push_core   = 4'($urandom_range(0, NC - 1));
      serve_valid = ($urandom_range(0, 2) == 0);
      serve_init  = 2'($urandom);
      pop_valid   = ($urandom_range(0, 99) < ((cyc / 500) % 2 == 0 ? 30 : 70));
      pop_init    = 2'($urandom);
      @(posedge clk);
      ref_step();
      #1 compare();
    end
    checks++;
    if (n_full == 0 || n_ovf == 0 || n_serving == 0) begin
      failures++; $display("not exercised: full=%0d overflow=%0d serving=%0d", n_full, n_ovf, n_serving);
    end
    $display("cycles with full=%0d overflow=%0d serving=%0d", n_full, n_ovf, n_serving);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
