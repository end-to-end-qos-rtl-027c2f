// Self-checking testbench of ahb_qos_arbiter.
//
// A reference model written as a plain search loop predicts the owner after
// every clock edge: free bus or finished transfer -> next requester after
// the previous owner, skipping quota-stalled cores unless only stalled cores
// wait, leaving out the core that just finished. Random cores hold their
// request until their transfer ends; transfers last a random number of
// cycles; stall bits change at random. A directed phase checks the strict
// rotation 0,1,2,...,N-1 with all cores requesting, and that a stalled core
// is skipped while others request but is granted when it is alone.
module tb_ahb_qos_arbiter;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, stall, grant;
  logic done, busy, quota_skip;
  logic [$clog2(N)-1:0] owner;
  int checks = 0, failures = 0;
  int skips = 0, offender_grants = 0;

  ahb_qos_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  // reference model
  logic ref_busy; int ref_owner;
  task automatic ref_step();
    logic [N-1:0] c, e; int nxt;
    if (!ref_busy || done) begin
      c = req;
      if (ref_busy && done) c[ref_owner] = 1'b0;
      e = c & ~stall;
      if (e == 0) e = c;
      if (e == 0) ref_busy = 0;
      else begin
        nxt = ref_owner;
        for (int k = 1; k <= N; k++)
          if (e[(ref_owner + k) % N]) begin nxt = (ref_owner + k) % N; break; end
        if (stall[nxt] && (c & ~stall) == 0 && (c & stall) != 0) offender_grants++;
        ref_owner = nxt; ref_busy = 1;
      end
    end
  endtask

  task automatic check();
    checks++;
    if (busy !== ref_busy || (ref_busy && (owner !== ref_owner[$clog2(N)-1:0] || grant !== N'(1) << ref_owner))
        || (!ref_busy && grant !== 0)) begin
      failures++;
      if (failures < 10) $display("MISMATCH t=%0t busy=%b owner=%0d grant=%b exp busy=%b owner=%0d", $time, busy, owner, grant, ref_busy, ref_owner);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seq[$];
  initial begin
    req = 0; stall = 0; done = 0;
    ref_busy = 0; ref_owner = N - 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: all request, one-cycle transfers -> strict rotation
    @(negedge clk); req = '1;
    for (int k = 0; k < 2 * N; k++) begin
      @(negedge clk);
      if (busy) begin seq.push_back(int'(owner)); done = 1; end
      else done = 0;
    end
    req = 0; done = busy;
    @(negedge clk); done = 0;
    @(negedge clk);
    for (int k = 1; k < seq.size(); k++) begin
      checks++;
      if (seq[k] != (seq[k-1] + 1) % N) begin failures++; $display("rotation broken: %0d after %0d", seq[k], seq[k-1]); end
    end
    // directed: core 2 stalled, cores 2 and 4 request -> 4 first, then 2 only after 4 leaves
    @(negedge clk); stall = 6'b000100; req = 6'b010100;
    @(negedge clk); checks++; if (!(busy && owner == 4)) begin failures++; $display("stalled core not skipped"); end
    done = 1; req = 6'b000100;
    @(negedge clk); done = 0;
    checks++; if (!(busy && owner == 2)) begin failures++; $display("lone offender starved"); end
    done = 1; req = 0;
    @(negedge clk); done = 0;
    // align reference model with the DUT state
    ref_busy = busy; ref_owner = int'(owner);
    // random phase
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      check();
      // drive inputs for the next edge
      done = busy && ($urandom_range(0, 2) == 0);
      for (int i = 0; i < N; i++) begin
        if (busy && grant[i] && done) req[i] = ($urandom_range(0, 3) == 0); // may request again
        else if (!req[i]) req[i] = ($urandom_range(0, 3) == 0);
      end
      if (busy && done && grant != 0) begin
        for (int i = 0; i < N; i++) if (grant[i]) req[i] = req[i];
      end
      if ($urandom_range(0, 15) == 0) stall = N'($urandom);
      #1;
      if (quota_skip) skips++;
      @(posedge clk);
      ref_step();
    end
    checks++;
    if (skips == 0 || offender_grants == 0) begin failures++; $display("quota mechanisms not exercised: skips=%0d offender_grants=%0d", skips, offender_grants); end
    $display("quota skips=%0d lone-offender grants=%0d", skips, offender_grants);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
