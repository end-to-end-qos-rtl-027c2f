// Self-checking testbench of ahb_bus.
//
// Six core models each issue transfers with their own address range and
// hold them until m_done. A slave model answers every transfer after a
// random 1..6 cycle latency with read data addr ^ 64'hA5A5..., and checks
// that the transfer it sees is exactly the one the owning core (s_master)
// presented. Cores check the data they get back and count their completed
// transfers. Directed phase: with all cores requesting and single-cycle
// slave latency, completions must follow the round-robin order. A stall on
// core 0 while others are busy must keep it off the bus.
module tb_ahb_bus;
  import selene_qos_pkg::*;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] m_valid, m_done, stall, grant;
  bus_req_t [N-1:0] m_req;
  logic [DATA_W-1:0] m_rdata, s_rdata;
  logic s_valid, s_done, busy, quota_skip;
  bus_req_t s_req;
  logic [$clog2(N)-1:0] s_master;
  int checks = 0, failures = 0;
  int completed [N];
  int lat, wait_cnt;
  logic fixed_lat;

  ahb_bus #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // slave model
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wait_cnt <= 0;
    else if (s_valid && !s_done) wait_cnt <= wait_cnt + 1;
    else wait_cnt <= 0;
  end
  always_comb begin
    s_done  = s_valid && (wait_cnt >= lat);
    s_rdata = {32'h0, s_req.addr} ^ 64'hA5A5_A5A5_A5A5_A5A5;
  end
  always @(posedge clk) if (s_done) lat <= fixed_lat ? 0 : $urandom_range(0, 5);

  // the slave must see the owner's transfer
  always @(negedge clk) if (rst_n && s_valid) begin
    checks++;
    if (s_req !== m_req[s_master] || !m_valid[s_master] || s_req.addr[31:28] != 4'(s_master)) begin
      failures++; $display("slave sees wrong transfer, master %0d", s_master);
    end
  end

  int order[$];
  // core models
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) if (m_done[i]) begin
      checks++;
      if (m_rdata !== ({32'h0, m_req[i].addr} ^ 64'hA5A5_A5A5_A5A5_A5A5)) begin failures++; $display("bad rdata core %0d", i); end
      completed[i]++;
      order.push_back(i);
    end
  end
  logic random_traffic;
  // request update after each edge
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (m_done[i] || !m_valid[i]) begin
        if (random_traffic ? ($urandom_range(0, 2) == 0) : 1'b1) begin
          m_valid[i] <= 1'b1;
          m_req[i]   <= '{addr: {4'(i), 28'($urandom)}, write: 1'($urandom), wdata: {$urandom, $urandom}};
        end else m_valid[i] <= 1'b0;
      end
    end
  end

  initial begin
    m_valid = 0; stall = 0; lat = 0; fixed_lat = 1; random_traffic = 0;
    for (int i = 0; i < N; i++) m_req[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (40) @(posedge clk);
    // round-robin order of completions
    for (int k = 1; k < order.size(); k++) begin
      checks++;
      if (order[k] != (order[k-1] + 1) % N) begin failures++; $display("order %0d after %0d", order[k], order[k-1]); end
    end
    // stall core 0: it must not complete while others keep requesting
    @(negedge clk); stall = 6'b000001;
    repeat (3) @(posedge clk);
    begin
      int c0;
      c0 = completed[0];
      repeat (60) @(posedge clk);
      checks++;
      if (completed[0] > c0 + 1) begin failures++; $display("stalled core kept using the bus"); end
    end
    stall = 0;
    // random traffic and latency
    fixed_lat = 0; random_traffic = 1;
    repeat (3000) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (completed[i] < 50) begin failures++; $display("core %0d starved: %0d", i, completed[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
