// Self-checking testbench of axi_xbar.
//
// Four master models issue single requests (one outstanding each) to random
// addresses of either slave, with QoS = 8 + master index and a random
// 4-bit ID. Two slave models accept with random ready, queue what they get
// and answer in order after random delays with rdata = ~addr. A slave checks
// that the upper ID half names the master that issued the request (the
// tb keeps each master's outstanding request) and that the QoS bits passed
// through. A master checks that the response carries its own ID and the
// data of its own request. A directed phase keeps all four masters busy on
// slave 0 with ready always high and checks that acceptances rotate
// 0,1,2,3 (round robin). Every cycle the per-port contention report
// (holder QoS, waiting QoS set) is compared with what the slave and master
// sides show.
module tb_axi_xbar;
  import selene_qos_pkg::*;
  localparam int NM = 4, NS = 2;
  logic clk = 0, rst_n = 0;
  logic [NM-1:0] m_valid, m_ready, m_rsp_valid, m_rsp_ready;
  axi_req_t [NM-1:0] m_req;
  axi_rsp_t [NM-1:0] m_rsp;
  logic [NS-1:0] s_valid, s_ready, s_rsp_valid, s_rsp_ready, slave_conflict, port_held;
  logic [NS-1:0][QOS_W-1:0] port_holder;
  logic [NS-1:0][2**QOS_W-1:0] port_waiting;
  axi_req_t [NS-1:0] s_req;
  axi_rsp_t [NS-1:0] s_rsp;
  int checks = 0, failures = 0, conflicts = 0;
  int done_cnt [NM];
  logic directed;

  axi_xbar #(.NM(NM), .NS(NS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // master models
  logic [NM-1:0] waiting;
  axi_req_t [NM-1:0] sent;
  int accept_order[$];
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin m_valid <= 0; waiting <= 0; m_rsp_ready <= 0; end
    else for (int m = 0; m < NM; m++) begin
      m_rsp_ready[m] <= directed || ($urandom_range(0, 2) != 0);
      if (m_valid[m] && m_ready[m]) begin
        m_valid[m] <= 0; waiting[m] <= 1; sent[m] <= m_req[m];
        accept_order.push_back(m);
      end
      if (m_rsp_valid[m] && m_rsp_ready[m]) begin
        checks++; done_cnt[m]++;
        if (!waiting[m] || m_rsp[m].id !== {4'h0, sent[m].id[3:0]} || m_rsp[m].rdata !== ~64'(sent[m].addr)) begin
          failures++; $display("master %0d bad response", m);
        end
        waiting[m] <= 0;
      end
      if (!m_valid[m] && !waiting[m] && !(m_valid[m] && m_ready[m]) && (directed || $urandom_range(0, 3) == 0)) begin
        m_valid[m] <= 1;
        m_req[m] <= '{addr: {directed ? 1'b0 : 1'($urandom), 31'($urandom)}, write: 1'($urandom),
                      wdata: {$urandom, $urandom}, id: {4'h0, 4'($urandom)}, qos: 4'(8 + m)};
      end
    end
  end

  // slave models
  axi_req_t q [NS][$];
  int dly [NS];
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin s_ready <= 0; s_rsp_valid <= 0; end
    else for (int s = 0; s < NS; s++) begin
      s_ready[s] <= directed || ($urandom_range(0, 1) == 0);
      if (s_valid[s] && s_ready[s]) begin
        int mi;
        mi = int'(s_req[s].id[7:4]);
        checks++;
        if (mi >= NM || s_req[s].qos !== 4'(8 + mi) || s_req[s].addr[31] !== 1'(s) ||
            s_req[s].addr !== m_req[mi].addr || s_req[s].id[3:0] !== m_req[mi].id[3:0] || !m_valid[mi]) begin
          failures++; $display("slave %0d got a mis-tagged request", s);
        end
        q[s].push_back(s_req[s]);
      end
      if (s_rsp_valid[s] && s_rsp_ready[s]) begin
        s_rsp_valid[s] <= 0; void'(q[s].pop_front()); dly[s] <= $urandom_range(0, 4);
      end else if (!s_rsp_valid[s] && q[s].size() > 0) begin
        if (dly[s] == 0) begin
          s_rsp_valid[s] <= 1;
          s_rsp[s] <= '{rdata: ~64'(q[s][0].addr), write: q[s][0].write, id: q[s][0].id};
        end else dly[s] <= dly[s] - 1;
      end
    end
  end

  always @(posedge clk) if (rst_n && slave_conflict != 0) conflicts++;

  // contention report: holder = QoS of the request presented to the slave,
  // waiting = QoS of every other master addressing that slave
  int n_wait = 0;
  always @(negedge clk) if (rst_n) for (int s = 0; s < NS; s++) begin
    logic [15:0] w;
    w = 0;
    for (int m = 0; m < NM; m++)
      if (m_valid[m] && m_req[m].addr[31] == 1'(s) && !(s_valid[s] && int'(s_req[s].id[7:4]) == m)) w[m_req[m].qos] = 1;
    checks++;
    if (port_held[s] !== s_valid[s] || (s_valid[s] && port_holder[s] !== s_req[s].qos) || port_waiting[s] !== w) begin
      failures++; if (failures < 10) $display("slave %0d contention report wrong: waiting %h expected %h", s, port_waiting[s], w);
    end
    if (w != 0 && s_valid[s]) n_wait++;
  end

  initial begin
    directed = 1; m_req = '0; s_rsp = '0;
    for (int s = 0; s < NS; s++) dly[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (60) @(posedge clk);
    // with every master always requesting slave 0 acceptance must rotate
    begin
      int n; n = accept_order.size();
      checks++;
      if (n < 12) begin failures++; $display("too few acceptances %0d", n); end
      for (int k = 4; k < n; k++) begin
        checks++;
        if (accept_order[k] != (accept_order[k-1] + 1) % NM) begin failures++; $display("rotation broken at %0d", k); end
      end
    end
    directed = 0;
    repeat (6000) @(posedge clk);
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (done_cnt[m] < 100) begin failures++; $display("master %0d starved", m); end
    end
    checks++;
    if (n_wait == 0) begin failures++; $display("no waiting master seen"); end
    checks++;
    if (conflicts == 0) begin failures++; $display("no slave conflict seen"); end
    $display("conflict cycles=%0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
