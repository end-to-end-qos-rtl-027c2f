// Self-checking testbench of ahb2axi_id_bridge.
//
// A bus-side driver presents transfers from random core indices and holds
// each until s_done; an AXI slave model accepts requests with random ready
// delays, answers after a random latency with rdata = addr * 3, and checks
// that every request it accepts carries the owning core's index in the QoS
// bits, the bridge's AXI ID and the driver's address, write flag and data.
// The driver checks the returned data and that s_done comes in the same
// cycle as the AXI response (no added latency), and that no second request
// is issued while one is outstanding.
module tb_ahb2axi_id_bridge;
  import selene_qos_pkg::*;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  logic s_valid, s_done, m_valid, m_ready, m_rsp_valid, m_rsp_ready;
  bus_req_t s_req;
  logic [$clog2(N)-1:0] s_master;
  logic [DATA_W-1:0] s_rdata;
  axi_req_t m_req;
  axi_rsp_t m_rsp;
  int checks = 0, failures = 0, done_cnt = 0;

  ahb2axi_id_bridge #(.N(N), .AXI_ID(4'h3)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // AXI slave model
  logic outstanding; int delay; axi_req_t held;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin outstanding <= 0; delay <= 0; m_rsp_valid <= 0; m_ready <= 0; end
    else begin
      m_ready <= !outstanding && ($urandom_range(0, 1) == 0);
      if (m_valid && m_ready) begin
        checks++;
        if (outstanding) begin failures++; $display("second request while one outstanding"); end
        if (m_req.qos !== 4'(s_master) || m_req.id !== 8'h03 || m_req.addr !== s_req.addr ||
            m_req.write !== s_req.write || m_req.wdata !== s_req.wdata) begin
          failures++; $display("bad AXI request qos=%0d master=%0d", m_req.qos, s_master);
        end
        outstanding <= 1; held <= m_req; delay <= $urandom_range(1, 6); m_ready <= 0;
      end else if (outstanding && !m_rsp_valid) begin
        if (delay == 0) begin
          m_rsp_valid <= 1;
          m_rsp <= '{rdata: 64'(held.addr) * 3, write: held.write, id: held.id};
        end else delay <= delay - 1;
      end else if (m_rsp_valid && m_rsp_ready) begin
        m_rsp_valid <= 0; outstanding <= 0;
      end
    end
  end

  // bus-side driver
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin s_valid <= 0; end
    else begin
      if (s_done) begin
        checks++; done_cnt++;
        if (s_rdata !== 64'(s_req.addr) * 3 || !(m_rsp_valid && m_rsp_ready)) begin
          failures++; $display("bad completion");
        end
      end
      if (s_done || !s_valid) begin
        s_valid  <= ($urandom_range(0, 3) != 0);
        s_master <= $clog2(N)'($urandom_range(0, N - 1));
        s_req    <= '{addr: $urandom, write: 1'($urandom), wdata: {$urandom, $urandom}};
      end
    end
  end

  initial begin
    s_master = 0; s_req = '0; m_rsp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5000) @(posedge clk);
    checks++;
    if (done_cnt < 300) begin failures++; $display("too few transfers: %0d", done_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
