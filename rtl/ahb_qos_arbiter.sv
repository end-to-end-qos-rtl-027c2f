// Round-robin arbiter of the on-chip bus with hardware quota enforcement.
//
// Each core raises req[i] and keeps it up until its transfer completes. When
// the bus is free, or the current transfer ends (done), the arbiter grants the
// next requesting core after the previous owner in round-robin order; the
// grant is registered, so the new owner drives the bus from the next cycle.
// The core that just finished is left out of that choice, so a core that
// requests back to back yields to waiting cores.
//
// stall[i] comes from the statistics unit when core i has used up its
// contention quota (the "hardware quota" mode). A stalled core is passed over
// while any non-stalled core is requesting. If only stalled cores request,
// one of them is still granted, so an offending core is slowed but never
// starved and the bus is not left idle; that work-conserving rule is this
// design's choice of starvation-avoidance mechanism, which the paper asks for
// but does not specify. Round-robin order and the quota stall follow the paper.
//
// Interface: grant is one-hot (or zero when idle), owner its index, busy high
// while a transfer owns the bus.
module ahb_qos_arbiter
  import selene_qos_pkg::*;
#(
  parameter int unsigned N = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic [N-1:0]         stall,
  input  logic                 done,
  output logic                 busy,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] owner,
  output logic                 quota_skip   // a stalled core was passed over this cycle
);

  localparam int unsigned OW = $clog2(N);

  logic [N-1:0]  cand, eligible;
  logic          arbitrate;
  logic [OW-1:0] pick;

  assign arbitrate = !busy || done;

  always_comb begin
    cand = req;
    if (busy && done) cand = req & ~grant;
    eligible = cand & ~stall;
    if (eligible == '0) eligible = cand;   // only offenders waiting: let one through
    pick = OW'(rr_pick(16'(eligible), 32'(owner), N));
    quota_skip = arbitrate && ((cand & stall) != '0) && ((cand & ~stall) != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      grant <= '0;
      owner <= OW'(N - 1);
    end else if (arbitrate) begin
      if (eligible != '0) begin
        busy  <= 1'b1;
        grant <= N'(1) << pick;
        owner <= pick;
      end else begin
        busy  <= 1'b0;
        grant <= '0;
      end
    end
  end

  // Grant is one-hot while busy and empty while idle.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    busy ? $onehot(grant) : (grant == '0));

endmodule
