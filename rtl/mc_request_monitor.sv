// Memory-controller request monitor: who is waiting and who is being served.
//
// The memory controller receives requests from NI initiators (crossbar
// master ports) and each request carries the ID of the core or accelerator
// that owns it (the AXI QoS bits). For every initiator the monitor keeps a
// FIFO of the requests it has accepted and not yet answered; each entry holds
// a valid bit and the owner's core_id, and the FIFO has a write pointer, a
// read pointer, a count of pending requests (numpending) and a full flag.
// Requests of one initiator are answered in order, so the head entry is the
// oldest. From these FIFOs the monitor derives, for every core ID, two
// status bits sent to the statistics unit:
//   pending[c]  some request of c is queued and not being served,
//   serving[c]  a request of c is being served by the controller.
// The SoC uses one instance for reads and one for writes.
//
// Interface, all sampled at the clock edge:
//   push_valid/push_init/push_core  a request was accepted;
//   serve_valid/serve_init          the controller starts serving the head
//                                   request of that initiator;
//   pop_valid/pop_init              the head request of that initiator was
//                                   answered (it is removed).
// A push to a full FIFO is dropped and raises overflow for one cycle; the
// controller is expected to hold requests back with full. pending/serving
// are combinational from the registered FIFO state, so they change one cycle
// after the event. The FIFO fields follow the paper's figure; the event
// interface, the depth and the overflow flag are this design's choices.
module mc_request_monitor
  import selene_qos_pkg::*;
#(
  parameter int unsigned NI    = 4,   // initiators (crossbar master ports)
  parameter int unsigned NC    = 9,   // core/accelerator IDs tracked
  parameter int unsigned DEPTH = 8    // requests tracked per initiator
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         push_valid,
  input  logic [$clog2(NI)-1:0]        push_init,
  input  logic [QOS_W-1:0]             push_core,
  input  logic                         serve_valid,
  input  logic [$clog2(NI)-1:0]        serve_init,
  input  logic                         pop_valid,
  input  logic [$clog2(NI)-1:0]        pop_init,
  output logic [NI-1:0]                full,
  output logic [NI-1:0][$clog2(DEPTH+1)-1:0] numpending,
  output logic [NC-1:0]                pending,
  output logic [NC-1:0]                serving,
  output logic                         overflow
);

  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  typedef struct packed {
    logic             valid;
    logic [QOS_W-1:0] core_id;
  } entry_t;

  entry_t [NI-1:0][DEPTH-1:0] fifo;
  logic   [NI-1:0][PW-1:0]    write_ptr, read_ptr;
  logic   [NI-1:0]            head_serving;
  logic   [NI-1:0]            do_push, do_pop;

  always_comb begin
    for (int unsigned i = 0; i < NI; i++) begin
      do_pop[i]  = pop_valid && pop_init == $clog2(NI)'(i) && numpending[i] != '0;
      do_push[i] = push_valid && push_init == $clog2(NI)'(i) && (!full[i] || do_pop[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fifo         <= '0;
      write_ptr    <= '0;
      read_ptr     <= '0;
      numpending   <= '0;
      head_serving <= '0;
      overflow     <= 1'b0;
    end else begin
      overflow <= push_valid && full[push_init] &&
                  !(pop_valid && pop_init == push_init);
      for (int unsigned i = 0; i < NI; i++) begin
        if (do_pop[i]) begin
          fifo[i][read_ptr[i]].valid <= 1'b0;
          read_ptr[i]     <= (read_ptr[i] == PW'(DEPTH - 1)) ? '0 : read_ptr[i] + 1'b1;
          head_serving[i] <= 1'b0;
        end else if (serve_valid && serve_init == $clog2(NI)'(i) && numpending[i] != '0) begin
          head_serving[i] <= 1'b1;
        end
        if (do_push[i]) begin
          fifo[i][write_ptr[i]] <= '{valid: 1'b1, core_id: push_core};
          write_ptr[i] <= (write_ptr[i] == PW'(DEPTH - 1)) ? '0 : write_ptr[i] + 1'b1;
        end
        numpending[i] <= numpending[i] + CW'(do_push[i]) - CW'(do_pop[i]);
      end
    end
  end

  always_comb begin
    pending = '0;
    serving = '0;
    for (int unsigned i = 0; i < NI; i++) begin
      full[i] = (numpending[i] == CW'(DEPTH));
      for (int unsigned d = 0; d < DEPTH; d++) begin
        if (fifo[i][d].valid && 32'(fifo[i][d].core_id) < NC) begin
          if (head_serving[i] && d == 32'(read_ptr[i]))
            serving[fifo[i][d].core_id] = 1'b1;
          else
            pending[fifo[i][d].core_id] = 1'b1;
        end
      end
    end
  end

  for (genvar i = 0; i < NI; i++) begin : g_chk
    a_count: assert property (@(posedge clk) disable iff (!rst_n)
      numpending[i] <= CW'(DEPTH));
  end

endmodule
