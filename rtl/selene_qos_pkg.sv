// Shared types and constants of the QoS subsystem.
//
// The cores and accelerators of the SoC reach memory through an on-chip bus
// and an AXI crossbar. Every request carries the ID of the core (or
// accelerator) that caused it in the 4-bit AXI QoS field, so that the
// statistics unit and the memory-controller request monitor can tell who
// delays whom. This package holds the request/response structs used on the
// bus side and on the AXI side, and the widths they share.
//
// The AXI side is reduced to one request channel (address, write flag, write
// data, ID, QoS) and one response channel (read data, write flag, ID); AW, W
// and AR of full AXI are folded together and all transfers are single-beat.
// That reduction, and the address/data widths, are this design's choices.
package selene_qos_pkg;

  localparam int unsigned ADDR_W = 32;  // physical address width
  localparam int unsigned DATA_W = 64;  // bus and AXI data width (64-bit cores)
  localparam int unsigned QOS_W  = 4;   // AXI4 QoS field, carries the initiator ID
  localparam int unsigned ID_W   = 8;   // AXI ID; the crossbar puts the master index in the upper half
  localparam int unsigned MID_W  = ID_W / 2;  // bits of the ID owned by the master

  // A transfer presented by a core on the on-chip bus.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              write;
    logic [DATA_W-1:0] wdata;
  } bus_req_t;

  // Request channel of the reduced AXI interface.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              write;
    logic [DATA_W-1:0] wdata;
    logic [ID_W-1:0]   id;
    logic [QOS_W-1:0]  qos;
  } axi_req_t;

  // Response channel of the reduced AXI interface.
  typedef struct packed {
    logic [DATA_W-1:0] rdata;
    logic              write;
    logic [ID_W-1:0]   id;
  } axi_rsp_t;

  // Round-robin choice: the first set bit of cand after position last,
  // wrapping around among the n low bits. Returns last when cand is empty.
  function automatic int unsigned rr_pick(logic [15:0] cand, int unsigned last, int unsigned n);
    int unsigned idx;
    rr_pick = last;
    for (int unsigned k = n; k >= 1; k--) begin
      idx = (last + k) % n;
      if (cand[idx]) rr_pick = idx;
    end
  endfunction

endpackage
