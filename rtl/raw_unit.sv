// raw_unit: read-after-write hazard guard placed in front of a Gather Unit.
//
// A gather unit reads the old value of <dst, chunk> from its buffer bank,
// aggregates and writes it back two cycles later. An update to the same
// address arriving while an older one is still in that window would read a
// stale value. The paper states the hazard and that a RAW Unit before each
// Gather Unit resolves it, but not how; this unit stalls: it compares the
// incoming address with the addresses the gather unit reports as in flight
// and holds the update (in_ready low, out_valid low) until they have retired.
// Purely combinational; stall pulses for every cycle an update is held.
module raw_unit
  import gnn_pkg::*;
#(
  parameter int LANES    = 16,
  parameter int AW       = 11,   // bank address width
  parameter int INFLIGHT = 2
) (
  input  logic   in_valid,
  input  logic [AW-1:0] in_addr,
  input  data_t [LANES-1:0] in_data,
  output logic   in_ready,
  output logic   out_valid,
  output logic [AW-1:0] out_addr,
  output data_t [LANES-1:0] out_data,
  input  logic   out_ready,
  // addresses the gather unit has read but not yet written back
  input  logic [INFLIGHT-1:0]         busy_valid,
  input  logic [INFLIGHT-1:0][AW-1:0] busy_addr,
  output logic   stall
);
  logic hazard;
  always_comb begin
    hazard = 1'b0;
    for (int i = 0; i < INFLIGHT; i++)
      if (busy_valid[i] && busy_addr[i] == in_addr) hazard = 1'b1;
  end
  assign stall     = in_valid && hazard;
  assign out_valid = in_valid && !hazard;
  assign in_ready  = out_ready && !hazard;
  assign out_addr  = in_addr;
  assign out_data  = in_data;
endmodule
