// ras_ms_mem: middle-state (MS) memory, one bank per lane.
//
// Each bank holds MS_DEPTH entries of {rANS state, low-bit byte pointer}.
// The encoder of a lane writes the state and pointer it finished a job with
// into entry `job` of its own bank; the decoder of the lane reads the same
// entry as its starting value. A host port reads and writes any entry, so a
// stream can be carried off chip and brought back for decoding. The paper
// names a banked, per-lane middle-state memory; what an entry holds and the
// port set are this design's choices.
// Timing: writes on the clock edge (the lane port wins over the host port
// in the same bank and entry); all reads combinational.
module ras_ms_mem
  import ras_pkg::*;
#(
  parameter int unsigned NUM_LANES = 4,
  parameter int unsigned MS_DEPTH  = 4
) (
  input  logic                         clk,
  // lane ports, one per bank
  input  logic [NUM_LANES-1:0]         we,
  input  logic [$clog2(MS_DEPTH)-1:0]  idx   [NUM_LANES],
  input  ms_entry_t                    wdata [NUM_LANES],
  output ms_entry_t                    rdata [NUM_LANES],
  // host port
  input  logic                         host_we,
  input  logic [$clog2(NUM_LANES)-1:0] host_bank,
  input  logic [$clog2(MS_DEPTH)-1:0]  host_idx,
  input  ms_entry_t                    host_wdata,
  output ms_entry_t                    host_rdata
);

  ms_entry_t mem [NUM_LANES][MS_DEPTH];

  always_ff @(posedge clk) begin
    if (host_we) mem[host_bank][host_idx] <= host_wdata;
    for (int b = 0; b < NUM_LANES; b++)
      if (we[b]) mem[b][idx[b]] <= wdata[b];
  end

  always_comb begin
    for (int b = 0; b < NUM_LANES; b++) rdata[b] = mem[b][idx[b]];
    host_rdata = mem[host_bank][host_idx];
  end

endmodule
