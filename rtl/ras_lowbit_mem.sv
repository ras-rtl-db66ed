// ras_lowbit_mem: low-bit state memory, one byte-wide bank per lane.
//
// Byte re-normalisation shifts the low bytes out of the rANS state; these
// bytes are the compressed stream and are kept here. A lane's encoder
// pushes 0, 1 or 2 bytes per cycle at rising addresses (wdata[7:0] at
// waddr, wdata[15:8] at waddr+1); its decoder pops them in reverse order and
// sees the two bytes just below its pointer, {mem[raddr-1], mem[raddr-2]}. A
// host port reads or writes single bytes of any bank. The bank-per-lane
// organisation is read from the paper's architecture figure; the ports and
// LB_DEPTH are this design's choices. Each bank is a ras_lowbit_bank.
// Timing: writes on the clock edge (the lane wins over the host on a
// collision); lane reads combinational, host read registered.
module ras_lowbit_mem
  import ras_pkg::*;
#(
  parameter int unsigned NUM_LANES = 4,
  parameter int unsigned LB_DEPTH  = 8192
) (
  input  logic                         clk,
  input  logic [NUM_LANES-1:0]         we,
  input  logic [1:0]                   wcnt  [NUM_LANES],
  input  ptr_t                         waddr [NUM_LANES],
  input  logic [15:0]                  wdata [NUM_LANES],
  input  ptr_t                         raddr [NUM_LANES],
  output logic [15:0]                  rdata [NUM_LANES],
  input  logic                         host_we,
  input  logic [$clog2(NUM_LANES)-1:0] host_bank,
  input  ptr_t                         host_addr,
  input  logic [7:0]                   host_wdata,
  output logic [7:0]                   host_rdata
);

  logic [7:0]                   bank_hrdata [NUM_LANES];
  logic [$clog2(NUM_LANES)-1:0] host_bank_q;

  for (genvar b = 0; b < NUM_LANES; b++) begin : g_bank
    ras_lowbit_bank #(.DEPTH(LB_DEPTH)) u_bank (
      .clk, .we(we[b]), .wcnt(wcnt[b]), .waddr(waddr[b]), .wdata(wdata[b]),
      .raddr(raddr[b]), .rdata(rdata[b]),
      .host_we(host_we && host_bank == b), .host_addr, .host_wdata,
      .host_rdata(bank_hrdata[b])
    );
  end

  always_ff @(posedge clk) host_bank_q <= host_bank;
  assign host_rdata = bank_hrdata[host_bank_q];

endmodule
