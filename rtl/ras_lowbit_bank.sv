// ras_lowbit_bank: one lane's bank of the low-bit state memory.
//
// A byte store of DEPTH bytes, split into an even-address and an
// odd-address half. The two bytes an encoder writes in one cycle (at a and
// a+1), and the two bytes a decoder looks at (a-1 and a-2), always fall in
// different halves, so each half needs only one write port and one lane read
// port. The host port reads and writes single bytes; the lane write wins
// over a host write to the same byte. The interleaving is this design's
// choice.
// Timing: writes on the clock edge; lane read combinational, host read
// registered (one cycle).
module ras_lowbit_bank
  import ras_pkg::*;
#(
  parameter int unsigned DEPTH = 8192
) (
  input  logic        clk,
  // lane write: wcnt bytes (0..2) of wdata at waddr, waddr+1
  input  logic        we,
  input  logic [1:0]  wcnt,
  input  ptr_t        waddr,
  input  logic [15:0] wdata,
  // lane read: {byte at raddr-1, byte at raddr-2}
  input  ptr_t        raddr,
  output logic [15:0] rdata,
  // host port
  input  logic        host_we,
  input  ptr_t        host_addr,
  input  logic [7:0]  host_wdata,
  output logic [7:0]  host_rdata
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [7:0] mem_even [DEPTH/2];
  logic [7:0] mem_odd  [DEPTH/2];

  // byte addresses and data per half for the lane write
  logic [AW-1:0] a0, a1, r1, r2;
  logic          w_even, w_odd;
  logic [7:0]    d_even, d_odd;
  logic [AW-2:0] ea, oa;

  always_comb begin
    a0 = AW'(waddr);
    a1 = AW'(waddr + 1'b1);
    w_even = 1'b0;  w_odd = 1'b0;
    d_even = '0;    d_odd = '0;
    ea = '0;        oa = '0;
    if (we && wcnt >= 2'd1) begin
      if (a0[0]) begin w_odd = 1'b1;  d_odd = wdata[7:0];  oa = a0[AW-1:1]; end
      else       begin w_even = 1'b1; d_even = wdata[7:0]; ea = a0[AW-1:1]; end
    end
    if (we && wcnt >= 2'd2) begin
      if (a1[0]) begin w_odd = 1'b1;  d_odd = wdata[15:8];  oa = a1[AW-1:1]; end
      else       begin w_even = 1'b1; d_even = wdata[15:8]; ea = a1[AW-1:1]; end
    end
    if (host_we && !host_addr[0] && !w_even) begin w_even = 1'b1; d_even = host_wdata; ea = host_addr[AW-1:1]; end
    if (host_we &&  host_addr[0] && !w_odd)  begin w_odd = 1'b1;  d_odd = host_wdata;  oa = host_addr[AW-1:1]; end
  end

  always_ff @(posedge clk) begin
    if (w_even) mem_even[ea] <= d_even;
    if (w_odd)  mem_odd[oa]  <= d_odd;
    host_rdata <= host_addr[0] ? mem_odd[host_addr[AW-1:1]] : mem_even[host_addr[AW-1:1]];
  end

  always_comb begin
    r1 = AW'(raddr - 1'b1);
    r2 = AW'(raddr - 2'd2);
    rdata[15:8] = r1[0] ? mem_odd[r1[AW-1:1]] : mem_even[r1[AW-1:1]];
    rdata[7:0]  = r2[0] ? mem_odd[r2[AW-1:1]] : mem_even[r2[AW-1:1]];
  end

endmodule
