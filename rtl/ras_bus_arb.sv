// ras_bus_arb: lane arbiter for the shared CDF-table bus.
//
// Every lane that holds a credit and has a table read to make raises req
// with its symbol address. Each cycle one requester is granted, in
// round-robin order starting after the lane granted last, and its address
// goes to the table. The table answers one cycle later, and rsp_valid tells
// the granted lane that the broadcast response is its own. A lane that is
// stalled (no credit, nothing to fetch, or clock-gated) does not request, so
// its slots go to the lanes that are ready. That lanes arbitrate for the bus
// and that idle lanes give up bandwidth is from the paper; round-robin order
// and the single table port are this design's choices.
//
// Interface: req/addr per lane in, one-hot gnt out in the same cycle,
// tbl_re/tbl_addr to the table, rsp_valid per lane one cycle after gnt.
module ras_bus_arb
  import ras_pkg::*;
#(
  parameter int unsigned NUM_LANES = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_LANES-1:0] req,
  input  sym_t                 addr [NUM_LANES],
  output logic [NUM_LANES-1:0] gnt,
  output logic                 tbl_re,
  output sym_t                 tbl_addr,
  output logic [NUM_LANES-1:0] rsp_valid
);

  localparam int unsigned LW = (NUM_LANES > 1) ? $clog2(NUM_LANES) : 1;

  logic [LW-1:0] last_q;   // lane granted last

  always_comb begin
    logic found;
    int unsigned idx;
    gnt      = '0;
    tbl_addr = '0;
    found    = 1'b0;
    for (int unsigned k = 1; k <= NUM_LANES; k++) begin
      idx = (int'(last_q) + k) % NUM_LANES;
      if (!found && req[idx]) begin
        found    = 1'b1;
        gnt[idx] = 1'b1;
        tbl_addr = addr[idx];
      end
    end
    tbl_re = found;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q    <= LW'(NUM_LANES - 1);
      rsp_valid <= '0;
    end else begin
      rsp_valid <= gnt;
      for (int unsigned i = 0; i < NUM_LANES; i++)
        if (gnt[i]) last_q <= LW'(i);
    end
  end

  // at most one grant, and only to a requester
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert ($onehot0(gnt)) else $error("ras_bus_arb: more than one grant");
      assert ((gnt & ~req) == '0) else $error("ras_bus_arb: grant without request");
    end
  end

endmodule
