// ras_history_mem: decoded-pixel history of one decoder.
//
// A circular buffer of the three most recent image rows (MAX_W pixels each).
// The decoder writes every pixel it produces at (row slot, column) and reads
// the eight causal neighbours of the pixel it decodes next: columns c-2..c of
// the rows two and one above, and columns c-2, c-1 of the current row.
// `nbr_ok` says that all eight exist (row >= 2, col >= 2); `last` is the
// pixel to the left and `last_ok` that it exists. The decoder keeps the row
// slot (row mod 3) itself. The paper names this memory and shows that it
// feeds the predictor; the three-row organisation is this design's choice.
// Timing: write on the clock edge, reads combinational.
module ras_history_mem
  import ras_pkg::*;
#(
  parameter int unsigned MAX_W = 64
) (
  input  logic                clk,
  input  logic                we,
  input  logic [1:0]          wslot,
  input  logic [COL_BITS-1:0] wcol,
  input  sym_t                wdata,
  // position of the pixel to predict
  input  logic [1:0]          slot,
  input  logic [ROW_BITS-1:0] row,
  input  logic [COL_BITS-1:0] col,
  output sym_t                nbr [8],
  output logic                nbr_ok,
  output sym_t                last,
  output logic                last_ok
);

  localparam int unsigned CW = $clog2(MAX_W);

  sym_t mem [3][MAX_W];

  always_ff @(posedge clk) begin
    if (we) mem[wslot][CW'(wcol)] <= wdata;
  end

  logic [1:0] s1, s2;   // slots of the rows one and two above
  assign s1 = (slot == 2'd0) ? 2'd2 : slot - 2'd1;
  assign s2 = (s1 == 2'd0) ? 2'd2 : s1 - 2'd1;

  always_comb begin
    logic [CW-1:0] c0, c1, c2;
    c0 = CW'(col);
    c1 = CW'(col - 1'b1);
    c2 = CW'(col - COL_BITS'(2));
    nbr_ok  = (row >= ROW_BITS'(2)) && (col >= COL_BITS'(2));
    last_ok = (col != '0);
    nbr     = '{default: '0};
    last    = '0;
    if (nbr_ok) begin
      nbr[0] = mem[s2][c2];
      nbr[1] = mem[s2][c1];
      nbr[2] = mem[s2][c0];
      nbr[3] = mem[s1][c2];
      nbr[4] = mem[s1][c1];
      nbr[5] = mem[s1][c0];
      nbr[6] = mem[slot][c2];
      nbr[7] = mem[slot][c1];
    end
    if (last_ok) last = mem[slot][c1];
  end

endmodule
