// ras_encoder: rANS encoder of one lane.
//
// Encodes a stream of symbols into the lane's low-bit memory bank with the
// range-ANS update
//     s_i = floor(s_{i-1} / f(x_i)) * 2^n + (s_{i-1} mod f(x_i)) + C(x_i).
// Work is split as in the paper:
//   Prefetch: for each incoming symbol the lane requests (C(x), C(x+1)) on the
//     shared table bus. A request needs a credit; the lane owns CREDITS
//     credits, one per slot of its local response FIFO, and gets one back when
//     the core takes an entry. Without a credit, or without a symbol, the lane
//     does not request and the bus serves other lanes.
//   Stage 1: byte re-normalisation of the current state against this
//     symbol's bound s < f * 2^(log2(L) - n + 8), emitting 0..BMAX low bytes in
//     the same cycle, then the quotient path a1 = floor(s/f) << n and the
//     remainder path a2 = (s mod f) + C, both from one ras_divmod, into
//     registers.
//   Stage 2: s = a1 + a2, formed from those registers and fed straight back
//     into stage 1 of the next symbol, so one symbol is coded per cycle once
//     the FIFO is filled.
// After the last symbol the final state and the byte pointer are written to
// the middle-state memory (ms_we), where the decoder picks them up.
//
// Symbols must arrive in reverse of the order the decoder will produce them
// (rANS is last-in, first-out). Bytes are pushed at rising addresses from
// `base`; lb_data[7:0] is written at lb_addr and lb_data[15:8] at lb_addr+1.
// The equation and the two-stage split are the paper's; L = 2^23, n = 16,
// emitting all bytes of a symbol in one cycle, the credit FIFO and all
// handshakes are this design's choices.
module ras_encoder
  import ras_pkg::*;
#(
  parameter int unsigned CREDITS = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // job
  input  logic                 start,
  input  logic [CNT_BITS-1:0]  num_syms,
  input  ptr_t                 base,
  output logic                 busy,
  output logic                 done,
  // symbol stream
  input  logic                 sym_valid,
  input  sym_t                 sym,
  output logic                 sym_ready,
  // CDF-table bus
  output logic                 bus_req,
  output sym_t                 bus_addr,
  input  logic                 bus_gnt,
  input  logic                 bus_rsp_valid,
  input  cdf_pair_t            bus_rdata,
  // low-bit memory bank write
  output logic                 lb_we,
  output logic [1:0]           lb_cnt,
  output ptr_t                 lb_addr,
  output logic [15:0]          lb_data,
  // middle-state memory write
  output logic                 ms_we,
  output ms_entry_t            ms_wdata,
  // observation
  output logic                 starved   // core idle although symbols remain
);

  localparam int unsigned BMAX   = (PROB_BITS + 7) / 8;     // bytes per symbol at most
  localparam int unsigned XSHIFT = $clog2(RANS_L) - PROB_BITS + 8;
  localparam int unsigned FW     = (CREDITS > 1) ? $clog2(CREDITS) : 1;

  typedef enum logic [1:0] {E_IDLE, E_RUN, E_FLUSH} enc_state_e;
  enc_state_e st;

  logic [CNT_BITS-1:0] fetch_left, core_left;
  ptr_t                ptr;
  state_t              a1_q, a2_q;

  // ---------------- prefetch and credit FIFO ----------------
  cdf_pair_t           fifo [CREDITS];
  logic [FW-1:0]       wr_p, rd_p;
  logic [FW:0]         fcount;     // entries in FIFO
  logic                inflight;   // granted, response next cycle
  logic                pop;

  wire [FW:0] used   = fcount + {{FW{1'b0}}, inflight};
  wire        credit = (used < (FW+1)'(CREDITS));

  assign bus_req   = (st == E_RUN) && sym_valid && (fetch_left != '0) && credit;
  assign bus_addr  = sym;
  assign sym_ready = bus_req && bus_gnt;

  // ---------------- stage 1: re-normalise and divide ----------------
  state_t s_cur, s_norm, q;
  freq_t  f, r;
  cum_t   c;
  logic [1:0] nbytes;
  logic [15:0] bytes;

  assign pop   = (st == E_RUN) && (fcount != '0) && (core_left != '0);
  assign s_cur = a1_q + a2_q;                       // stage 2 result
  assign c     = fifo[rd_p].cum;
  assign f     = freq_t'(fifo[rd_p].cum_next - fifo[rd_p].cum);

  always_comb begin
    logic [STATE_BITS:0] xmax;
    xmax   = {1'b0, {(STATE_BITS-PROB_BITS){1'b0}}, f} << XSHIFT;
    s_norm = s_cur;
    nbytes = '0;
    bytes  = '0;
    for (int unsigned b = 0; b < BMAX; b++) begin
      if ({1'b0, s_norm} >= xmax) begin
        bytes[8*b +: 8] = s_norm[7:0];
        s_norm          = s_norm >> 8;
        nbytes          = nbytes + 1'b1;
      end
    end
  end

  ras_divmod u_divmod (.dividend(s_norm), .divisor(f), .quot(q), .rem(r));

  assign lb_we   = pop && (nbytes != '0);
  assign lb_cnt  = nbytes;
  assign lb_addr = ptr;
  assign lb_data = bytes;
  assign starved = (st == E_RUN) && (core_left != '0) && (fcount == '0);
  assign busy    = (st != E_IDLE);

  always_ff @(posedge clk) begin
    if (bus_rsp_valid && inflight) fifo[wr_p] <= bus_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= E_IDLE;
      fetch_left <= '0;
      core_left  <= '0;
      ptr        <= '0;
      a1_q       <= RANS_L;
      a2_q       <= '0;
      wr_p       <= '0;
      rd_p       <= '0;
      fcount     <= '0;
      inflight   <= 1'b0;
      done       <= 1'b0;
      ms_we      <= 1'b0;
      ms_wdata   <= '0;
    end else begin
      done  <= 1'b0;
      ms_we <= 1'b0;
      unique case (st)
        E_IDLE: if (start) begin
          st         <= (num_syms == '0) ? E_FLUSH : E_RUN;
          fetch_left <= num_syms;
          core_left  <= num_syms;
          ptr        <= base;
          a1_q       <= RANS_L;
          a2_q       <= '0;
          wr_p       <= '0;
          rd_p       <= '0;
          fcount     <= '0;
          inflight   <= 1'b0;
        end
        E_RUN: begin
          inflight <= sym_ready;
          if (sym_ready) fetch_left <= fetch_left - 1'b1;
          if (bus_rsp_valid && inflight) wr_p <= (wr_p == FW'(CREDITS-1)) ? '0 : wr_p + 1'b1;
          fcount <= fcount + (FW+1)'(bus_rsp_valid && inflight) - (FW+1)'(pop);
          if (pop) begin
            rd_p      <= (rd_p == FW'(CREDITS-1)) ? '0 : rd_p + 1'b1;
            core_left <= core_left - 1'b1;
            a1_q      <= q << PROB_BITS;
            a2_q      <= STATE_BITS'(r) + STATE_BITS'(c);
            ptr       <= ptr + PTR_BITS'(nbytes);
            if (core_left == CNT_BITS'(1)) st <= E_FLUSH;
          end
        end
        E_FLUSH: begin
          ms_we          <= 1'b1;
          ms_wdata.state <= s_cur;
          ms_wdata.ptr   <= ptr;
          done           <= 1'b1;
          st             <= E_IDLE;
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  // the state always stays in [L, 256*L) between symbols
  always_ff @(posedge clk) begin
    if (rst_n && st == E_RUN && pop) begin
      assert (s_cur >= RANS_L) else $error("ras_encoder: state below L");
      assert (f != '0) else $error("ras_encoder: zero frequency");
    end
  end

endmodule
