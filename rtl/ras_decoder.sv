// ras_decoder: prediction-guided rANS decoder of one lane.
//
// Recovers one pixel plane in raster order from the state and byte pointer
// the encoder left in the middle-state memory. Per symbol:
//   1. PRED: slot = s mod 2^n. The predictor proposes an anchor mu from the
//      decoded neighbourhood and the search bracket [mu-DELTA, mu+DELTA].
//   2. SEARCH: binary search for the largest x in the bracket with
//      C(x) <= slot, one CDF probe per cycle: the next probe address is
//      formed in the cycle the previous answer returns. The bracket is
//      assumed to hold the symbol; nothing is committed yet.
//   3. VERIFY: the candidate x is checked with one read of (C(x), C(x+1)):
//      C(x) <= slot < C(x+1). A hit commits the speculative result and skips
//      the full search. A miss discards it (the state was never touched, so
//      the restore is free) and the search restarts over the whole alphabet,
//      which always ends in a hit.
//   4. UPDATE: s = f * floor(s / 2^n) + slot - C(x), then byte
//      re-normalisation pops up to two bytes from the low-bit memory while
//      s < L, all in one cycle; the pixel is offered on pix_valid/pix_ready
//      and written to the history buffer.
// A symbol therefore costs 4 + (number of probes) cycles plus bus waits.
// Counters report the probes (binary-search steps), hits and misses. The
// predict-verify-fallback scheme and the window come from the paper; the
// fallback to the full alphabet, the cycle schedule and the counters are
// this design's choices.
//
// Interface: start with num_syms and width; ms_rdata must hold the job's
// middle-state entry in the start cycle. lb_raddr points just above the next
// byte to pop; lb_rdata = {byte at lb_raddr-1, byte at lb_raddr-2}.
module ras_decoder
  import ras_pkg::*;
#(
  parameter int unsigned DELTA = 8,
  parameter int unsigned MAX_W = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // job
  input  logic                 start,
  input  logic [CNT_BITS-1:0]  num_syms,
  input  logic [COL_BITS-1:0]  width,
  input  ms_entry_t            ms_rdata,
  output logic                 busy,
  output logic                 done,
  // CDF-table bus
  output logic                 bus_req,
  output sym_t                 bus_addr,
  input  logic                 bus_gnt,
  input  logic                 bus_rsp_valid,
  input  cdf_pair_t            bus_rdata,
  // low-bit memory bank read
  output ptr_t                 lb_raddr,
  input  logic [15:0]          lb_rdata,
  // decoded pixels
  output logic                 pix_valid,
  output sym_t                 pix,
  input  logic                 pix_ready,
  // statistics since start
  output logic [31:0]          probes,
  output logic [31:0]          hits,
  output logic [31:0]          misses
);

  typedef enum logic [2:0] {D_IDLE, D_PRED, D_SEARCH, D_UPDATE} dec_state_e;
  dec_state_e st;

  state_t              x;
  ptr_t                ptr;
  logic [CNT_BITS-1:0] left;
  logic [ROW_BITS-1:0] row;
  logic [COL_BITS-1:0] col;
  logic [1:0]          slot_row;   // row mod 3
  sym_t                lo, hi;
  logic                spec;       // searching inside the predicted bracket
  logic                pending;    // a request was granted, answer this cycle
  logic                pend_verify;
  sym_t                pend_addr;
  sym_t                sym_q;
  cum_t                cum_q;
  freq_t               f_q;

  wire freq_t slot = x[PROB_BITS-1:0];

  // ---------------- history and predictor ----------------
  sym_t nbr [8];
  logic nbr_ok, last_ok;
  sym_t last, mu, w_lo, w_hi;

  ras_history_mem #(.MAX_W(MAX_W)) u_hist (
    .clk, .we(st == D_UPDATE && pix_ready), .wslot(slot_row), .wcol(col), .wdata(sym_q),
    .slot(slot_row), .row, .col, .nbr, .nbr_ok, .last, .last_ok
  );
  ras_predictor #(.DELTA(DELTA)) u_pred (
    .nbr, .nbr_ok, .last, .last_ok, .mu, .lo(w_lo), .hi(w_hi)
  );

  // ---------------- search step ----------------
  // bracket after this cycle's answer, and the request that follows from it
  sym_t lo_n, hi_n;
  logic spec_n, verify_ok, verify_bad, req_verify;
  logic [SYM_BITS:0] mid_sum;

  always_comb begin
    lo_n       = lo;
    hi_n       = hi;
    spec_n     = spec;
    verify_ok  = 1'b0;
    verify_bad = 1'b0;
    if (st == D_SEARCH && pending && bus_rsp_valid) begin
      if (pend_verify) begin
        if (bus_rdata.cum <= {1'b0, slot} && {1'b0, slot} < bus_rdata.cum_next) begin
          verify_ok = 1'b1;
        end else begin
          verify_bad = 1'b1;     // only possible while speculating
          lo_n       = '0;
          hi_n       = SYM_BITS'(ALPHABET - 1);
          spec_n     = 1'b0;
        end
      end else if (bus_rdata.cum <= {1'b0, slot}) begin
        lo_n = pend_addr;
      end else begin
        hi_n = pend_addr - 1'b1;
      end
    end
    mid_sum    = ({1'b0, lo_n} + {1'b0, hi_n} + 1'b1) >> 1;
    req_verify = (lo_n == hi_n);
    bus_addr   = req_verify ? lo_n : mid_sum[SYM_BITS-1:0];
    bus_req    = (st == D_SEARCH) && !verify_ok && (!pending || bus_rsp_valid);
  end

  // ---------------- state update and re-normalisation ----------------
  state_t x_new;
  logic [1:0] npop;
  always_comb begin
    x_new = STATE_BITS'(f_q) * (x >> PROB_BITS) + STATE_BITS'(slot) - STATE_BITS'(cum_q);
    npop  = '0;
    if (x_new < RANS_L) begin
      x_new = {x_new[STATE_BITS-9:0], lb_rdata[15:8]};
      npop  = 2'd1;
      if (x_new < RANS_L) begin
        x_new = {x_new[STATE_BITS-9:0], lb_rdata[7:0]};
        npop  = 2'd2;
      end
    end
  end

  assign lb_raddr  = ptr;
  assign pix_valid = (st == D_UPDATE);
  assign pix       = sym_q;
  assign busy      = (st != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= D_IDLE;
      x           <= RANS_L;
      ptr         <= '0;
      left        <= '0;
      row         <= '0;
      col         <= '0;
      slot_row    <= '0;
      lo          <= '0;
      hi          <= '0;
      spec        <= 1'b0;
      pending     <= 1'b0;
      pend_verify <= 1'b0;
      pend_addr   <= '0;
      sym_q       <= '0;
      cum_q       <= '0;
      f_q         <= '0;
      done        <= 1'b0;
      probes      <= '0;
      hits        <= '0;
      misses      <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (start) begin
          x        <= ms_rdata.state;
          ptr      <= ms_rdata.ptr;
          left     <= num_syms;
          row      <= '0;
          col      <= '0;
          slot_row <= '0;
          probes   <= '0;
          hits     <= '0;
          misses   <= '0;
          if (num_syms == '0) done <= 1'b1;
          else st <= D_PRED;
        end
        D_PRED: begin
          lo      <= w_lo;
          hi      <= w_hi;
          spec    <= 1'b1;
          pending <= 1'b0;
          st      <= D_SEARCH;
        end
        D_SEARCH: begin
          lo   <= lo_n;
          hi   <= hi_n;
          spec <= spec_n;
          if (verify_ok) begin
            sym_q   <= pend_addr;
            cum_q   <= bus_rdata.cum;
            f_q     <= freq_t'(bus_rdata.cum_next - bus_rdata.cum);
            pending <= 1'b0;
            if (spec) hits <= hits + 1'b1;
            st <= D_UPDATE;
          end else begin
            if (verify_bad) misses <= misses + 1'b1;
            if (bus_req && bus_gnt) begin
              pending     <= 1'b1;
              pend_verify <= req_verify;
              pend_addr   <= bus_addr;
              if (!req_verify) probes <= probes + 1'b1;
            end else begin
              pending <= 1'b0;
            end
          end
        end
        D_UPDATE: if (pix_ready) begin
          x    <= x_new;
          ptr  <= ptr - PTR_BITS'(npop);
          left <= left - 1'b1;
          if (col == width - 1'b1) begin
            col      <= '0;
            row      <= row + 1'b1;
            slot_row <= (slot_row == 2'd2) ? 2'd0 : slot_row + 2'd1;
          end else begin
            col <= col + 1'b1;
          end
          if (left == CNT_BITS'(1)) begin
            st   <= D_IDLE;
            done <= 1'b1;
          end else begin
            st <= D_PRED;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && st == D_UPDATE && pix_ready) begin
      assert (x_new >= RANS_L) else $error("ras_decoder: state below L after re-normalisation");
      assert (f_q != '0) else $error("ras_decoder: zero frequency");
    end
    if (rst_n && st == D_SEARCH && verify_bad)
      assert (spec) else $error("ras_decoder: full search failed verification");
  end

endmodule
