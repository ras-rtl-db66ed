// ras_spc: streaming prefetch converter (SPC).
//
// Converts one BF16 distribution from global memory, once, into the
// fixed-point CDF table shared by every encoder and decoder lane.
//   Pass 1 (ALPHABET+1 cycles): stream the selected block out of global
//     memory, convert each entry with ras_bf16_fix to f = max(1,round(p*2^n)),
//     keep f in a local buffer, sum the frequencies and track the largest.
//   Correction (1 cycle): corr = 2^n - sum is added to the largest
//     frequency, so the frequencies sum to exactly 2^n and C stays strictly
//     increasing. If that would drive the largest below 1, the correction is
//     limited and `err` is raised.
//   Pass 2 (ALPHABET+1 cycles): prefix-sum the corrected frequencies and
//     write C(0)=0 .. C(ALPHABET)=2^n into the CDF table.
// The conversion formula and the requirement sum f = 2^n are the paper's; the
// rule that the whole correction goes to the largest symbol, the two-pass
// schedule and the local buffer are this design's choices.
//
// Interface: start (pulse) with sel = distribution block; busy while
// working; done pulses one cycle with the table complete. Global memory read
// latency is one cycle.
module ras_spc
  import ras_pkg::*;
#(
  parameter int unsigned NUM_DISTS = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(NUM_DISTS)-1:0] sel,
  // global memory read port
  output logic [$clog2(NUM_DISTS)-1:0] gm_blk,
  output sym_t                         gm_idx,
  input  bf16_t                        gm_data,
  // CDF table write port
  output logic                         tbl_we,
  output logic [SYM_BITS:0]            tbl_addr,
  output cum_t                         tbl_data,
  // status
  output logic                         busy,
  output logic                         done,
  output logic signed [PROB_BITS+1:0]  corr,
  output logic [SYM_BITS:0]            clamp_count,
  output logic                         err
);

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_CORR, S_CDF} spc_state_e;

  spc_state_e              st;
  logic [SYM_BITS:0]       cnt;        // pass counter 0..ALPHABET
  logic                    rd_valid;   // gm_data belongs to index cnt-1
  freq_t                   fbuf [ALPHABET];
  logic [PROB_BITS+SYM_BITS:0] sum;
  freq_t                   fmax;
  sym_t                    imax;
  cum_t                    acc;
  logic [$clog2(NUM_DISTS)-1:0] sel_q;

  freq_t conv_f;
  logic  conv_clamped;
  ras_bf16_fix u_fix (.bf16(gm_data), .freq(conv_f), .clamped(conv_clamped));

  assign gm_blk = sel_q;
  assign gm_idx = cnt[SYM_BITS-1:0];
  assign busy   = (st != S_IDLE);

  // corrected frequency of entry cnt in pass 2
  freq_t f_corr;
  always_comb begin
    f_corr = fbuf[cnt[SYM_BITS-1:0]];
    if (cnt[SYM_BITS-1:0] == imax) f_corr = freq_t'($signed({1'b0, fmax}) + corr);
  end

  // 2^n - sum and the largest frequency after correction
  logic signed [PROB_BITS+SYM_BITS+2:0] diff, fmax_new;
  always_comb begin
    diff     = $signed({2'b0, (PROB_BITS+SYM_BITS+1)'(2**PROB_BITS)}) - $signed({2'b0, sum});
    fmax_new = diff + $signed({(SYM_BITS+3)'(0), fmax});
  end

  always_ff @(posedge clk) begin
    if (st == S_CONV && rd_valid) fbuf[SYM_BITS'(cnt - 1'b1)] <= conv_f;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      cnt         <= '0;
      rd_valid    <= 1'b0;
      sum         <= '0;
      fmax        <= '0;
      imax        <= '0;
      acc         <= '0;
      sel_q       <= '0;
      done        <= 1'b0;
      corr        <= '0;
      clamp_count <= '0;
      err         <= 1'b0;
      tbl_we      <= 1'b0;
      tbl_addr    <= '0;
      tbl_data    <= '0;
    end else begin
      done   <= 1'b0;
      tbl_we <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st          <= S_CONV;
          sel_q       <= sel;
          cnt         <= '0;
          rd_valid    <= 1'b0;
          sum         <= '0;
          fmax        <= '0;
          imax        <= '0;
          clamp_count <= '0;
          err         <= 1'b0;
        end
        S_CONV: begin
          // address cnt is presented now; data of cnt-1 arrives now
          rd_valid <= (cnt < (SYM_BITS+1)'(ALPHABET));
          if (rd_valid) begin
            sum         <= sum + (PROB_BITS+SYM_BITS+1)'(conv_f);
            clamp_count <= clamp_count + conv_clamped;
            if (conv_f > fmax) begin
              fmax <= conv_f;
              imax <= SYM_BITS'(cnt - 1'b1);
            end
          end
          if (cnt == (SYM_BITS+1)'(ALPHABET)) st <= S_CORR;
          else cnt <= cnt + 1'b1;
        end
        S_CORR: begin
          if (fmax_new < 1 || fmax_new >= 2**PROB_BITS) begin
            corr <= (PROB_BITS+2)'(1) - $signed({2'b0, fmax});
            err  <= 1'b1;
          end else begin
            corr <= (PROB_BITS+2)'(diff);
          end
          cnt <= '0;
          acc <= '0;
          st  <= S_CDF;
        end
        S_CDF: begin
          tbl_we   <= 1'b1;
          tbl_addr <= cnt;
          tbl_data <= acc;
          if (cnt == (SYM_BITS+1)'(ALPHABET)) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end else begin
            acc <= acc + f_corr;
            cnt <= cnt + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
