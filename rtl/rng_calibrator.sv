// rng_calibrator: coarse dropout-probability calibration of one CCI RNG.
//
// Follows the flow chart of the paper: start with equal column counts on both
// CCI ends (N = M = INITC), generate NTEST test dropout bits, count the ones
// and compare the estimate with the target bias: if |ones - target| < tol the
// RNG is calibrated (done), otherwise one column count is changed by one and
// the test is repeated. The Toggle bit chooses which count changes (0: N,
// 1: M) and flips after every adjustment, as the chart's "Toggle=0->1" arcs
// show. Target and tolerance are given as counts out of NTEST
// (target = pT * NTEST, tol = tolerance * NTEST).
//
// The chart does not print which branch belongs to p1 above or below the
// target. This design moves the bias towards the target under the model in
// which p1 rises with N - M: p1 too high -> N-1 or M+1, p1 too low -> N+1 or
// M-1. When a count would leave [0, MAXC] the other count is moved instead.
// If MAXTRY tests pass without success, fail is raised with done.
//
// Interface: pulse start; rng_en is high while test bits are generated; bits
// come back on rng_bit/rng_valid one cycle later; m_cols/n_cols drive the
// RNG; done (with fail) is held until the next start.
module rng_calibrator #(
  parameter int unsigned NTEST  = 500,
  parameter int unsigned MAXC   = 8,
  parameter int unsigned INITC  = 4,
  parameter int unsigned MAXTRY = 32,
  localparam int unsigned CW = $clog2(MAXC + 1),
  localparam int unsigned NW = $clog2(NTEST + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] target,
  input  logic [NW-1:0] tol,
  output logic          rng_en,
  input  logic          rng_bit,
  input  logic          rng_valid,
  output logic [CW-1:0] m_cols,
  output logic [CW-1:0] n_cols,
  output logic          done,
  output logic          fail,
  output logic [7:0]    tries
);
  typedef enum logic [1:0] {S_IDLE, S_GEN, S_DRAIN, S_EVAL} st_e;
  st_e st;
  logic [NW-1:0] sent, got, ones;
  logic          toggle;
  logic          hi;
  logic [NW:0]   diff;

  always_comb begin
    hi   = ones > target;
    diff = hi ? ({1'b0, ones} - {1'b0, target}) : ({1'b0, target} - {1'b0, ones});
  end

  assign rng_en = (st == S_GEN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; sent <= '0; got <= '0; ones <= '0; toggle <= 1'b0;
      m_cols <= CW'(INITC); n_cols <= CW'(INITC); done <= 1'b0; fail <= 1'b0; tries <= '0;
    end else begin
      if (rng_valid && st != S_IDLE && st != S_EVAL) begin
        got  <= got + 1'b1;
        ones <= ones + NW'(rng_bit);
      end
      unique case (st)
        S_IDLE: if (start) begin
          m_cols <= CW'(INITC); n_cols <= CW'(INITC); toggle <= 1'b0;
          done <= 1'b0; fail <= 1'b0; tries <= '0;
          sent <= '0; got <= '0; ones <= '0; st <= S_GEN;
        end
        S_GEN: begin
          sent <= sent + 1'b1;
          if (sent == NW'(NTEST - 1)) st <= S_DRAIN;
        end
        S_DRAIN: if (got == NW'(NTEST) || (rng_valid && got == NW'(NTEST - 1))) st <= S_EVAL;
        S_EVAL: begin
          tries <= tries + 1'b1;
          if ({1'b0, diff} < {1'b0, 1'b0, tol}) begin
            done <= 1'b1; st <= S_IDLE;
          end else if (tries == 8'(MAXTRY - 1)) begin
            done <= 1'b1; fail <= 1'b1; st <= S_IDLE;
          end else begin
            // hi: lower p1 (N-1 or M+1); lo: raise p1 (N+1 or M-1)
            if (!toggle) begin
              if (hi && n_cols != 0)                 n_cols <= n_cols - 1'b1;
              else if (hi)                           m_cols <= m_cols + 1'b1;
              else if (n_cols != CW'(MAXC))          n_cols <= n_cols + 1'b1;
              else                                   m_cols <= m_cols - 1'b1;
            end else begin
              if (hi && m_cols != CW'(MAXC))         m_cols <= m_cols + 1'b1;
              else if (hi)                           n_cols <= n_cols - 1'b1;
              else if (m_cols != 0)                  m_cols <= m_cols - 1'b1;
              else                                   n_cols <= n_cols + 1'b1;
            end
            toggle <= ~toggle;
            sent <= '0; got <= '0; ones <= '0; st <= S_GEN;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
