// dropout_regs: input/output dropout bit registers with compute-reuse masks.
//
// Holds three dropout words of W = COLS + NEUR bits (bit j < COLS: input
// column j, bit COLS + k: output neuron k; 1 = neuron kept, 0 = dropped):
//   nxt  - being filled for the next iteration while the current one runs,
//          NR bits per clock from the parallel RNGs (shifted in at the top);
//   cur  - DO_i, the word of the running iteration;
//   prv  - DO_{i-1}, the word of the previous iteration.
// advance moves nxt (or, with use_sched, the schedule word sched_word) into
// cur and cur into prv; with first also set, prv is cleared, so that the
// first iteration of a new input sees every kept column as newly active.
// The compute-reuse masks of the paper follow combinationally:
//   mask_add = DO_i & ~DO_{i-1}  (cycle-1: active now, dropped before)
//   mask_sub = ~DO_i & DO_{i-1}  (cycle-2: dropped now, active before)
// rng_req asks the RNGs for bits until nxt holds W fresh bits (nxt_ready).
// The word layout, the fill order and the first-iteration clear are this
// design's choices; the pipelining of bit generation with the current frame
// and the two mask functions follow the paper.
module dropout_regs #(
  parameter int unsigned COLS = 31,
  parameter int unsigned NEUR = 2,
  parameter int unsigned NR   = 4,
  localparam int unsigned W  = COLS + NEUR,
  localparam int unsigned FW = $clog2(W + NR + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NR-1:0]   rng_bits,
  input  logic            rng_valid,
  output logic            rng_req,
  output logic            nxt_ready,
  input  logic            advance,
  input  logic            first,
  input  logic            use_sched,
  input  logic [W-1:0]    sched_word,
  output logic [COLS-1:0] do_in_cur,
  output logic [COLS-1:0] do_in_prv,
  output logic [NEUR-1:0] do_out_cur,
  output logic [COLS-1:0] mask_add,
  output logic [COLS-1:0] mask_sub
);
  logic [W-1:0]  nxt, cur, prv;
  logic [FW-1:0] fill;
  logic [W+NR-1:0] shifted;

  assign nxt_ready = fill >= FW'(W);
  assign rng_req   = !nxt_ready;
  assign shifted   = {rng_bits, nxt};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nxt <= '0; cur <= '0; prv <= '0; fill <= '0;
    end else begin
      if (advance) begin
        cur <= use_sched ? sched_word : nxt;
        prv <= first ? '0 : cur;
        if (!use_sched) fill <= '0;
      end else if (rng_valid && !nxt_ready) begin
        nxt  <= shifted[W+NR-1:NR];
        fill <= fill + FW'(NR);
      end
    end
  end

  assign do_in_cur  = cur[COLS-1:0];
  assign do_in_prv  = prv[COLS-1:0];
  assign do_out_cur = cur[W-1:COLS];
  assign mask_add   = do_in_cur & ~do_in_prv;
  assign mask_sub   = ~do_in_cur & do_in_prv;
endmodule
