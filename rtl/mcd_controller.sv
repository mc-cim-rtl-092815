// mcd_controller: sequencer of MC-Dropout inference on the CIM array.
//
// For one input vector it runs num_iter dropout iterations. Each iteration:
//  1. takes a new dropout word (from the RNG-filled register, waiting until
//     it is full, or from the schedule SRAM, one read cycle);
//  2. for every output neuron k kept by the output dropout bits:
//     - typical flow (cr_en = 0, or no valid previous value): one pass with
//       mask DO_i, starting from 0;
//     - compute reuse (cr_en = 1): starting from P_{i-1}, an adding pass with
//       mask DO_i & ~DO_{i-1} and a subtracting pass with ~DO_i & DO_{i-1};
//     every pass runs, for each magnitude bitplane b, the three array
//     evaluations of the operator (see shift_add); an evaluation whose
//     column-line word is all zero is skipped, since its count is 0;
//     every other evaluation is one array cycle, one ADC start cycle and the
//     ADC's compares;
//     a neuron dropped at the output gives 0 and its row line stays gated;
//  3. presents all product-sums on result with iter_valid for one cycle.
// Rows of neuron k: k*NBITS holds sign(w) (1 = negative), k*NBITS+1+b holds
// bit b of |w|. Inputs are sign-magnitude: x_sign (1 = negative), x_mag[b].
// The counters count evaluations done and skipped, ADC compares, passes and
// column activations (n_mac: driven column lines summed over evaluations).
// The flow follows the paper's compute reuse (two cycles per iteration: newly
// active, then newly dropped) and its row/column dropout; the three
// evaluations per bitplane, the skip of empty evaluations and the serial
// (non-pipelined) ADC are this design's choices.
// adc_value is the array count mav passed straight through: the controller
// owns the sample point of the conversion, so the ADC's input is wired here
// rather than at the top level.
module mcd_controller
#(
  parameter int unsigned COLS  = 31,
  parameter int unsigned ROWS  = 16,
  parameter int unsigned NBITS = 6,
  parameter int unsigned PSW   = 16,
  parameter int unsigned DEPTH = 30,
  localparam int unsigned MAGB = NBITS - 1,
  localparam int unsigned NEUR = ROWS / NBITS,
  localparam int unsigned RAW  = $clog2(ROWS),
  localparam int unsigned MW   = $clog2(COLS + 1),
  localparam int unsigned IW   = (NEUR > 1) ? $clog2(NEUR) : 1,
  localparam int unsigned BW   = (MAGB > 1) ? $clog2(MAGB) : 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  start,
  input  logic [7:0]            num_iter,
  input  logic                  cr_en,
  input  logic                  use_sched,
  output logic                  busy,
  output logic                  done,
  // input activations (sign-magnitude)
  input  logic [COLS-1:0]       x_sign,
  input  logic [COLS-1:0]       x_mag [MAGB],
  // dropout registers
  input  logic                  nxt_ready,
  output logic                  do_advance,
  output logic                  do_first,
  input  logic [COLS-1:0]       do_in_cur,
  input  logic [NEUR-1:0]       do_out_cur,
  input  logic [COLS-1:0]       mask_add,
  input  logic [COLS-1:0]       mask_sub,
  output logic [AW-1:0]         sched_addr,
  // array
  output logic                  eval,
  output logic [RAW-1:0]        rl_sel,
  output logic                  rl_mask,
  output logic [COLS-1:0]       cl,
  input  logic [MW-1:0]         mav,
  // ADC
  output logic                  adc_start,
  output logic [MW-1:0]         adc_value,
  input  logic                  adc_done,
  input  logic [MW-1:0]         adc_code,
  // shift-add
  output logic                  sa_load,
  output logic signed [PSW-1:0] sa_base,
  output logic                  sa_en,
  output logic                  sa_sub,
  output mc_cim_pkg::ev_kind_e              sa_kind,
  output logic [BW-1:0]         sa_bit,
  output logic [MW:0]           sa_pop,
  output logic [MW-1:0]         sa_code,
  input  logic signed [PSW-1:0] sa_acc,
  // reuse buffer
  output logic                  buf_clear,
  output logic                  buf_wr,
  output logic                  buf_inval,
  output logic [IW-1:0]         buf_idx,
  input  logic signed [PSW-1:0] buf_rdata,
  input  logic                  buf_rvalid,
  // results
  output logic                  iter_valid,
  output logic [7:0]            iter_idx,
  output logic signed [PSW-1:0] result [NEUR],
  output logic [NEUR-1:0]       result_kept,
  // statistics
  output logic [31:0]           n_eval,
  output logic [31:0]           n_skip,
  output logic [31:0]           n_adc_cyc,
  output logic [31:0]           n_reuse_pass,
  output logic [31:0]           n_full_pass,
  output logic [31:0]           n_mac
);
  import mc_cim_pkg::*;
  typedef enum logic [3:0] {
    S_IDLE, S_WAIT_DO, S_SCHED_RD, S_ADV, S_NEU, S_EVSET, S_ADCST, S_ADCW,
    S_ACC, S_STEP, S_NEUDONE, S_ITERDONE
  } st_e;
  st_e st;

  logic [7:0]     it;
  logic [IW-1:0]  nk;
  logic           pass;      // 0: first pass (add), 1: second pass (subtract)
  logic           two_pass;
  logic [BW-1:0]  b;
  ev_kind_e       kind;
  logic [MW-1:0]  code_q;
  logic [COLS-1:0] pmask;
  logic [COLS-1:0] cl_w;
  logic [MW:0]     pop_w;

  // column-line word and row of the current evaluation
  always_comb begin
    pmask = two_pass ? (pass ? mask_sub : mask_add) : do_in_cur;
    unique case (kind)
      EV_NEGX: cl_w = pmask & x_sign;
      EV_POSX: cl_w = pmask & ~x_sign;
      default: cl_w = pmask & x_mag[b];
    endcase
    pop_w = '0;
    for (int j = 0; j < COLS; j++) pop_w = pop_w + (MW+1)'(cl_w[j]);
  end

  assign cl      = cl_w;
  assign rl_sel  = (kind == EV_NEGW) ? RAW'(nk * NBITS) : RAW'(nk * NBITS + 1 + b);
  assign rl_mask = do_out_cur[nk];
  assign eval    = (st == S_EVSET) && (cl_w != '0);
  assign adc_start = (st == S_ADCST);
  assign adc_value = mav;
  assign sa_sub  = pass;
  assign sa_kind = kind;
  assign sa_bit  = b;
  assign sa_en   = (st == S_ACC);
  assign buf_idx   = nk;
  assign buf_clear = (st == S_IDLE) && start;
  assign buf_inval = (st == S_NEU) && !do_out_cur[nk];
  assign buf_wr    = (st == S_NEUDONE) && result_kept[nk];
  assign busy    = (st != S_IDLE);
  assign sched_addr = AW'(it);
  assign do_advance = (st == S_ADV);
  assign do_first   = (it == 8'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; it <= '0; nk <= '0; pass <= 1'b0; two_pass <= 1'b0; b <= '0;
      kind <= EV_NEGX; code_q <= '0; sa_pop <= '0; done <= 1'b0; iter_valid <= 1'b0;
      iter_idx <= '0; result_kept <= '0; sa_load <= 1'b0; sa_base <= '0;
      n_eval <= '0; n_skip <= '0; n_adc_cyc <= '0; n_reuse_pass <= '0; n_full_pass <= '0; n_mac <= '0;
      for (int k = 0; k < NEUR; k++) result[k] <= '0;
    end else begin
      done <= 1'b0; iter_valid <= 1'b0; sa_load <= 1'b0;
      if (st == S_ADCW && !adc_done) n_adc_cyc <= n_adc_cyc + 1'b1;
      unique case (st)
        S_IDLE: if (start) begin
          it <= '0;
          n_eval <= '0; n_skip <= '0; n_adc_cyc <= '0; n_reuse_pass <= '0; n_full_pass <= '0; n_mac <= '0;
          st <= S_WAIT_DO;
        end
        S_WAIT_DO: if (use_sched) st <= S_SCHED_RD;
                   else if (nxt_ready) st <= S_ADV;
        S_SCHED_RD: st <= S_ADV;
        S_ADV: begin nk <= '0; st <= S_NEU; end
        S_NEU: begin
          pass <= 1'b0; b <= '0; kind <= EV_NEGX;
          if (!do_out_cur[nk]) begin
            result[nk] <= '0;
            result_kept[nk] <= 1'b0;
            st <= S_NEUDONE;
          end else begin
            result_kept[nk] <= 1'b1;
            two_pass <= cr_en && buf_rvalid;
            sa_load  <= 1'b1;
            sa_base  <= (cr_en && buf_rvalid) ? buf_rdata : '0;
            if (cr_en && buf_rvalid) n_reuse_pass <= n_reuse_pass + 1'b1;
            else                     n_full_pass  <= n_full_pass + 1'b1;
            st <= S_EVSET;
          end
        end
        S_EVSET: begin
          sa_pop <= pop_w;
          if (cl_w == '0) begin
            n_skip <= n_skip + 1'b1;
            st <= S_STEP;
          end else begin
            n_eval <= n_eval + 1'b1;
            n_mac  <= n_mac + 32'(pop_w);
            st <= S_ADCST;
          end
        end
        S_ADCST: st <= S_ADCW;
        S_ADCW: if (adc_done) begin code_q <= adc_code; st <= S_ACC; end
        S_ACC: st <= S_STEP;
        S_STEP: begin
          st <= S_EVSET;
          if (kind != EV_NEGW) kind <= ev_kind_e'(kind + 2'd1);
          else begin
            kind <= EV_NEGX;
            if (b != BW'(MAGB - 1)) b <= b + 1'b1;
            else begin
              b <= '0;
              if (two_pass && !pass) pass <= 1'b1;
              else st <= S_NEUDONE;
            end
          end
        end
        S_NEUDONE: begin
          if (result_kept[nk]) result[nk] <= sa_acc;
          if (nk == IW'(NEUR - 1)) st <= S_ITERDONE;
          else begin nk <= nk + 1'b1; st <= S_NEU; end
        end
        S_ITERDONE: begin
          iter_valid <= 1'b1;
          iter_idx   <= it;
          it <= it + 1'b1;
          if (it + 1'b1 == num_iter) begin done <= 1'b1; st <= S_IDLE; end
          else st <= S_WAIT_DO;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign sa_code = code_q;
endmodule
