// mc_cim_top: MC-CIM macro, a compute-in-memory array for Monte-Carlo Dropout.
//
// A 16 x 31 SRAM array stores the weights of NEUR = 2 output neurons as
// bitplanes (one sign row and five magnitude rows each, 6-bit sign-magnitude
// weights). For one input vector (31 sign-magnitude 6-bit activations) the
// macro runs num_iter MC-Dropout iterations; in each, input columns and
// output rows are dropped by a dropout word and the multiplication-free
// product-sum  sum_i sign(x_i)|w_i| + sign(w_i)|x_i|  of every kept neuron is
// computed bitplane by bitplane in the array, digitised by the asymmetric
// SAR xADC and combined by the shift-add. Parts:
//   cim_array              weight storage and in-memory AND / sum line
//   cci_rng x NRNG         SRAM-embedded CCI random bit generators (model)
//   rng_calibrator x NRNG  coarse bias calibration of each RNG
//   dropout_regs           next / current / previous dropout words, reuse masks
//   dropout_schedule_sram  precomputed (ordered) dropout words
//   xadc_sar               asymmetric successive approximation
//   shift_add, reuse_buffer, mcd_controller
// Modes: cr_en selects compute reuse (each iteration evaluates only changed
// columns) or the typical flow; use_sched selects schedule-SRAM dropout words
// (sample ordering) or RNG words; adc_cdf sets the SAR search (linear table:
// symmetric; MAV histogram: asymmetric).
// Host interface: w_we/w_addr/w_data write a weight row; x_load latches the
// activation vector; sched_we writes a schedule word; cal_start calibrates
// all RNGs to cal_target ones out of 500 test bits within cal_tol; start runs
// an input, iter_valid marks each iteration's result, done the last one.
// Array size, precision, RNG count ceil(31 / (2 * 5)) = 4 and 5-bit ADC
// follow the paper; the host interface and the data layout are this design's.
module mc_cim_top
  import mc_cim_pkg::*;
#(
  parameter int unsigned ROWS_P  = ROWS,
  parameter int unsigned COLS_P  = COLS,
  parameter int unsigned NTEST_P = 500,
  parameter int unsigned DEPTH_P = ITERS,
  localparam int unsigned NEUR_P = ROWS_P / NBITS,
  localparam int unsigned NR_P   = (COLS_P + 2*MAGB - 1) / (2*MAGB),
  localparam int unsigned RAW = $clog2(ROWS_P),
  localparam int unsigned MW  = $clog2(COLS_P + 1),
  localparam int unsigned DW  = COLS_P + NEUR_P,
  localparam int unsigned AW  = $clog2(DEPTH_P),
  localparam int unsigned NW  = $clog2(NTEST_P + 1),
  localparam int unsigned IW  = (NEUR_P > 1) ? $clog2(NEUR_P) : 1,
  localparam int unsigned CW  = $clog2(8 + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // weight write port
  input  logic                  w_we,
  input  logic [RAW-1:0]        w_addr,
  input  logic [COLS_P-1:0]     w_data,
  // activation register
  input  logic                  x_load,
  input  logic [COLS_P-1:0]     x_sign_in,
  input  logic [COLS_P-1:0]     x_mag_in [MAGB],
  // dropout schedule write port
  input  logic                  sched_we,
  input  logic [AW-1:0]         sched_waddr,
  input  logic [DW-1:0]         sched_wdata,
  // RNG calibration
  input  logic                  cal_start,
  input  logic [NW-1:0]         cal_target,
  input  logic [NW-1:0]         cal_tol,
  output logic [NR_P-1:0]       cal_done,
  output logic [NR_P-1:0]       cal_fail,
  output logic [CW-1:0]         rng_m_cols [NR_P],
  output logic [CW-1:0]         rng_n_cols [NR_P],
  // inference
  input  logic                  start,
  input  logic [7:0]            num_iter,
  input  logic                  cr_en,
  input  logic                  use_sched,
  input  logic [15:0]           adc_cdf [(1 << MW) + 1],
  output logic                  busy,
  output logic                  done,
  output logic                  iter_valid,
  output logic [7:0]            iter_idx,
  output logic signed [PSW-1:0] result [NEUR_P],
  output logic [NEUR_P-1:0]     result_kept,
  output logic [COLS_P-1:0]     do_in_word,
  output logic [31:0]           n_eval,
  output logic [31:0]           n_skip,
  output logic [31:0]           n_adc_cyc,
  output logic [31:0]           n_reuse_pass,
  output logic [31:0]           n_full_pass,
  output logic [31:0]           n_mac
);
  // activation register
  logic [COLS_P-1:0] x_sign;
  logic [COLS_P-1:0] x_mag [MAGB];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_sign <= '0;
      for (int b = 0; b < MAGB; b++) x_mag[b] <= '0;
    end else if (x_load) begin
      x_sign <= x_sign_in;
      x_mag  <= x_mag_in;
    end
  end

  // RNGs and their calibration
  logic [NR_P-1:0] rng_q, rng_v, cal_en;
  logic            rng_req, cal_active;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         cal_active <= 1'b0;
    else if (cal_start) cal_active <= 1'b1;
    else if (&cal_done) cal_active <= 1'b0;
  end

  for (genvar g = 0; g < NR_P; g++) begin : g_rng
    cci_rng #(.MAXC(8), .SEED(g + 1)) u_rng (
      .clk, .en(cal_en[g] | (rng_req & ~cal_active)),
      .m_cols(rng_m_cols[g]), .n_cols(rng_n_cols[g]),
      .q_rng(rng_q[g]), .q_valid(rng_v[g]));
    rng_calibrator #(.NTEST(NTEST_P), .MAXC(8), .INITC(4)) u_cal (
      .clk, .rst_n, .start(cal_start), .target(cal_target), .tol(cal_tol),
      .rng_en(cal_en[g]), .rng_bit(rng_q[g]), .rng_valid(rng_v[g]),
      .m_cols(rng_m_cols[g]), .n_cols(rng_n_cols[g]),
      .done(cal_done[g]), .fail(cal_fail[g]), .tries());
  end

  // dropout words
  logic              do_adv, do_first, nxt_ready;
  logic [COLS_P-1:0] do_in_cur, do_in_prv, mask_add, mask_sub;
  logic [NEUR_P-1:0] do_out_cur;
  logic [AW-1:0]     sched_raddr;
  logic [DW-1:0]     sched_word;

  dropout_schedule_sram #(.W(DW), .DEPTH(DEPTH_P)) u_sched (
    .clk, .we(sched_we), .wr_addr(sched_waddr), .wr_data(sched_wdata),
    .rd_addr(sched_raddr), .rd_data(sched_word));

  dropout_regs #(.COLS(COLS_P), .NEUR(NEUR_P), .NR(NR_P)) u_do (
    .clk, .rst_n, .rng_bits(rng_q), .rng_valid((&rng_v) & ~cal_active),
    .rng_req, .nxt_ready, .advance(do_adv), .first(do_first),
    .use_sched, .sched_word, .do_in_cur, .do_in_prv, .do_out_cur,
    .mask_add, .mask_sub);
  assign do_in_word = do_in_cur;

  // array, ADC, shift-add, buffer
  logic              eval, rl_mask, adc_start, adc_done, adc_busy;
  logic [RAW-1:0]    rl_sel;
  logic [COLS_P-1:0] cl, pl;
  logic [MW-1:0]     mav, adc_value, adc_code, sa_code;
  logic [MW:0]       adc_ref, sa_pop;
  logic [4:0]        adc_ncyc;
  logic              sa_load, sa_en, sa_sub;
  logic signed [PSW-1:0] sa_base, sa_acc, buf_rdata;
  ev_kind_e          sa_kind;
  logic [2:0]        sa_bit;
  logic              buf_clear, buf_wr, buf_inval, buf_rvalid;
  logic [IW-1:0]     buf_idx;

  cim_array #(.ROWS(ROWS_P), .COLS(COLS_P)) u_array (
    .clk, .wwl_en(w_we), .wwl_addr(w_addr), .wbl(w_data),
    .eval, .rl_sel, .rl_mask, .cl, .pl, .mav);

  xadc_sar #(.BITS(MW), .CDFW(16)) u_adc (
    .clk, .rst_n, .start(adc_start), .value(adc_value), .cdf(adc_cdf),
    .busy(adc_busy), .ref_code(adc_ref), .done(adc_done), .code(adc_code), .ncyc(adc_ncyc));

  shift_add #(.PSW(PSW), .CB(MW), .BW(3)) u_sa (
    .clk, .rst_n, .load(sa_load), .base(sa_base), .en(sa_en), .sub(sa_sub),
    .kind(sa_kind), .bitpos(sa_bit), .code(sa_code), .pop(sa_pop), .acc(sa_acc));

  reuse_buffer #(.NEUR(NEUR_P), .PSW(PSW)) u_buf (
    .clk, .rst_n, .clear(buf_clear), .wr(buf_wr), .inval(buf_inval),
    .idx(buf_idx), .wdata(sa_acc), .rdata(buf_rdata), .rvalid(buf_rvalid));

  mcd_controller #(.COLS(COLS_P), .ROWS(ROWS_P), .NBITS(NBITS), .PSW(PSW), .DEPTH(DEPTH_P)) u_ctl (
    .clk, .rst_n, .start, .num_iter, .cr_en, .use_sched, .busy, .done,
    .x_sign, .x_mag,
    .nxt_ready, .do_advance(do_adv), .do_first, .do_in_cur, .do_out_cur,
    .mask_add, .mask_sub, .sched_addr(sched_raddr),
    .eval, .rl_sel, .rl_mask, .cl, .mav,
    .adc_start, .adc_value, .adc_done, .adc_code,
    .sa_load, .sa_base, .sa_en, .sa_sub, .sa_kind, .sa_bit, .sa_pop, .sa_code, .sa_acc,
    .buf_clear, .buf_wr, .buf_inval, .buf_idx, .buf_rdata, .buf_rvalid,
    .iter_valid, .iter_idx, .result, .result_kept,
    .n_eval, .n_skip, .n_adc_cyc, .n_reuse_pass, .n_full_pass, .n_mac);
endmodule
