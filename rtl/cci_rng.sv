// cci_rng: behavioural model of the SRAM-embedded cross-coupled-inverter RNG.
// This is a behavioural model of an analog circuit (written in synthesizable
// form, but not a design of the circuit itself): the real part is an
// analog CCI whose two ends are precharged (PCH), discharged for half a clock
// by the summed write-port leakage and noise of the SRAM bitline columns tied
// to each end, and then resolved by pull-downs on the delayed precharge
// (PCHD). Tying more columns to one end changes the race and so the bias.
//
// Model: each instance has a fixed mismatch offset, spread uniformly over
// +-0.35 by a hash of SEED (the spread of an uncalibrated CCI in the paper),
// and
//   p1 = 0.5 + 0.06 * (n_cols - m_cols) + offset, clipped to [0.02, 0.98].
// All probabilities are 16-bit fixed point (65536 = 1.0). The noise of the
// race is a 32-bit xorshift generator stepped once per enabled clock; the
// output bit is 1 when its low 16 bits are below p1. When en is high, one
// bit is produced per clock, valid the next cycle (q_valid). The generator
// state starts from the seed at power-up, so the model needs no reset. The slope per column and the direction of the effect are this
// model's own assumptions; the paper gives only the calibration principle.
module cci_rng #(
  parameter int unsigned MAXC = 8,
  parameter int unsigned SEED = 1,
  localparam int unsigned CW = $clog2(MAXC + 1)
) (
  input  logic          clk,
  input  logic          en,
  input  logic [CW-1:0] m_cols,
  input  logic [CW-1:0] n_cols,
  output logic          q_rng,
  output logic          q_valid
);
  localparam logic [31:0] HASH = 32'(SEED * 32'd2654435761 + 32'd12345);
  // mismatch offset in units of 1/65536: (HASH mod 1001 - 500) * 0.7 / 1000
  localparam int OFFSET_Q16 = ((int'(HASH % 32'd1001) - 500) * 45875) / 1000;
  localparam int HALF_Q16   = 32768;
  localparam int SLOPE_Q16  = 3932;    // 0.06 per column
  localparam int PMIN_Q16   = 1311;    // 0.02
  localparam int PMAX_Q16   = 64225;   // 0.98

  logic [31:0] st = HASH | 32'd1;
  logic [31:0] st_next;
  int          p1_raw;
  logic [15:0] p1_q16;

  always_comb begin
    p1_raw = HALF_Q16 + SLOPE_Q16 * (int'(n_cols) - int'(m_cols)) + OFFSET_Q16;
    if (p1_raw < PMIN_Q16)      p1_q16 = 16'(PMIN_Q16);
    else if (p1_raw > PMAX_Q16) p1_q16 = 16'(PMAX_Q16);
    else                        p1_q16 = 16'(p1_raw);
    st_next = st ^ (st << 13);
    st_next = st_next ^ (st_next >> 17);
    st_next = st_next ^ (st_next << 5);
  end

  logic q_rng_r = 1'b0, q_valid_r = 1'b0;
  always_ff @(posedge clk) begin
    q_valid_r <= en;
    if (en) begin
      st      <= st_next;
      q_rng_r <= st_next[15:0] < p1_q16;
    end
  end
  assign q_rng   = q_rng_r;
  assign q_valid = q_valid_r;
endmodule
