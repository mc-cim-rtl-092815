// shift_add: digital shift-add of the bitplane evaluations.
//
// The operator  sum_i sign(x_i)|w_i| + sign(w_i)|x_i|  is evaluated per
// magnitude bitplane b from three array counts (signs are +-1, encoded with
// sign bit 1 = negative):
//   EV_POSX: count of |w|_b over kept columns with x >= 0  -> +count << b
//   EV_NEGX: count of |w|_b over kept columns with x < 0   -> -count << b
//   EV_NEGW: count of |x|_b over kept columns with w < 0   -> (pop - 2*count) << b
// where pop is the number of kept columns whose |x| has bit b set, known
// digitally at the input driver. load sets the accumulator to base (0, or
// the previous product-sum under compute reuse); en adds one term, negated
// when sub is set (the cycle-2 pass of compute reuse). acc is registered.
// Splitting the sign(x)|w| term into two counts is this design's way of
// getting a signed sum from a sum line that only counts discharges.
module shift_add
#(
  parameter int unsigned PSW  = 16,
  parameter int unsigned CB   = 5,
  parameter int unsigned BW   = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic signed [PSW-1:0] base,
  input  logic                  en,
  input  logic                  sub,
  input  mc_cim_pkg::ev_kind_e              kind,
  input  logic [BW-1:0]         bitpos,
  input  logic [CB-1:0]         code,
  input  logic [CB:0]           pop,
  output logic signed [PSW-1:0] acc
);
  import mc_cim_pkg::*;
  logic signed [PSW-1:0] unit, term;

  always_comb begin
    unique case (kind)
      EV_POSX: unit = PSW'(signed'({1'b0, code}));
      EV_NEGX: unit = -PSW'(signed'({1'b0, code}));
      EV_NEGW: unit = PSW'(signed'({1'b0, pop})) - (PSW'(signed'({1'b0, code})) <<< 1);
      default: unit = '0;
    endcase
    term = unit <<< bitpos;
    if (sub) term = -term;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc <= '0;
    else if (load) acc <= base;
    else if (en)   acc <= acc + term;
  end
endmodule
