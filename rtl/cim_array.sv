// cim_array: 8T-SRAM compute-in-memory array (ROWS x COLS, default 16 x 31).
//
// Write port: when wwl_en is high the row wwl_addr takes the write-bitline
// word wbl at the clock edge (the WWL / WBLL / WBLR port of the 8T cell).
// Compute port: when eval is high, row rl_sel is activated on its row line
// (gated by rl_mask, the output-dropout bit of that row) and each product line
// PL_j discharges when the column-line input cl[j] and the stored bit are both
// one. The PL outputs are averaged on the sum line; here the sum line is
// represented exactly by the number of discharged product lines, mav, which
// maps to V_SLL = VDD - VDD/COLS * mav.
//
// Timing: the paper precharges PL and drives CL in the first half of a clock
// and fires RL in the second; this model folds both halves into one clock, so
// pl and mav are registered and valid the cycle after eval. A gated row
// (rl_mask = 0) leaves all product lines charged: pl = 0, mav = 0.
// Array size follows the paper; the single-edge timing is this design's own.
module cim_array #(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 31,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned MW  = $clog2(COLS + 1)
) (
  input  logic            clk,
  input  logic            wwl_en,
  input  logic [RAW-1:0]  wwl_addr,
  input  logic [COLS-1:0] wbl,
  input  logic            eval,
  input  logic [RAW-1:0]  rl_sel,
  input  logic            rl_mask,
  input  logic [COLS-1:0] cl,
  output logic [COLS-1:0] pl,
  output logic [MW-1:0]   mav
);
  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] prod;
  logic [MW-1:0]   cnt;

  always_ff @(posedge clk) begin
    if (wwl_en) mem[wwl_addr] <= wbl;
  end

  always_comb begin
    prod = (rl_mask ? mem[rl_sel] : '0) & cl;
    cnt  = '0;
    for (int j = 0; j < COLS; j++) cnt = cnt + MW'(prod[j]);
  end

  always_ff @(posedge clk) begin
    if (eval) begin
      pl  <= prod;
      mav <= cnt;
    end
  end
endmodule
