// xadc_sar: asymmetric successive-approximation logic of the SRAM-immersed ADC.
//
// The sum-line value to be converted is the number of discharged product
// lines, 0 .. 2^BITS - 1 (31 columns give 32 levels, i.e. a 5-bit conversion).
// A conversion keeps an interval [lo, hi) of codes still possible. Each clock
// one reference level is compared with the sampled value and the interval is
// halved at that level. A conventional SAR places the reference in the middle
// of the interval (BITS cycles per conversion). The asymmetric search places
// it where it splits the expected distribution of the value in two equal
// halves (iso-partition), so that frequent codes resolve in fewer cycles and
// rare ones in more. The distribution is given as a cumulative table cdf[k] =
// expected count of values below k (cdf[0] = 0, cdf[2^BITS] = total); the
// reference for [lo, hi) is the smallest k in (lo, hi) with
// cdf[k] >= (cdf[lo] + cdf[hi]) / 2, or hi - 1 if none is. A linear table
// (cdf[k] = k) gives the conventional symmetric search.
//
// In the chip the reference comes from the bitline capacitance of a
// neighbouring array and the compare is an analog comparator; here the
// compare is the exact integer compare value >= reference. The search rule
// is this design's reading of the paper's "reference levels ... iso-partition
// the distribution segment"; the table format is its own choice.
//
// Interface: start (one cycle) samples value; ref_code shows the reference of
// the current cycle; done pulses for one cycle with code and ncyc (compares
// used). busy is high from the cycle after start until done.
module xadc_sar #(
  parameter int unsigned BITS = 5,
  parameter int unsigned CDFW = 16,
  localparam int unsigned NL = 1 << BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [BITS-1:0] value,
  input  logic [CDFW-1:0] cdf [NL+1],
  output logic            busy,
  output logic [BITS:0]   ref_code,
  output logic            done,
  output logic [BITS-1:0] code,
  output logic [4:0]      ncyc
);
  logic [BITS-1:0] val_s;
  logic [BITS:0]   lo, hi;
  logic [CDFW:0]   tgt;
  logic [BITS:0]   split;
  logic            cmp;
  logic            found;

  always_comb begin
    tgt   = ({1'b0, cdf[lo]} + {1'b0, cdf[hi]}) >> 1;
    split = hi - 1'b1;
    found = 1'b0;
    for (int k = 1; k < NL; k++) begin
      if (!found && (BITS+1)'(k) > lo && (BITS+1)'(k) < hi && {1'b0, cdf[k]} >= tgt) begin
        split = (BITS+1)'(k);
        found = 1'b1;
      end
    end
    cmp = {1'b0, val_s} >= split;
  end

  assign ref_code = split;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; lo <= '0; hi <= '0; val_s <= '0; code <= '0; ncyc <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        val_s <= value;
        lo    <= '0;
        hi    <= (BITS+1)'(NL);
        ncyc  <= '0;
      end else if (busy) begin
        ncyc <= ncyc + 1'b1;
        if (cmp) lo <= split; else hi <= split;
        if ((cmp && hi - split == 1) || (!cmp && split - lo == 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          code <= cmp ? split[BITS-1:0] : lo[BITS-1:0];
        end
      end
    end
  end


  a_interval: assert property (@(posedge clk) disable iff (!rst_n) busy |-> hi > lo + 1);

endmodule
