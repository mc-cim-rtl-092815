// reuse_buffer: product-sum buffer for compute reuse.
//
// One signed entry per output neuron holds P_{i-1}, the product-sum of the
// previous iteration, so that iteration i only evaluates the columns whose
// dropout bit changed:  P_i = P_{i-1} + W x I^A_i - W x I^D_i.
// A valid bit per entry says whether P_{i-1} belongs to the previous dropout
// word: clear (new input) empties the buffer, inval marks an entry whose
// neuron was dropped at the output in this iteration (its rows were not
// evaluated, so its entry is stale and the next evaluation is a full one).
// wr stores a new value and sets valid. Reads are combinational.
// The valid-bit handling of output dropout is this design's own choice.
module reuse_buffer #(
  parameter int unsigned NEUR = 2,
  parameter int unsigned PSW  = 16,
  localparam int unsigned IW = (NEUR > 1) ? $clog2(NEUR) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  wr,
  input  logic                  inval,
  input  logic [IW-1:0]         idx,
  input  logic signed [PSW-1:0] wdata,
  output logic signed [PSW-1:0] rdata,
  output logic                  rvalid
);
  logic signed [PSW-1:0] p [NEUR];
  logic [NEUR-1:0]       v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int k = 0; k < NEUR; k++) p[k] <= '0;
    end else if (clear) begin
      v <= '0;
    end else if (wr) begin
      p[idx] <= wdata;
      v[idx] <= 1'b1;
    end else if (inval) begin
      v[idx] <= 1'b0;
    end
  end

  assign rdata  = p[idx];
  assign rvalid = v[idx];
endmodule
