// dropout_schedule_sram: storage for precomputed, ordered dropout schedules.
//
// With sample ordering, the dropout words of all MC-Dropout iterations are
// drawn and ordered offline (shortest tour through the samples, with the
// number of differing bits between two words as distance) and written here;
// during inference they are read out one per iteration instead of using the
// in-array RNGs. DEPTH words of W bits, one synchronous write port and one
// synchronous read port: rd_data is the word at rd_addr of the previous
// clock. The paper says only that such an SRAM holds the schedules and is
// read sequentially; its size (one word per iteration, 30 iterations) and
// ports are this design's choices.
module dropout_schedule_sram #(
  parameter int unsigned W     = 33,
  parameter int unsigned DEPTH = 30,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
