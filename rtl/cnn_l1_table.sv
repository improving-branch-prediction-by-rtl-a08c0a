// cnn_l1_table: Layer-1 response table T of the CNN helper.
//
// A branch enters the helper as an <IP, direction> tuple, which is folded
// into a p-bit index by appending the direction bit to the p-1 least
// significant IP bits: idx = ((IP << 1) + dir) mod 2^p. In the trained
// network that index selects the hot element of a 1-hot history column, and
// the inner product of a Layer-1 filter with a 1-hot column is just the
// filter weight at the hot index. Offline, each such weight is passed
// through the trained normalization and quantized to a ternary code, so the
// whole first layer collapses into this table of 2^p rows, each holding one
// 2-bit code per filter (filter j in bits [2j+1:2j], codes as in cnn_pkg).
// The hash, the table and its contents follow the paper.
//
// Interface and timing (this design's choices): one synchronous write port,
// addressed by row, used when a helper is uploaded; one combinational read
// port addressed by the tuple, used once per fetched conditional branch.
// Only the low p-1 IP bits reach the index. The array is not reset; every
// row must be written before it is read.
module cnn_l1_table #(
  parameter int unsigned P_BITS      = cnn_pkg::P_BITS_DEF,
  parameter int unsigned NUM_FILTERS = cnn_pkg::NUM_FILTERS_DEF,
  parameter int unsigned IP_W        = cnn_pkg::IP_W_DEF
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [P_BITS-1:0]        wr_idx,
  input  logic [2*NUM_FILTERS-1:0] wr_data,
  input  logic [IP_W-1:0]          rd_ip,
  input  logic                     rd_dir,
  output logic [2*NUM_FILTERS-1:0] rd_data
);

  localparam int unsigned ROWS = 1 << P_BITS;

  logic [2*NUM_FILTERS-1:0] mem [ROWS];
  logic [P_BITS-1:0]        rd_idx;

  // ((IP << 1) + dir) mod 2^p: the shift leaves bit 0 free, so the sum is
  // the concatenation of the p-1 low IP bits and the direction.
  assign rd_idx = {rd_ip[P_BITS-2:0], rd_dir};

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_data;
  end

  assign rd_data = mem[rd_idx];

endmodule
