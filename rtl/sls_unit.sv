// sls_unit: sparse-length-sum of one bag of embedding vectors.
//
// Vectors arrive one element per cycle (in_valid, in_idx = element index,
// in_first = this vector is the first of its bag, in_last = last vector of the
// bag). An accumulator per element holds the running sum; for the first vector
// of a bag it is loaded rather than added. While the last vector of a bag
// streams in, the finished sums stream out one cycle behind it (out_valid,
// out_idx, out_last on the final element), so a bag of n vectors of dim d
// takes n*d cycles plus one cycle of output latency. Summing the bag is the
// paper's SLS operation; the 32-bit two's-complement element format is this
// implementation's choice (the paper gives no number format).
module sls_unit #(
  parameter int unsigned MAX_DIM = 64,
  parameter int unsigned ELEM_W  = 32,
  localparam int unsigned IW = $clog2(MAX_DIM)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [IW-1:0]     in_idx,
  input  logic [ELEM_W-1:0] in_data,
  input  logic              in_first,
  input  logic              in_last,
  input  logic              in_elem_last,
  output logic              out_valid,
  output logic [IW-1:0]     out_idx,
  output logic [ELEM_W-1:0] out_data,
  output logic              out_last
);
  logic [ELEM_W-1:0] acc [MAX_DIM];
  logic [ELEM_W-1:0] sum;

  always_comb sum = in_first ? in_data : acc[in_idx] + in_data;

  always_ff @(posedge clk) begin
    if (in_valid) acc[in_idx] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
      out_idx   <= in_idx;
      out_data  <= sum;
      out_last  <= in_valid && in_last && in_elem_last;
    end
  end
endmodule
