// accum: K-wide accumulator that sums the IFFT outputs of one block row.
//
// For block row i the products W_ij x_j, j = 1..q, arrive one block per cycle
// with `first` marking j = 1 and `last` marking j = q. The accumulator loads
// on `first`, adds otherwise, and on `last` presents a_i = sum_j W_ij x_j,
// saturated to the 12-bit data format, with out_valid high for one cycle
// (one cycle after the last input). Back-to-back rows need no gap: the
// `first` of the next row may follow the `last` of the previous one
// directly. The accumulation over j is the paper's (the ACCUM box of its
// figure and Eq. 1); the ACC_W-bit width and the output saturation are this
// design's.
module accum
  import bc_pkg::*;
#(
  parameter int K    = 16,
  parameter int IN_W = PROD_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,
  input  logic                    last,
  input  logic signed [IN_W-1:0]  din  [K],
  output logic                    out_valid,
  output data_t                   dout [K]
);
  localparam int SH = PROD_FRAC - FRAC;   // Q.12 -> Q.8 at the output
  logic signed [ACC_W-1:0] acc [K];

  for (genvar n = 0; n < K; n++) begin : g_acc
    logic signed [ACC_W-1:0] sum;
    assign sum = (first ? ACC_W'(0) : acc[n]) + ACC_W'(din[n]);
    always_ff @(posedge clk) begin
      if (in_valid) acc[n] <= sum;
      if (in_valid && last)
        dout[n] <= sat_data((48'(sum) + (48'sd1 <<< (SH - 1))) >>> SH);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && last;
  end

endmodule
