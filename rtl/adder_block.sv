// adder_block -- Adder Block of the interpolation block (the paper's Fig. 7):
// A(x) = sum of the outputs of Multiplier_1..Multiplier_NPTS.
//
// The NPTS products (signed, 12 fraction bits) are added in full precision
// and the sum is saturated to the signed Q3.12 sample format. The adder is a
// single registered sum: the result appears one clock after the inputs, with
// valid delayed alike. Saturation and the register are this design's choices.
module adder_block
  import dfc_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  logic    in_valid,
  input  prod_t   terms [NPTS],
  output logic    out_valid,
  output sample_t sum
);
  localparam int unsigned SW = PROD_W + $clog2(NPTS);
  localparam logic signed [SW-1:0] MAXV = SW'(2 ** (DATA_W - 1) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(2 ** (DATA_W - 1));

  logic signed [SW-1:0] acc;

  always_comb begin
    acc = '0;
    for (int i = 0; i < int'(NPTS); i++) acc += SW'(terms[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= in_valid;
      if (acc > MAXV)      sum <= sample_t'(MAXV);
      else if (acc < MINV) sum <= sample_t'(MINV);
      else                 sum <= sample_t'(acc);
    end
  end
endmodule
