// fp_cmp_and_swap -- CMP_and_SWAP of two custom floats, latency 2.
//
// If a0 > a1 the pair is swapped, so b0 = min(a0, a1) and b1 = max(a0, a1).
// It is the building block of the SORT5 network and orders f_beta and f_delta
// in the non-linear filter.  Port names and the swap rule are the paper's, as
// is the two-cycle latency; the comparison uses the ordering key of fp_pkg.
module fp_cmp_and_swap #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int LATENCY        = fp_pkg::L_CAS
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] a0,
  input  logic [FLOAT_WIDTH-1:0] a1,
  output logic [FLOAT_WIDTH-1:0] b0,
  output logic [FLOAT_WIDTH-1:0] b1
);
  localparam int UNUSED = MANTISSA_WIDTH + EXP_WIDTH + BIAS;
  logic [2*FLOAT_WIDTH-1:0] res;
  always_comb begin
    if (fp_pkg::fp_key(64'(a0), FLOAT_WIDTH) > fp_pkg::fp_key(64'(a1), FLOAT_WIDTH))
      res = {a0, a1};           // swapped: b1 = a0, b0 = a1
    else
      res = {a1, a0};
  end
  delay_line #(.WIDTH(2*FLOAT_WIDTH), .DEPTH(LATENCY)) u_pipe (
    .clock(clock), .reset(reset), .din(res), .dout({b1, b0}));
endmodule
