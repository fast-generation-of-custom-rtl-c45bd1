// adder_tree -- pipelined floating-point adder tree AdderTree(N).
//
// Sums N floats with N-1 fp_adder instances.  A power-of-two N is split into
// two halves; any other N is split into N0 = 2^floor(log2 N) inputs (the
// first ones) and N1 = N - N0 (the rest), the smaller tree's result being
// delayed so that both reach the final adder together.  AdderTree(9) is thus
// AdderTree(8) plus one input delayed by 3*L_ADD, and AdderTree(25) is
// AdderTree(16) plus AdderTree(9).  This decomposition rule and the latency
// L_ADD * ceil(log2 N) are the paper's.
//
// The tree is built level by level: each level adds neighbouring pairs
// (0+1, 2+3, ...) and, when its count is odd, passes the last value through
// an L_ADD delay.  Because the odd value is always the last one, this forms
// exactly the groups above (for 25: 0..15 and 16..23 + 24).  One new set of
// N inputs is accepted every clock.
module adder_tree #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15,
  parameter int N              = 9
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] din [N],
  output logic [FLOAT_WIDTH-1:0] dout
);
  localparam int LEVELS = $clog2(N);

  // Number of values left after level l.
  function automatic int count(input int l);
    int n;
    n = N;
    for (int i = 0; i < l; i++) n = (n + 1) / 2;
    return n;
  endfunction

  logic [FLOAT_WIDTH-1:0] v [LEVELS+1][N];

  for (genvar i = 0; i < N; i++) begin : g_in
    assign v[0][i] = din[i];
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int NI = count(l);
    for (genvar p = 0; p < NI / 2; p++) begin : g_pair
      fp_adder #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
                 .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
        u_add (.clock(clock), .reset(reset), .float_a(v[l][2*p]), .float_b(v[l][2*p+1]),
               .float_c(v[l+1][p]));
    end
    if (NI % 2 == 1) begin : g_odd
      delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(fp_pkg::L_ADD)) u_dly (
        .clock(clock), .reset(reset), .din(v[l][NI-1]), .dout(v[l+1][NI/2]));
    end
    // Unused slots of the next level.
    for (genvar q = (NI + 1) / 2; q < N; q++) begin : g_tie
      assign v[l+1][q] = '0;
    end
  end

  assign dout = v[LEVELS][0];
endmodule
