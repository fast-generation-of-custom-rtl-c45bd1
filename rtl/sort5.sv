// sort5 -- SORT5: Bose-Nelson sorting network for five floats, latency 12.
//
// Nine CMP_and_SWAP operations in six pipelined stages, exactly as the paper
// draws them:  stage 1 (a0,a1) (a3,a4);  stage 2 (a2,a4);  stage 3 (a2,a3)
// (a1,a4);  stage 4 (a0,a3);  stage 5 (a0,a2) (a1,a3);  stage 6 (a1,a2).
// An element that takes no part in a stage passes through a two-cycle delay
// so that all five stay aligned.  Each CMP_and_SWAP leaves the smaller value
// at the lower index, so b0 <= b1 <= ... <= b4 and b2 is the median.  A new
// set of five inputs is accepted every clock.
module sort5 #(
  parameter int FLOAT_WIDTH    = 16,
  parameter int MANTISSA_WIDTH = 10,
  parameter int EXP_WIDTH      = 5,
  parameter int BIAS           = 15
) (
  input  logic                   clock,
  input  logic                   reset,
  input  logic [FLOAT_WIDTH-1:0] a [5],
  output logic [FLOAT_WIDTH-1:0] b [5]
);
  localparam int STAGES = 6;

  // Partner of element i in stage s, or -1 when it only passes through.
  function automatic int partner(input int s, input int i);
    case (s * 5 + i)
      0: return 1;   1: return 0;   3: return 4;   4: return 3;    // stage 1
      7: return 4;   9: return 2;                                   // stage 2
      11: return 4;  12: return 3;  13: return 2;  14: return 1;    // stage 3
      15: return 3;  18: return 0;                                  // stage 4
      20: return 2;  21: return 3;  22: return 0;  23: return 1;    // stage 5
      26: return 2;  27: return 1;                                  // stage 6
      default: return -1;
    endcase
  endfunction

  logic [FLOAT_WIDTH-1:0] v [STAGES+1][5];

  for (genvar i = 0; i < 5; i++) begin : g_in
    assign v[0][i] = a[i];
    assign b[i]    = v[STAGES][i];
  end

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    for (genvar i = 0; i < 5; i++) begin : g_el
      localparam int P = partner(s, i);
      if (P < 0) begin : g_pass
        delay_line #(.WIDTH(FLOAT_WIDTH), .DEPTH(fp_pkg::L_CAS)) u_dly (
          .clock(clock), .reset(reset), .din(v[s][i]), .dout(v[s+1][i]));
      end else if (P > i) begin : g_cas
        fp_cmp_and_swap #(.FLOAT_WIDTH(FLOAT_WIDTH), .MANTISSA_WIDTH(MANTISSA_WIDTH),
                          .EXP_WIDTH(EXP_WIDTH), .BIAS(BIAS))
          u_cas (.clock(clock), .reset(reset), .a0(v[s][i]), .a1(v[s][P]),
                 .b0(v[s+1][i]), .b1(v[s+1][P]));
      end
    end
  end
endmodule
