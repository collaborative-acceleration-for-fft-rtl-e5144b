// simd_alu: the SIMD ALU of one PIM unit, extended for the FFT butterfly.
//
// A 256-bit operand is treated as LANES independent single-precision lanes
// and every lane performs the same operation:
//   MADD     r1 = b + k*a            (the baseline pim-MADD)
//   MADDSUB  r1 = b + k*a, r2 = b - k*a   (the proposed augmentation: the one
//            product feeds an adder and a subtractor, so a butterfly output
//            pair costs one command instead of two)
//   ADD      r1 = a + b,  SUB r1 = a - b,  MUL r1 = k*a
// `k` is a scalar constant sent by the host with the command and applied to
// all lanes. Each lane has one multiplier and two adders; the second adder
// only serves MADDSUB and is the hardware the augmentation adds. `we2` tells
// the register file to use its second write port.
// Combinational: results are valid in the cycle the operands are.
// The operation set and lane width follow the paper; the operand naming,
// rounding (product rounded before the add, not fused) and the ADD/SUB/MUL
// encodings are this design's choice.
module simd_alu
  import pim_pkg::*;
#(
  parameter int unsigned NLANES = LANES
) (
  input  pim_op_e                   op,
  input  logic [NLANES*LANE_W-1:0]  a,
  input  logic [NLANES*LANE_W-1:0]  b,
  input  fp32_t                     k,
  output logic [NLANES*LANE_W-1:0]  r1,
  output logic [NLANES*LANE_W-1:0]  r2,
  output logic                      we1,
  output logic                      we2
);
  always_comb begin
    we1 = (op == PIM_ADD) || (op == PIM_SUB) || (op == PIM_MUL) ||
          (op == PIM_MADD) || (op == PIM_MADDSUB);
    we2 = (op == PIM_MADDSUB);
  end

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    fp32_t la, lb, prod, add_x, add_y, sum1, sum2;
    assign la = a[l*LANE_W +: LANE_W];
    assign lb = b[l*LANE_W +: LANE_W];

    fp32_mul u_mul (.a(k), .b(la), .y(prod));

    always_comb begin
      unique case (op)
        PIM_ADD: begin add_x = la; add_y = lb; end
        PIM_SUB: begin add_x = la; add_y = {~lb[31], lb[30:0]}; end
        default: begin add_x = lb; add_y = prod; end
      endcase
    end

    fp32_add u_add (.a(add_x), .b(add_y), .y(sum1));
    fp32_add u_sub (.a(lb), .b({~prod[31], prod[30:0]}), .y(sum2));

    assign r1[l*LANE_W +: LANE_W] = (op == PIM_MUL) ? prod : sum1;
    assign r2[l*LANE_W +: LANE_W] = sum2;
  end
endmodule
