// MAC unit: LANES parallel 32-bit multiply-accumulate lanes.
//
// One pass computes LANES result words from LANES words of each operand. The
// mode selects what each lane does:
//   MAC_PASS   res = b                 (load)
//   MAC_MULACC res = acc + w*(a*b)     (QR-trick CnR then weighted GnR)
//   MAC_ACC    res = acc + w*b         (plain weighted GnR, final reduction)
//   MAC_AXPY   res = acc + s*b         (one row step of a skinny GEMM)
//   MAC_AXPYW  res = acc + w*s*b       (skinny GEMM row step into a partial sum)
// The array is purely combinational; the caller registers the result. The
// number of lanes (64) is the paper's; the lane modes and the integer number
// format (products kept modulo 2^32) are this design's choice.
module mac_array
  import ppim_pkg::*;
#(
  parameter int LANES = MAC_LANES
) (
  input  mac_mode_e                      mode,
  input  logic [WORD_W-1:0]              weight,
  input  logic [WORD_W-1:0]              scalar,
  input  logic [LANES-1:0][WORD_W-1:0]   a,
  input  logic [LANES-1:0][WORD_W-1:0]   b,
  input  logic [LANES-1:0][WORD_W-1:0]   acc,
  output logic [LANES-1:0][WORD_W-1:0]   res
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic [WORD_W-1:0] m1, m2, f;
      // first multiplier picks the element-wise or scalar operand
      f  = (mode == MAC_MULACC) ? a[i] : scalar;
      m1 = f * b[i];
      // second multiplier applies the instruction weight
      m2 = weight * ((mode == MAC_ACC) ? b[i] : m1);
      unique case (mode)
        MAC_PASS:   res[i] = b[i];
        MAC_MULACC: res[i] = acc[i] + m2;
        MAC_ACC:    res[i] = acc[i] + m2;
        MAC_AXPY:   res[i] = acc[i] + m1;
        MAC_AXPYW:  res[i] = acc[i] + m2;
        default:    res[i] = b[i];
      endcase
    end
  end
endmodule
