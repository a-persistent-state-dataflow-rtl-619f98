// gdn_pkg: sizes, FP32 constants and small types shared by the Gated DeltaNet
// decode accelerator.
//
// The model sizes are those of a Qwen3-Next style GDN layer: 16 query/key heads,
// 32 value heads (two value heads per q/k head, "grouped value attention"),
// head dimension 128. The hardware knobs are the number of value heads handled
// per dataflow iteration (H_ITER, 8 in the main configuration) and the column
// parallelism of every processing element (PK, 16). All arithmetic is IEEE-754
// binary32; the constants below are the binary32 encodings of the named values.
package gdn_pkg;

  localparam int unsigned HV_DEF     = 32;   // value heads
  localparam int unsigned HQK_DEF    = 16;   // query/key heads
  localparam int unsigned D_DEF      = 128;  // head dimension
  localparam int unsigned H_ITER_DEF = 8;    // value heads per iteration
  localparam int unsigned PK_DEF     = 16;   // column lanes per PE

  typedef logic [31:0] fp32_t;
  typedef logic [15:0] fp16_t;

  localparam fp32_t FP32_ZERO  = 32'h0000_0000;
  localparam fp32_t FP32_ONE   = 32'h3F80_0000;
  localparam fp32_t FP32_QNAN  = 32'h7FC0_0000;
  localparam fp32_t FP32_INF   = 32'h7F80_0000;
  localparam fp32_t FP32_LOG2E = 32'h3FB8_AA3B;  // 1/ln 2
  localparam fp32_t FP32_LN2   = 32'h3F31_7218;  // ln 2

  // 1/sqrt(d) for the supported head dimensions (output scaling of Eq. o = S^T q / sqrt(d)).
  function automatic fp32_t inv_sqrt_d(input int unsigned d);
    case (d)
      16:      return 32'h3E80_0000;  // 0.25
      32:      return 32'h3E35_04F3;  // 0.1767767
      64:      return 32'h3E00_0000;  // 0.125
      128:     return 32'h3DB5_04F3;  // 0.0883883
      256:     return 32'h3D80_0000;  // 0.0625
      default: return 32'h3DB5_04F3;
    endcase
  endfunction

  // Phases of the fused per-head step (one read pass, one write pass).
  typedef enum logic [2:0] {
    PH_IDLE  = 3'd0,
    PH_DOT   = 3'd1,  // phase 1: alpha = q.k            (D/PK cycles)
    PH_READ  = 3'd2,  // phase 2: r = S^T k, o^ = g S^T q (D*D/PK cycles)
    PH_DELTA = 3'd3,  // phase 3: dv = beta (v - r)       (D/PK cycles)
    PH_OUT   = 3'd4,  // phase 4: o = (o^ + alpha dv)/sqrt(d) (D/PK cycles)
    PH_WRITE = 3'd5   // phase 5: S = g S + k dv^T        (D*D/PK cycles)
  } phase_e;

endpackage
