// svr_pkg: sizes, word widths and the controller phase type shared by the
// batch linear-SVR accelerator.
//
// The default sizes are those of the main configuration: 1136 support
// vectors (NS), feature vectors of 220 normalised Brillouin gains (M, one per
// scanned frequency from 10.78 to 11.0 GHz in 1 MHz steps), an unroll factor
// of 284 MAC lanes (F) and a batch of 40 feature vectors (B). NS/F = 4 tiles.
//
// Every value (gains, support-vector elements, coefficients, partial and
// final sums, bias) is an IEEE-754 single-precision word, as in the
// reference design; the arithmetic is in fp32_mul and fp32_add.
package svr_pkg;
  localparam int unsigned NS_DEF = 1136;
  localparam int unsigned M_DEF  = 220;
  localparam int unsigned F_DEF  = 284;
  localparam int unsigned B_DEF  = 40;

  localparam int unsigned FP_W = 32;
  typedef logic [FP_W-1:0] fp32_t;

  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,  // waiting for start
    PH_PSUM   = 3'd1,  // partial-sum matrix update (Algorithm 3, L1-L3)
    PH_DRAIN1 = 3'd2,  // last partial-sum write-back
    PH_FSUM   = 3'd3,  // cascaded MAC array fed (L4-L5)
    PH_DRAIN2 = 3'd4,  // adder chain empties into the auxiliary matrix
    PH_TREE   = 3'd5,  // adder tree emits one result per cycle
    PH_DONE   = 3'd6   // one-cycle done pulse
  } phase_e;
endpackage
