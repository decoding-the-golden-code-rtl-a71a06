// gc_pkg: constants and types shared by the Golden code sphere decoder.
//
// The decoder searches the 8-dimensional real lattice of the Golden code
// (a 2x2 complex space-time block code, two channel uses), so the tree has
// N_DIM = 8 levels.  Every real dimension carries one PAM symbol: 2-PAM for
// 4-QAM, 4-PAM for 16-QAM and 8-PAM for 64-QAM.  The modulation is given as
// log2 of the PAM size (qam_e), which is what the divider and the
// zig-zag enumeration actually need.  The default datapath width of 16 bits
// and the 4/16/64-QAM range are those of the flexible implementation in the
// source publication; the encoding of qam_e is this design's own choice.
package gc_pkg;

  localparam int unsigned N_DIM     = 8;   // real dimensions = tree levels
  localparam int unsigned DP_W      = 16;  // datapath width of psi and R
  localparam int unsigned LOG2Q_MAX = 3;   // largest PAM: 8-PAM (64-QAM)

  // Modulation select: value = log2 of the PAM size per real dimension.
  typedef enum logic [1:0] {
    QAM4  = 2'd1,
    QAM16 = 2'd2,
    QAM64 = 2'd3
  } qam_e;

  // Control unit states.
  typedef enum logic [1:0] {
    CU_IDLE   = 2'd0,  // waiting for start
    CU_ROOT   = 2'd1,  // expand the root: first son of the top level
    CU_SEARCH = 2'd2,  // one tree node per clock cycle
    CU_DONE   = 2'd3   // result valid for one cycle
  } cu_state_e;

endpackage
