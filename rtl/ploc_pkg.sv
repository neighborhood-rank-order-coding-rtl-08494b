// ploc_pkg -- constants, types and helper functions shared by the PLOC
// (Pulsed Local Orientation Coding) sensor modules.
//
// Neighbour numbering follows the orientation coefficients of the PLOC
// operator: a cell's feature number is the sum of the coefficients of those
// neighbours that pulsed at least once during one inter-spike interval (ISI)
// of the cell itself.
//
//   N4:   .  1  .        N8:   1   2   4
//         2  R  4              8   R  16
//         .  8  .             32  64 128
//
// Bit i of a feature word is the neighbour with coefficient 2**i. Rows are
// numbered from the top of the image (row-1 is the upper neighbour), columns
// from the left. Functions nb_drow/nb_dcol give a neighbour's offset.
package ploc_pkg;

  // Default geometry and word widths (see README for which are the paper's).
  localparam int unsigned DEF_ROWS       = 32;
  localparam int unsigned DEF_COLS       = 32;
  localparam int unsigned DEF_NB         = 4;   // N4 neighbourhood
  localparam int unsigned DEF_GRAY_W     = 8;
  localparam int unsigned DEF_ACC_W      = 18;  // pixel integrator width
  localparam int unsigned DEF_NORM_SHIFT = 6;   // N: 2**N features per normalisation
  localparam int unsigned DEF_THETA_W    = 8;   // fractional bits of theta_M, theta_corr

  // Row offset of neighbour i (coefficient 2**i) in an N4 or N8 neighbourhood.
  function automatic int nb_drow(int unsigned nb, int unsigned i);
    if (nb == 4) begin
      case (i)
        0:       return -1;  // top
        3:       return  1;  // bottom
        default: return  0;  // left, right
      endcase
    end else begin
      if (i <= 2)      return -1;
      else if (i <= 4) return  0;
      else             return  1;
    end
  endfunction

  // Column offset of neighbour i (coefficient 2**i).
  function automatic int nb_dcol(int unsigned nb, int unsigned i);
    if (nb == 4) begin
      case (i)
        1:       return -1;  // left
        2:       return  1;  // right
        default: return  0;  // top, bottom
      endcase
    end else begin
      case (i)
        0, 3, 5: return -1;
        2, 4, 7: return  1;
        default: return  0;
      endcase
    end
  endfunction

  // State of the correlation post-processor.
  typedef enum logic [1:0] {
    CORR_CLEAR = 2'd0,   // zeroing the feature-vector map after reset
    CORR_IDLE  = 2'd1,   // storing feature vectors, waiting for start
    CORR_SWEEP = 2'd2    // evaluating b_korr for one cell per clock
  } corr_state_t;

endpackage
