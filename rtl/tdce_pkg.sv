// tdce_pkg: types and default sizes shared by the clustered chromatic
// dispersion filter (TDCE).
//
// Every sample and every centroid tap is a complex number whose real and
// imaginary parts are signed fixed-point values of 14 bits, 5 of them integer
// bits (sign included) and 9 fractional bits, i.e. a range of [-16, 16) with a
// step of 2^-9. That word format is the one reported for the FPGA filter.
// The default sizes describe the 4-span (320 km) configuration: a 93-tap
// truncated filter whose taps are grouped into 10 clusters, run at 2 samples
// per symbol with one output per symbol.
package tdce_pkg;

  // Fixed-point format of samples and taps: 14 bits, 5 integer bits.
  localparam int SAMPLE_W    = 14;
  localparam int SAMPLE_INT  = 5;
  localparam int SAMPLE_FRAC = SAMPLE_W - SAMPLE_INT;

  // Default filter geometry (4 spans of 80 km).
  localparam int N_TAPS_DEF  = 93;
  localparam int N_CLUST_DEF = 10;
  localparam int DECIM_DEF   = 2;

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // One complex sample or tap.
  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // Target of a configuration write.
  typedef enum logic {
    CFG_MAP  = 1'b0,  // tap -> cluster index table
    CFG_CENT = 1'b1   // centroid (complex tap) table
  } cfg_sel_e;

endpackage
