// psd_pkg: types and constants shared by the pulse-shape parameter engine.
//
// The engine works on 16-bit two's-complement samples ("16.0" integer format)
// held in one pulse memory. The three pulse-shape parameters leave the engine
// as a record: the width in samples, and the asymmetry and normalized moment
// each as a 16-bit quotient plus the number of right shifts that were applied
// to its divisor. The real value of a quotient is q / 2**shift, which lies in
// [-1, 1] for the asymmetry and in [0, 2] for the normalized moment.
package psd_pkg;

  localparam int unsigned DATA_W  = 16;  // data-memory word width
  localparam int unsigned NTAPS   = 9;   // default Savitzky-Golay window length
  localparam int unsigned SHIFT_W = 7;   // width of a divisor shift count

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef sample_t                  coef_arr_t [NTAPS];

  // The three parameters of one pulse.
  typedef struct packed {
    logic [15:0]        width;        // N - N0, in samples
    logic signed [15:0] asym_q;       // (F-B) / ((F+B) >> asym_shift)
    logic [SHIFT_W-1:0] asym_shift;
    logic [15:0]        mom_q;        // 12*M / (((F+B)*W^2) >> mom_shift)
    logic [SHIFT_W-1:0] mom_shift;
  } psd_params_t;

  // Everything the engine reports for one trace.
  typedef struct packed {
    psd_params_t        p;
    logic signed [15:0] peak;         // maximum of the current pulse
    logic [15:0]        n0;           // window start
    logic [15:0]        n1;           // window end
    logic [15:0]        nmid;         // window midpoint
    logic               computed;     // parameters were computed (engine on)
    logic               sg_sat;       // the SG filter clipped a sample
    logic               asym_ovf;     // asymmetry division saturated
    logic               mom_ovf;      // moment numerator or division saturated
    logic               classified;   // accept is meaningful (run mode)
    logic               accept;       // event lies in the acceptance region
  } psd_record_t;

endpackage
