// ft_pkg: constants and types shared by the fault-tolerant FIR filter.
//
// DATA_W is the 16-bit sample, multiplier, adder and memory width the design is
// built around. The five voter configurations of the 5-modular-redundant (5MR)
// filter are named by voter_cfg_e; fir_5mr takes one of them on its cfg input.
// The filter taps are this design's own choice (the source gives the structure of
// the filter but no coefficients): an 8-tap Hamming-windowed low-pass with a
// cutoff of 0.1 of the sample rate, in Q15, summing to exactly 32768 so the DC
// gain is one. Coefficient k is round(32768 * h[k] / sum(h)) with
// h[k] = sin(2*pi*0.1*m)/(pi*m) * (0.54 - 0.46*cos(2*pi*k/7)), m = k - 3.5.
package ft_pkg;

  localparam int unsigned DATA_W   = 16;  // sample / coefficient width
  localparam int unsigned N_MOD    = 5;   // number of redundant filter modules
  localparam int unsigned FIR_TAPS = 8;   // filter length
  localparam int unsigned COEF_FRAC = 15; // coefficients are Q15

  typedef logic signed [DATA_W-1:0] sample_t;

  // Voter configurations, in the order the five designs are presented.
  typedef enum logic [2:0] {
    VOTE_CONVENTIONAL = 3'd0,  // 5-input majority sum of products
    VOTE_XOR_MUX      = 3'd1,  // 5MR as TMR with XOR-MUX voters
    VOTE_XNOR_MUX     = 3'd2,  // 5MR as TMR with XNOR-MUX voters
    VOTE_CASCADED     = 3'd3,  // 5MR as cascaded AND-OR TMR planes
    VOTE_MUX4         = 3'd4   // AND3 / TMR / OR3 feeding a 4:1 multiplexer
  } voter_cfg_e;

  typedef logic signed [DATA_W-1:0] coef_array_t [FIR_TAPS];

  localparam coef_array_t FIR_COEFS = '{
    16'sd287, 16'sd1571, 16'sd5375, 16'sd9151,
    16'sd9151, 16'sd5375, 16'sd1571, 16'sd287
  };

endpackage
