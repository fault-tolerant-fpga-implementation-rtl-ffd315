// fir_filter: direct-form FIR filter, y[n] = sum_k COEFS[k] * x[n-k], built from
// Vedic multipliers and carry-save adders.
//
// Structure (direct form, tap 0 taken straight from the input):
//   - a delay line of TAPS-1 sample registers holds x[n-1] .. x[n-TAPS+1];
//   - each tap multiplies its sample by a signed Q15 coefficient. The Vedic
//     multiplier is unsigned, so each tap takes the magnitudes of sample and
//     coefficient, multiplies them 16x16 -> 32 bits and negates the product when
//     the signs differ (sign-magnitude wrapping is this design's choice);
//   - the TAPS products are summed by a chain of carry-save adders, each adding
//     two more products to the running sum (three operands per adder), at
//     ACC_W bits in two's complement;
//   - the sum is scaled back by 2^COEF_FRAC, saturated to DATA_W bits and
//     registered as yn.
// Timing: one sample per clock. xn is sampled at the rising edge and its
// effect on y appears in yn right after that same edge, so yn(k) holds y for the
// sample presented in cycle k-1 (one cycle of latency). rst is synchronous and
// active high; it clears the delay line and yn.
// The structure, the 16-bit datapath and the use of Vedic multipliers and
// carry-save adders follow the source; the filter length, the coefficients, the
// Q15 scaling, the saturation and the reset style are this design's choices.
module fir_filter
#(
  parameter int unsigned DATA_W    = ft_pkg::DATA_W,
  parameter int unsigned TAPS      = ft_pkg::FIR_TAPS,
  parameter int unsigned COEF_FRAC = ft_pkg::COEF_FRAC,
  parameter logic signed [DATA_W-1:0] COEFS [TAPS] = ft_pkg::FIR_COEFS
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [DATA_W-1:0] xn,
  output logic signed [DATA_W-1:0] yn
);
  localparam int unsigned PROD_W = 2 * DATA_W;
  localparam int unsigned ACC_W  = PROD_W + $clog2(TAPS) + 1;
  localparam int unsigned N_CSA  = TAPS / 2;           // adders in the chain
  localparam int unsigned N_OPS  = 2 * N_CSA + 1;      // operands they can take

  // The multipliers are 16x16: narrower samples are zero-extended into them.
  if (DATA_W > 16) begin : g_width_check
    $error("fir_filter: DATA_W above 16 is not supported by the 16x16 multiplier");
  end

  // Delay line: taps[0] is the current input, taps[k] = x[n-k].
  logic signed [DATA_W-1:0] taps [TAPS];
  assign taps[0] = xn;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 1; k < TAPS; k++) taps[k] <= '0;
    end else begin
      for (int k = 1; k < TAPS; k++) taps[k] <= taps[k-1];
    end
  end

  // One signed multiplier per tap, around the unsigned Vedic core.
  logic [ACC_W-1:0] prod [N_OPS];

  for (genvar k = 0; k < N_OPS; k++) begin : g_tap
    if (k < TAPS) begin : g_mul
      localparam logic signed [DATA_W-1:0] C = COEFS[k];
      localparam logic [DATA_W-1:0] C_MAG = C[DATA_W-1] ? DATA_W'(-C) : DATA_W'(C);
      logic [DATA_W-1:0] x_mag;
      logic [PROD_W-1:0] p_mag;
      logic              neg;

      assign x_mag = taps[k][DATA_W-1] ? DATA_W'(-taps[k]) : DATA_W'(taps[k]);
      assign neg   = taps[k][DATA_W-1] ^ C[DATA_W-1];

      logic [31:0] p16;
      vedic_mult_16x16 u_mul (.a(16'(x_mag)), .b(16'(C_MAG)), .p(p16));
      assign p_mag = PROD_W'(p16);

      assign prod[k] = neg ? ACC_W'(-{{(ACC_W-PROD_W){1'b0}}, p_mag})
                           : ACC_W'({{(ACC_W-PROD_W){1'b0}}, p_mag});
    end else begin : g_pad
      assign prod[k] = '0;
    end
  end

  // Carry-save adder chain: acc[j+1] = acc[j] + prod[2j+1] + prod[2j+2].
  logic [ACC_W-1:0] acc [N_CSA+1];
  assign acc[0] = prod[0];

  for (genvar j = 0; j < N_CSA; j++) begin : g_sum
    logic [ACC_W+1:0] s;
    carry_save_adder #(.W(ACC_W)) u_csa (
      .a(acc[j]), .b(prod[2*j+1]), .c(prod[2*j+2]), .sum(s));
    assign acc[j+1] = s[ACC_W-1:0];
  end

  // Scale back to DATA_W bits with saturation.
  localparam logic signed [ACC_W-1:0] Y_MAX = ACC_W'((2 ** (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] Y_MIN = -ACC_W'(2 ** (DATA_W - 1));

  logic signed [ACC_W-1:0] scaled;
  logic signed [DATA_W-1:0] y_next;

  always_comb begin
    scaled = $signed(acc[N_CSA]) >>> COEF_FRAC;
    if (scaled > Y_MAX)      y_next = Y_MAX[DATA_W-1:0];
    else if (scaled < Y_MIN) y_next = Y_MIN[DATA_W-1:0];
    else                     y_next = scaled[DATA_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) yn <= '0;
    else     yn <= y_next;
  end
endmodule
