// fir_5mr: fault-tolerant FIR filter by five-modular redundancy (5MR).
//
// Five identical FIR filters (fir_filter) process the same input sample stream
// x(n) in parallel. Their five outputs go to a voter, so that a transient fault
// in up to two of the filters does not reach the output y(n). All five voter
// configurations are built side by side and the cfg input picks the one whose
// result drives yn:
//   VOTE_CONVENTIONAL  10-term sum-of-products majority
//   VOTE_XOR_MUX       cascade of XOR-MUX TMR voters
//   VOTE_XNOR_MUX      cascade of XNOR-MUX TMR voters
//   VOTE_CASCADED      cascade of AND-OR TMR planes
//   VOTE_MUX4          AND3 / TMR / OR3 of three modules, 4:1 mux on the other two
// The five configurations all compute the bitwise five-input majority and give
// the same output when the modules are fault free.
//
// Timing: the filters register their outputs, so yn follows x(n) by one clock
// in the first four configurations. The 4:1-mux configuration registers the
// voted word once more (its synthesised netlist has an output register,
// 16 flip-flops more than the others), so there yn follows x(n) by two clocks.
// rst is synchronous and active high.
// Interface: clk, rst, xn (signed 16 bit), cfg (voter_cfg_e) -> yn (signed 16 bit).
// Following the source: five replicas, the voter types and the output register
// of the 4:1-mux configuration. This design's own choice: building all five
// voters in one design behind a run-time select (the source builds five
// separate designs).
module fir_5mr #(
  parameter int unsigned DATA_W    = ft_pkg::DATA_W,
  parameter int unsigned TAPS      = ft_pkg::FIR_TAPS,
  parameter int unsigned COEF_FRAC = ft_pkg::COEF_FRAC,
  parameter logic signed [DATA_W-1:0] COEFS [TAPS] = ft_pkg::FIR_COEFS
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [DATA_W-1:0] xn,
  input  ft_pkg::voter_cfg_e       cfg,
  output logic signed [DATA_W-1:0] yn
);
  localparam int unsigned N_MOD = ft_pkg::N_MOD;

  // Module outputs, one word per replica.
  logic [N_MOD-1:0][DATA_W-1:0] rep_y;

  // The replicas are identical and share their input, so a synthesis tool is
  // free to merge them into one (the source's own netlists show a single filter
  // instance); the attributes ask it to keep all five.
  for (genvar m = 0; m < N_MOD; m++) begin : g_mod
    (* keep_hierarchy = "yes", dont_touch = "true" *)
    fir_filter #(
      .DATA_W(DATA_W), .TAPS(TAPS), .COEF_FRAC(COEF_FRAC), .COEFS(COEFS)
    ) u_fir (
      .clk(clk), .rst(rst), .xn(xn), .yn(rep_y[m])
    );
  end

  logic [DATA_W-1:0] v_conv, v_xor, v_xnor, v_casc, v_mux4;

  voter_conventional #(.W(DATA_W)) u_v_conv (
    .a(rep_y[0]), .b(rep_y[1]), .c(rep_y[2]), .d(rep_y[3]), .e(rep_y[4]), .y(v_conv));
  voter_xor_mux #(.W(DATA_W)) u_v_xor (
    .a(rep_y[0]), .b(rep_y[1]), .c(rep_y[2]), .d(rep_y[3]), .e(rep_y[4]), .y(v_xor));
  voter_xnor_mux #(.W(DATA_W)) u_v_xnor (
    .a(rep_y[0]), .b(rep_y[1]), .c(rep_y[2]), .d(rep_y[3]), .e(rep_y[4]), .y(v_xnor));
  voter_cascaded_tmr #(.W(DATA_W)) u_v_casc (
    .a(rep_y[0]), .b(rep_y[1]), .c(rep_y[2]), .d(rep_y[3]), .e(rep_y[4]), .y(v_casc));
  voter_mux4 #(.W(DATA_W)) u_v_mux4 (
    .a(rep_y[0]), .b(rep_y[1]), .c(rep_y[2]), .d(rep_y[3]), .e(rep_y[4]), .y(v_mux4));

  // Output register of the 4:1-mux configuration.
  logic [DATA_W-1:0] mux4_q;
  always_ff @(posedge clk) begin
    if (rst) mux4_q <= '0;
    else     mux4_q <= v_mux4;
  end

  always_comb begin
    unique case (cfg)
      ft_pkg::VOTE_CONVENTIONAL: yn = v_conv;
      ft_pkg::VOTE_XOR_MUX:      yn = v_xor;
      ft_pkg::VOTE_XNOR_MUX:     yn = v_xnor;
      ft_pkg::VOTE_CASCADED:     yn = v_casc;
      ft_pkg::VOTE_MUX4:         yn = mux4_q;
      default:                   yn = v_conv;
    endcase
  end
endmodule
