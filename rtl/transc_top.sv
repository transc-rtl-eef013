// transc_top -- nine stochastic transcendental function circuits driven by
// one shared Van der Corput bit-stream source.
//
// One M-bit up counter (vdc_counter) is the only random source: every input
// and coefficient stream of every circuit is a comparator against its own
// hardwired VDC-2^n reordering of that counter. The circuits compute, for the
// same input x in [0,1):
//   sin, cos, tan, tanh, arctan, sigmoid, Sinc, e^-x, ln(1+x)
// and an output decoder (a ones counter) per circuit turns each output
// stream back into an (M+1)-bit binary number, value * 2^M.
// Operation: pulse start with x valid; x is latched. After 2N + 3 cycles
// (N = 2^M) done pulses and result[] holds the nine counts, indexed by
// transc_pkg::func_e, until the next start. All circuits except tan finish
// after the first period; tan needs a second period for its divider (see
// sc_tan). Sharing the counter follows the paper; evaluating all nine
// functions side by side and the start/done handshake are this design's
// arrangement. tan_corr_zero shows the tan correlator's empty flag: set
// during the second period once every sin 1 has been re-emitted.
module transc_top
  import transc_pkg::*;
#(
  parameter int unsigned M = M_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] x,
  output logic         busy,
  output logic         done,
  output logic         tan_corr_zero,
  output logic [M:0]   result [NUM_FUNCS]
);

  logic [M-1:0] count;
  logic [M-1:0] x_q;
  logic         clr, en, phase2, load;
  logic [NUM_FUNCS-1:0] ys;
  logic [NUM_FUNCS-1:0] dec_en;

  transc_ctrl #(.M(M)) u_ctrl (
    .clk, .rst_n, .start, .count,
    .clr, .en, .phase2, .load, .busy, .done
  );

  vdc_counter #(.M(M)) u_cnt (.clk, .rst_n, .clr, .en, .count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                x_q <= '0;
    else if (start && !busy)   x_q <= x;
  end

  sc_sin     #(.M(M)) u_sin  (.clk, .rst_n, .clr, .en, .count, .x(x_q), .y(ys[F_SIN]));
  sc_cos     #(.M(M)) u_cos  (.clk, .rst_n, .clr, .en, .count, .x(x_q), .y(ys[F_COS]));
  sc_tanh    #(.M(M)) u_tanh (.clk, .rst_n, .clr, .en, .count, .x(x_q), .y(ys[F_TANH]));
  sc_arctan  #(.M(M)) u_atan (.clk, .rst_n, .clr, .en, .count, .x(x_q), .y(ys[F_ATAN]));
  sc_sigmoid #(.M(M)) u_sig  (.clk, .rst_n, .clr, .en, .count, .x(x_q), .y(ys[F_SIGMOID]));
  sc_sinc    #(.M(M)) u_sinc (.clk, .rst_n, .clr, .en, .count, .x(x_q), .y(ys[F_SINC]));
  sc_exp_neg #(.M(M)) u_exp  (.clk, .rst_n, .clr, .en, .count, .x(x_q), .y(ys[F_EXPNEG]));
  sc_ln1p    #(.M(M)) u_ln   (.clk, .rst_n, .clr, .en, .count, .x(x_q), .y(ys[F_LN1P]));

  sc_tan #(.M(M)) u_tan (
    .clk, .rst_n, .clr, .en, .phase2, .load, .count, .x(x_q),
    .y(ys[F_TAN]), .corr_zero(tan_corr_zero)
  );

  // decoders: tan counts in the second period, all others in the first
  for (genvar f = 0; f < NUM_FUNCS; f++) begin : g_dec
    assign dec_en[f] = (f == int'(F_TAN)) ? (en & phase2) : (en & ~phase2);
    sc_decoder #(.M(M)) u_dec (
      .clk, .rst_n, .clr, .en(dec_en[f]), .bit_i(ys[f]), .pop(result[f])
    );
  end

endmodule
