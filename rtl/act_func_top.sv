// act_func_top: tanh and SELU activation circuits side by side.
//
// One sign-magnitude input sample feeds both tanh_unit and selu_unit, which
// are purely combinational. Their results are captured in an output register
// on the next rising clock edge, so a sample presented with in_valid in
// cycle n appears with out_valid after the edge that ends cycle n: a
// latency of one clock cycle and a throughput of one sample per cycle. That
// register is this design's way of giving the paper's "one clock cycle"
// circuit a clocked interface; the activation logic itself has no state.
//
// Ports: clk, rst_n (active-low, synchronous, clears out_valid and the
// results), in_valid, x_sign, x_mag (unsigned, 3 fraction bits) in;
// out_valid, tanh_sign/tanh_mag (1.7) and selu_sign/selu_mag (7 fraction
// bits) out. Results hold their value while in_valid is low.
module act_func_top
  import act_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  x_sign,
  input  logic [MAG_W-1:0]      x_mag,
  output logic                  out_valid,
  output logic                  tanh_sign,
  output logic [TANH_OUT_W-1:0] tanh_mag,
  output logic                  selu_sign,
  output logic [SELU_OUT_W-1:0] selu_mag
);

  logic                  t_sign, s_sign;
  logic [TANH_OUT_W-1:0] t_mag;
  logic [SELU_OUT_W-1:0] s_mag;

  tanh_unit u_tanh (
    .x_sign (x_sign),
    .x_mag  (x_mag),
    .y_sign (t_sign),
    .y_mag  (t_mag)
  );

  selu_unit u_selu (
    .x_sign (x_sign),
    .x_mag  (x_mag),
    .y_sign (s_sign),
    .y_mag  (s_mag)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      tanh_sign <= 1'b0;
      tanh_mag  <= '0;
      selu_sign <= 1'b0;
      selu_mag  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        tanh_sign <= t_sign;
        tanh_mag  <= t_mag;
        selu_sign <= s_sign;
        selu_mag  <= s_mag;
      end
    end
  end

endmodule
