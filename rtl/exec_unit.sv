// exec_unit: the model execution datapath shared by every update instruction.
//
// One datapath evaluates sums of products such as
//   v(t+1) = p0*v(t) + p1*I(t+1) + p2*v_adp(t+1) + c0
// term by term. It has the shape of the common data path of the design: an
// input multiplexer (new operand, or the previous product fed back for a
// product of several factors), a multiplier, a pipeline register, a bypass
// multiplexer (multiply or pass the operand unchanged), an adder whose second
// input is either the accumulator fed back or zero, and the accumulator
// register. The "1b to 16b" stage of the weight-update path is provided as a
// mask: a term can be forced to zero by a 1-bit spike flag, which is the
// AND of the flag expanded to 16 bits with the operand.
//
// Interface: the controller issues at most one term per cycle. A term is
// term_a (optionally multiplied by term_b), term_fb replaces term_a by the
// previous stage-1 result, term_acc adds the stage-1 result into the
// accumulator, term_first restarts the accumulator from this term, and
// term_last marks the final term; res_valid/result follow.
//
// Timing: stage 1 (multiply/bypass) and stage 2 (add) are registered, so a
// single multiply-add takes two cycles after issue, and a sum of n terms is
// ready n+1 cycles after its first term. That gives the cycle counts the
// design states: a LIF update (two products and a constant) in four cycles,
// a CUBA delta update (one product and one addition) in three. Arithmetic is
// signed fixed point with FRAC fractional bits; the product is truncated and
// sums wrap (no saturation), which is this implementation's choice.
module exec_unit
  import d3_pkg::*;
#(
  parameter int unsigned W  = DATA_W,
  parameter int unsigned FB = FRAC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                term_valid,
  input  logic signed [W-1:0] term_a,
  input  logic signed [W-1:0] term_b,
  input  logic                term_mul,
  input  logic                term_fb,
  input  logic                term_mask,
  input  logic                term_acc,
  input  logic                term_first,
  input  logic                term_last,
  output logic                res_valid,
  output logic signed [W-1:0] result
);

  // Stage 1: input mux, multiplier / bypass, mask, pipeline register.
  logic signed [W-1:0]   p_q;
  logic                  v1_q, acc1_q, first1_q, last1_q;
  logic signed [W-1:0]   s1_in;
  logic signed [2*W-1:0] s1_prod;
  logic signed [W-1:0]   s1_out;

  always_comb begin
    s1_in   = term_fb ? p_q : term_a;
    s1_prod = s1_in * term_b;
    s1_out  = term_mul ? W'(s1_prod >>> FB) : s1_in;
    if (!term_mask) s1_out = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_q <= '0; v1_q <= 1'b0; acc1_q <= 1'b0; first1_q <= 1'b0; last1_q <= 1'b0;
    end else begin
      v1_q <= term_valid;
      if (term_valid) begin
        p_q      <= s1_out;
        acc1_q   <= term_acc;
        first1_q <= term_first;
        last1_q  <= term_last;
      end
    end
  end

  // Stage 2: adder with accumulator feedback, result register.
  logic signed [W-1:0] acc_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= v1_q && last1_q;
      if (v1_q && acc1_q) acc_q <= (first1_q ? '0 : acc_q) + p_q;
    end
  end
  assign result = acc_q;

endmodule
