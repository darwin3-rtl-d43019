// reset_gen: chip reset generator.
//
// The external reset is asserted asynchronously and released synchronously:
// a chain of STAGES flip-flops shifts ones in after the pad reset goes high,
// so every island sees the release on a clock edge, STAGES cycles later.
// The design names this block only; the synchroniser is this implementation's
// choice.
//
// Lint notes: a linter reports the chain as flopped both synchronously and
// asynchronously; that is what a reset synchroniser is (its flops are reset
// by the pad and its output resets the rest of the chip).
module reset_gen #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_pad_n,
  output logic rst_n
);
  logic [STAGES-1:0] sh;
  always_ff @(posedge clk or negedge rst_pad_n)
    if (!rst_pad_n) sh <= '0;
    else            sh <= {sh[STAGES-2:0], 1'b1};
  assign rst_n = sh[STAGES-1];
endmodule
