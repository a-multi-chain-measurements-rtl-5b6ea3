`timescale 1ps/1fs
// chain_delay_cell -- BEHAVIOURAL MODEL (not synthesizable) of the fixed delay
// placed between the hit inputs of two adjacent chains.
//
// In the device this is one dedicated carry-chain unit. The model is a delay of
// DELAY_PS on both edges (pulses shorter than the delay are swallowed). The default, 1 + 1/8 of the mean tap delay,
// is this model's choice: it shifts chain m by (m-1)/8 of a bin relative to
// chain 1, which is what lets eight chains split one 24 ps bin into eight.
//
// Interface: in -> out, both asynchronous.
module chain_delay_cell #(
  parameter real DELAY_PS = (6250.0 / 260.0) * (1.0 + 1.0 / 8.0)
) (
  input  logic in,
  output logic out
);

  assign #(DELAY_PS) out = in;

endmodule
