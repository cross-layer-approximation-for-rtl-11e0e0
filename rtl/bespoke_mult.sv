// bespoke_mult: bespoke multiplier BM_w, the product of an unsigned input x with
// one coefficient W that is hard-wired into the circuit.
//
// Because W is a constant, synthesis reduces the multiplication to the few
// shifted copies of x (added or subtracted) that W's bit pattern needs; a power
// of two needs no gate at all, which is what the coefficient approximation
// exploits. The module is purely combinational.
//
// Interface: x is X_W bits unsigned (4 in the published design, 8 for the
// second MLP layer), p = x * W is X_W+W_W bits signed and never overflows.
// W is a trained value: its default 0 is only there so the module elaborates.
module bespoke_mult #(
  parameter int                       X_W = pml_pkg::X_W,
  parameter int                       W_W = pml_pkg::W_W,
  parameter logic signed [W_W-1:0]    W   = '0
) (
  input  logic [X_W-1:0]              x,
  output logic signed [X_W+W_W-1:0]   p
);

  always_comb begin
    p = (X_W+W_W)'($signed({1'b0, x}) * W);
  end

endmodule
