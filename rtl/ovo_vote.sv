// ovo_vote: the 1-vs-1 voting stage of a multi-class linear SVM.
//
// A C-class SVM-C has C(C-1)/2 pairwise classifiers, ordered as in the common
// software libraries: (0,1), (0,2), ..., (0,C-1), (1,2), ..., (C-2,C-1). A
// positive (> 0) decision of classifier (i,j) is a vote for class i, any other
// value a vote for class j. The class with the most votes wins; the final
// choice is the argmax function the classifiers end with, ties going to the
// lowest class. Purely combinational.
//
// Interface: d holds the P = C(C-1)/2 decision values (D_W bits, signed);
// cls is the predicted class. From the published design: 1-vs-1
// classification ending in argmax. Own choices: pair order, sign convention
// and tie rule, all matching the usual software model.
module ovo_vote #(
  parameter int  C   = 3,
  parameter int  D_W = 16,
  localparam int P   = C * (C - 1) / 2,
  localparam int C_W = (C > 1) ? $clog2(C) : 1,
  localparam int V_W = $clog2(C) + 1
) (
  input  logic signed [D_W-1:0] d [P],
  output logic [C_W-1:0]        cls
);

  logic signed [V_W:0] votes [C];   // one spare bit: argmax compares signed values

  always_comb begin
    int p;
    for (int c = 0; c < C; c++) votes[c] = '0;
    p = 0;
    for (int i = 0; i < C; i++) begin
      for (int j = i + 1; j < C; j++) begin
        if (d[p] > 0) votes[i] = votes[i] + 1'b1;
        else          votes[j] = votes[j] + 1'b1;
        p++;
      end
    end
  end

  argmax #(
    .K  (C),
    .V_W(V_W + 1)
  ) u_argmax (
    .val(votes),
    .idx(cls)
  );

endmodule
