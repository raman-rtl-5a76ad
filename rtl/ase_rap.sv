// ase_rap: non-zero detector and run-time activation pruning (RAP) of the
// activation sparsity engine.
//
// Input is one column of the 3 x M input-activation block that the three PE
// rows process together: the same input channel of three pixels, a[0..2].
// The non-zero detector makes the bitmap b[k] = (a[k] != 0). RAP then looks
// at the column: if exactly one of b[0..2] is set and that activation is
// below the threshold theta, its bit is cleared (B[k] = 0), so the whole
// column becomes zero and the channel can be skipped; with two or more
// non-zero activations the bitmap is kept (B = b). OR_BIT = |B marks a
// channel that must be processed. With rap_en low, or theta = 0, B = b.
//
// Purely combinational. Activations are unsigned 8b (they come out of ReLU);
// the comparison is a < theta, strictly. The structure (detector, RAP,
// OR of the pruned bits) is the published one; the unsigned compare and the
// enable input are this implementation's.
module ase_rap #(
  parameter int N = 3,
  parameter int W = 8
) (
  input  logic [N-1:0][W-1:0] a,
  input  logic [W-1:0]        theta,
  input  logic                rap_en,
  output logic [N-1:0]        b,        // raw bitmap
  output logic [N-1:0]        bm,       // bitmap after pruning (B)
  output logic                or_bit,
  output logic                pruned    // one activation was pruned
);
  logic [$clog2(N+1)-1:0] ones;

  always_comb begin
    ones = '0;
    for (int k = 0; k < N; k++) begin
      b[k] = (a[k] != '0);
      ones = ones + b[k];
    end
    bm     = b;
    pruned = 1'b0;
    if (rap_en && ones == 1) begin
      for (int k = 0; k < N; k++)
        if (b[k] && a[k] < theta) begin
          bm[k]  = 1'b0;
          pruned = 1'b1;
        end
    end
    or_bit = |bm;
  end
endmodule
