// block_scheduler: the priority pick of the PE control unit.
//
// Among N candidate micro code blocks, each with a valid bit and a key,
// returns the valid candidate with the smallest key (lowest index on a
// tie). The control unit forms the key as the bit string
// {Layer_idx, Iter_idx}, so the earliest layer wins and, inside a layer,
// the oldest iteration. Purely combinational.
module block_scheduler #(
  parameter int N  = 16,
  parameter int KW = 20
) (
  input  logic [N-1:0]          vld,
  input  logic [N-1:0][KW-1:0]  key,
  output logic                  pick_vld,
  output logic [$clog2(N)-1:0]  pick_idx
);
  always_comb begin
    logic [KW-1:0] best;
    pick_vld = 1'b0;
    pick_idx = '0;
    best     = '1;
    for (int i = 0; i < N; i++) begin
      if (vld[i] && (!pick_vld || key[i] < best)) begin
        pick_vld = 1'b1;
        pick_idx = $clog2(N)'(i);
        best     = key[i];
      end
    end
  end
endmodule
