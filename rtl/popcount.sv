// popcount: number of set bits of a vector (helper).
//
// Purely combinational; the result is OW bits wide. Used by the data
// collectors to add the one-bit outputs of many parallel units in one clock.
module popcount #(
  parameter int N  = 8,
  parameter int OW = $clog2(N + 1)
) (
  input  logic [N-1:0]  in,
  output logic [OW-1:0] count
);
  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count += OW'(in[i]);
  end
endmodule
