// rr_arbiter: round-robin arbiter. Grants one of the requesting inputs,
// searching from the input after the last one granted. The pointer moves
// only when `advance` is high (the grant was used). One-hot grant output;
// combinational grant, pointer updated on the clock edge.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N)-1:0] gnt_idx
);

  logic [$clog2(N)-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int k = N; k >= 1; k--) begin
      if (req[(int'(last) + k) % N]) begin
        gnt     = '0;
        gnt[(int'(last) + k) % N] = 1'b1;
        gnt_idx = $clog2(N)'((int'(last) + k) % N);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 last <= $clog2(N)'(N - 1);
    else if (advance && |req)   last <= gnt_idx;
  end

endmodule
