// ilm_core: iterative logarithmic multiplier (ILM) with NS basic building
// blocks, of which the first `nstages` are enabled at run time.
//
// Each building block follows the paper's figure: a leading-one detector and
// priority encoder give k_x and k_y, the leading ones are removed
// (X_{i+1} = X_i - 2^k_x, Y_{i+1} = Y_i - 2^k_y), two barrel shifters form
// X_{i+1} * 2^k_y and Y_{i+1} * 2^k_x, and an adder adds these and 2^(k_x+k_y)
// to the running product P_i. The residues feed the next block, so block i
// approximates the error term X_i * Y_i left by block i-1 (Mitchell's
// approximation refined iteratively). With enough blocks the product is exact;
// with n blocks the relative error is at most 2^-2n. A block whose operand is
// zero adds nothing. The run-time stage enable lets one core serve lanes of
// different precisions with different stage counts (this design's choice).
//
// Interface: x, y unsigned operands; nstages active blocks (0..NS);
// p the 2W-bit approximate product. Purely combinational.
module ilm_core #(
  parameter int W  = 32,
  parameter int NS = 12,
  localparam int KW = $clog2(W),
  localparam int NSW = $clog2(NS + 1)
) (
  input  logic [W-1:0]   x,
  input  logic [W-1:0]   y,
  input  logic [NSW-1:0] nstages,
  output logic [2*W-1:0] p
);

  logic [W-1:0]   xs [NS+1];
  logic [W-1:0]   ys [NS+1];
  logic [2*W-1:0] ps [NS+1];

  assign xs[0] = x;
  assign ys[0] = y;
  assign ps[0] = '0;

  for (genvar i = 0; i < NS; i++) begin : g_block
    logic [KW-1:0]  kx, ky;
    logic [W-1:0]   xr, yr;
    logic           act;
    logic [2*W-1:0] term;

    // Leading-one detector and priority encoder.
    always_comb begin
      kx = '0;
      ky = '0;
      for (int b = 0; b < W; b++) begin
        if (xs[i][b]) kx = KW'(b);
        if (ys[i][b]) ky = KW'(b);
      end
    end

    assign act  = (NSW'(i) < nstages) && (xs[i] != '0) && (ys[i] != '0);
    assign xr   = xs[i] ^ (W'(1) << kx);
    assign yr   = ys[i] ^ (W'(1) << ky);
    assign term = ((2*W)'(1) << ({1'b0, kx} + {1'b0, ky})) + ((2*W)'(xr) << ky) + ((2*W)'(yr) << kx);

    assign xs[i+1] = act ? xr : '0;
    assign ys[i+1] = act ? yr : '0;
    assign ps[i+1] = act ? ps[i] + term : ps[i];
  end

  assign p = ps[NS];

endmodule
