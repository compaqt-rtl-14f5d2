// int_idct_core: combinational N-point HEVC integer inverse DCT, without
// the final rounding shift.
//
// Computes acc[n] = sum_k T_N[k][n] * y[k] for n = 0..N-1, where T_N is the
// HEVC integer DCT matrix (compaqt_pkg::hevc_t). It uses the standard even /
// odd ("partial butterfly") decomposition: the even-indexed coefficients form
// an N/2-point inverse transform of the same family (T_N[2k][n] = T_{N/2}[k][n]),
// computed by a recursive instance of this module, and the odd-indexed
// coefficients are combined directly into O[n] for n < N/2. The outputs are
//   acc[n]       = E[n] + O[n]
//   acc[N-1-n]   = E[n] - O[n]
// because even rows of T_N are symmetric and odd rows antisymmetric about the
// middle column. Every product by a matrix constant is built from shifts and
// adds (compaqt_pkg::shift_add_mul), so no multiplier is inferred.
//
// Interface: y (N signed IN_W-bit coefficients) in, acc (N signed 32-bit sums)
// out. Purely combinational; N must be a power of two, 1..16.
//
// The butterfly itself is the standard HEVC factorisation; the source
// architecture gives only the adder/shifter budget of the engine and that
// its multiplications are shift-and-add.
//
// Lint note: when this module is linted on its own, Verilator does not
// descend into the self-instance and reports y_even as unused and e as
// undriven. Both are connected to the N/2-point instance u_even. Synthesis
// elaborates the recursion fully, and the testbenches check all 16 outputs
// against a matrix product.
module int_idct_core
  import compaqt_pkg::*;
#(
  parameter int unsigned N    = 16,
  parameter int unsigned IN_W = 18
) (
  input  logic signed [IN_W-1:0] y   [N],
  output logic signed [31:0]     acc [N]
);

  if (N == 1) begin : g_base
    assign acc[0] = shift_add_mul(32'(y[0]), 64);
  end else begin : g_split
    localparam int unsigned H = N / 2;
    logic signed [IN_W-1:0] y_even [H];
    logic signed [31:0]     e      [H];
    logic signed [31:0]     o      [H];

    for (genvar k = 0; k < H; k++) begin : g_even
      assign y_even[k] = y[2*k];
    end

    int_idct_core #(.N(H), .IN_W(IN_W)) u_even (
      .y   (y_even),
      .acc (e)
    );

    for (genvar n = 0; n < H; n++) begin : g_odd
      always_comb begin
        o[n] = '0;
        for (int k = 0; k < H; k++) begin
          o[n] = o[n] + shift_add_mul(32'(y[2*k+1]), hevc_t(N, 2*k+1, n));
        end
      end
      assign acc[n]       = e[n] + o[n];
      assign acc[N-1-n]   = e[n] - o[n];
    end
  end

endmodule
