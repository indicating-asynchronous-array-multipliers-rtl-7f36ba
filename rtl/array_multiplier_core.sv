// array_multiplier_core: the indicating N x N array multiplier (shift and
// add), without its input register.
//
// Partial products: N*N strongly indicating AND functions, pp[i][j] = A[i]B[j]
// of weight i+j. Array: N rows of N-1 weakly indicating full adders, N(N-1)
// in all, indexed here by row k = 1..N and bit weight w.
//   row 1, w = 1..N-1:       A[w]B0 + A[w-1]B1, carry input the constant 0
//   row k = 2..N-1,
//          w = k..k+N-2:     A[w-k]B[k] + (sum of row k-1 at weight w, or
//                            A[N-1]B[k-1] at the row's top weight)
//                            + carry of row k-1 from weight w-1
//   row N, w = N..2N-2:      (sum of row N-1 at weight w, or A[N-1]B[N-1] at
//                            the top weight) + carry of row N-1 from weight
//                            w-1 + ripple carry from weight w-1 (constant 0
//                            at w = N)
// Rows 1..N-1 are carry-save; row N is a ripple-carry adder. Product bits:
// P0 = pp[0][0], P[k] = sum of row k at weight k (k < N), P[w] = sum of row N
// at weight w (N <= w <= 2N-2), P[2N-1] = carry out of row N.
// Exactly N adders have a constant-0 carry input (the N-1 of row 1 and the
// first of row N), as in the paper's array figures.
//
// Every product bit is dual-rail; because each adder's sum waits for all of its
// inputs, the full set of product bits indicates every primary input, while
// some product bits may be produced earlier from a subset (weak indication).
// No clock: outputs follow the inputs through C-elements and OR/AND gates.
// Implementation note: every (row, weight) position of the generate grid owns
// a sum and a carry signal; positions without an adder tie them to the spacer
// and leave them unread, which lint reports as unused signals.
module array_multiplier_core
  import dr_pkg::*;
#(
  parameter protocol_e   PROTOCOL = RTO,
  parameter int unsigned N        = 8
) (
  input  logic              rst,
  input  dr_t [N-1:0]       a,
  input  dr_t [N-1:0]       b,
  output dr_t [2*N-1:0]     p
);

  localparam int unsigned PW = 2 * N;

  dr_t pp [N][N];       // pp[i][j] = a[i] & b[j]
  dr_t zero_dr;         // unused carry input of the CIN_RESET adders

  assign zero_dr = dr_encode(PROTOCOL, 1'b0);

  for (genvar i = 0; i < N; i++) begin : g_ppi
    for (genvar j = 0; j < N; j++) begin : g_ppj
      si_and2 #(.PROTOCOL(PROTOCOL)) u_and (.rst(rst), .a(a[i]), .b(b[j]), .z(pp[i][j]));
    end
  end

  for (genvar k = 0; k <= N; k++) begin : g_row
    for (genvar w = 0; w < PW; w++) begin : g_col
      dr_t s;   // sum of the adder at row k, weight w
      dr_t co;  // carry out of the adder at row k, weight w
      if (k == 1 && w >= 1 && w <= N - 1) begin : g_first
        wi_full_adder #(.PROTOCOL(PROTOCOL), .CIN_RESET(1'b1)) u_fa (
          .rst(rst), .a(pp[w][0]), .b(pp[w-1][1]), .ci(zero_dr),
          .s(s), .co(co));
      end else if (k >= 2 && k <= N - 1 && w >= k && w <= k + N - 2) begin : g_mid
        dr_t upper;
        if (w == k + N - 2) begin : g_top
          assign upper = pp[N-1][k-1];
        end else begin : g_sum
          assign upper = g_row[k-1].g_col[w].s;
        end
        wi_full_adder #(.PROTOCOL(PROTOCOL), .CIN_RESET(1'b0)) u_fa (
          .rst(rst), .a(pp[w-k][k]), .b(upper), .ci(g_row[k-1].g_col[w-1].co),
          .s(s), .co(co));
      end else if (k == N && N >= 2 && w >= N && w <= 2 * N - 2) begin : g_last
        dr_t upper;
        if (w == 2 * N - 2) begin : g_top
          assign upper = pp[N-1][N-1];
        end else begin : g_sum
          assign upper = g_row[N-1].g_col[w].s;
        end
        if (w == N) begin : g_lsb
          wi_full_adder #(.PROTOCOL(PROTOCOL), .CIN_RESET(1'b1)) u_fa (
            .rst(rst), .a(upper), .b(g_row[N-1].g_col[w-1].co), .ci(zero_dr),
            .s(s), .co(co));
        end else begin : g_rip
          wi_full_adder #(.PROTOCOL(PROTOCOL), .CIN_RESET(1'b0)) u_fa (
            .rst(rst), .a(upper), .b(g_row[N-1].g_col[w-1].co), .ci(g_row[N].g_col[w-1].co),
            .s(s), .co(co));
        end
      end else begin : g_none
        assign s  = dr_spacer(PROTOCOL);
        assign co = dr_spacer(PROTOCOL);
      end
    end
  end

  assign p[0] = pp[0][0];
  for (genvar k = 1; k < N; k++) begin : g_plo
    assign p[k] = g_row[k].g_col[k].s;
  end
  for (genvar w = N; w <= 2 * N - 2; w++) begin : g_phi
    assign p[w] = g_row[N].g_col[w].s;
  end
  assign p[2*N-1] = g_row[N].g_col[2*N-2].co;

endmodule
