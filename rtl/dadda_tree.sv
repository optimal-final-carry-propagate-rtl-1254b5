// dadda_tree: Dadda partial product summation tree (PPST) for an unsigned
// N x N multiplier.
//
// The N x N matrix from the AND array is rearranged into 2N weight columns
// (column c holds every b[i] & a[c-i]) and reduced in dadda_stages(N) stages.
// Stage s has a target height d taken from the Dadda sequence 2, 3, 4, 6, 9,
// 13, 19, 28, 42, 63, ... worked backwards from the final two rows, each
// height the largest integer not above 1.5 times its successor. In every
// column the stage places only as many full adders (3 bits -> 1) and half
// adders (2 bits -> 1) as are needed for the column, together with the
// carries arriving from the column below, to reach d. The schedule is computed
// at elaboration by cpa_pkg::dadda_stage, so the tree is pure wiring of
// full_adder and half_adder cells.
//
// Within a column of the next stage the bits are ordered: full-adder sums,
// half-adder sums, carries from the column below, then the bits that the stage
// left untouched. Column 0 holds the single bit b[0] & a[0], which passes
// through every stage unchanged and leaves as row0[0] (the P0 path that
// bypasses the reduction in the paper's block diagram).
//
// Output: two 2N-bit rows whose sum is a * b, to be added by the final carry
// propagate adder. Purely combinational.
module dadda_tree
  import cpa_pkg::*;
#(
  parameter int N = 64
) (
  input  logic [N-1:0][N-1:0] pp,     // pp[i][j] = b[i] & a[j]
  output logic [2*N-1:0]      row0,
  output logic [2*N-1:0]      row1
);
  localparam int C  = 2 * N;
  localparam int NS = dadda_stages(N);

  if (N < 4 || N > MAX_COLS / 2) begin : g_bad_n
    $error("dadda_tree: N must lie between 4 and %0d", MAX_COLS / 2);
  end

  // Each column of each stage is a small vector of its own: g_init[c].col0
  // holds column c of the matrix, g_stage[s].g_col[c].cur the bits entering
  // stage s and g_stage[s].g_col[c].nxt the bits it leaves.
  // ------------------------------------------------ matrix into columns
  for (genvar c = 0; c < C; c++) begin : g_init
    logic [N-1:0] col0;
    for (genvar r = 0; r < N; r++) begin : g_row
      if (r < pp_height(N, c)) begin : g_bit
        localparam int I = (c < N) ? r : r + (c - N + 1);
        assign col0[r] = pp[I][c-I];
      end else begin : g_zero
        assign col0[r] = 1'b0;
      end
    end
  end

  // ------------------------------------------------ reduction stages
  for (genvar s = 0; s < NS; s++) begin : g_stage
    localparam dadda_stage_t SCH = dadda_stage(N, s);
    for (genvar c = 0; c < C; c++) begin : g_col
      localparam int H  = int'(SCH[c][Q_HEIGHT]);
      localparam int F  = int'(SCH[c][Q_FA]);
      localparam int A  = int'(SCH[c][Q_HA]);
      localparam int CI = int'(SCH[c][Q_CIN]);
      localparam int FP = (c > 0) ? int'(SCH[c-1][Q_FA]) : 0;
      localparam int FW = (F > 0) ? F : 1;
      localparam int AW = (A > 0) ? A : 1;

      if (3 * F + 2 * A > H) begin : g_bad
        $error("dadda_tree: stage %0d column %0d needs more bits than it holds", s, c);
      end

      logic [N-1:0]  cur, nxt;
      if (s == 0) begin : g_first
        assign cur = g_init[c].col0;
      end else begin : g_later
        assign cur = g_stage[s-1].g_col[c].nxt;
      end

      logic [FW-1:0] fs, fc;   // full-adder sums and carries of this column
      logic [AW-1:0] hs, hc;   // half-adder sums and carries of this column

      for (genvar k = 0; k < F; k++) begin : g_fa
        full_adder u_fa (
          .x (cur[3*k]),
          .y (cur[3*k+1]),
          .ci(cur[3*k+2]),
          .s (fs[k]),
          .co(fc[k])
        );
      end
      if (F == 0) begin : g_nofa
        assign fs = '0;
        assign fc = '0;
      end

      for (genvar k = 0; k < A; k++) begin : g_ha
        half_adder u_ha (
          .x (cur[3*F+2*k]),
          .y (cur[3*F+2*k+1]),
          .s (hs[k]),
          .co(hc[k])
        );
      end
      if (A == 0) begin : g_noha
        assign hs = '0;
        assign hc = '0;
      end

      // Next-stage column: sums, carries from column c-1, untouched bits.
      for (genvar r = 0; r < N; r++) begin : g_out
        if (r < F) begin : g_fsum
          assign nxt[r] = fs[r];
        end else if (r < F + A) begin : g_hsum
          assign nxt[r] = hs[r-F];
        end else if (r < F + A + CI) begin : g_carry
          if (r - F - A < FP) begin : g_fcarry
            assign nxt[r] = g_col[c-1].fc[r-F-A];
          end else begin : g_hcarry
            assign nxt[r] = g_col[c-1].hc[r-F-A-FP];
          end
        end else if (r - (F + A + CI) + 3 * F + 2 * A < H) begin : g_pass
          assign nxt[r] = cur[r-(F+A+CI)+3*F+2*A];
        end else begin : g_zero
          assign nxt[r] = 1'b0;
        end
      end
    end
  end

  // ------------------------------------------------ two rows out
  for (genvar c = 0; c < C; c++) begin : g_rows
    assign row0[c] = g_stage[NS-1].g_col[c].nxt[0];
    assign row1[c] = g_stage[NS-1].g_col[c].nxt[1];
  end

endmodule
