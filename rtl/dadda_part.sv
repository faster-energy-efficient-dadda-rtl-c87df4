// dadda_part: the partial product summation tree of one of the two halves
// of the partitioned multiplier.
//
// The N*N partial products occupy columns 0..2N-2. Instead of one tree over
// all of them (whose tallest column, in the middle, sets the delay), they are
// split: part0 (PART = 0) takes columns 0..N-1, with heights 1, 2, ..., N;
// part1 (PART = 1) takes columns N..2N-2, with heights N-1, ..., 1. The two
// trees share no signal and run in parallel.
//
// Each tree is a regular Dadda reduction. The height targets are
// 2, 3, 4, 6, 9, 13, ...; a tree whose tallest column is h uses every target
// below h, from the largest down. In a stage with target d, a column whose
// bits plus the carries arriving from the column below exceed d by e gets
// floor(e/2) full adders and (e mod 2) half adders, fed from the bottom of the
// column. After the last stage no column holds more than two bits, and a
// ripple chain of adders (a half adder at the first column with two bits,
// full adders above it) turns the two rows into one.
//
// Output: part0 gives sum = p0[N+L-1:0] (L = log2 N): p0[N-1:0] is already
// the low half of the product and p0[N+L-1:N] are the carries that spill past
// column N-1. part1 gives sum = p1[2N-1:N], bit 0 being column N.
// The compressor counts, column heights and carry paths are computed at
// elaboration time by the functions below. Combinational.
//
// Follows the published design: the split into two parts, the regular Dadda
// rule (it reproduces the published first-stage counters of the 8 x 8 case)
// and the output widths. This design's own choices: which bits of a column
// feed which counter after the first stage (bottom of the column first), and
// a ripple chain for the last two rows, as drawn, where the published text
// names a carry look-ahead adder. Lint notes: sum[0] of part0 is wired
// straight from pp[0][0] (column 0 has a single bit), and the low bits and
// the top bit of the carry vector fc exist only for uniform indexing.
module dadda_part
  import dadda_pkg::*;
#(
  parameter int unsigned N    = 64,
  parameter bit          PART = 1'b0
) (
  input  logic [N-1:0][N-1:0]                          pp,   // pp[j][i] = a[i] & b[j]
  output logic [(PART ? N : N + hyb_rca_width(N))-1:0] sum
);
  localparam int unsigned L    = hyb_rca_width(N);
  localparam int unsigned W    = PART ? N : N + L;  // columns of this part
  localparam int unsigned OFS  = PART ? N : 0;      // absolute column of local column 0
  localparam int unsigned MAXH = PART ? N - 1 : N;  // tallest column
  localparam int unsigned S    = dadda_stages(MAXH);

  // Tables indexed [stage][column], one byte per entry.
  typedef logic [S:0][W-1:0][7:0] tab_t;

  function automatic int unsigned init_height(input int unsigned j);
    if (!PART) return (j < N) ? j + 1 : 0;
    else       return (j < N - 1) ? N - 1 - j : 0;
  endfunction

  // sel = 0: column heights before each stage (row S: after the last stage)
  // sel = 1: full adders per stage and column
  // sel = 2: half adders per stage and column
  function automatic tab_t dadda_table(input int unsigned sel);
    tab_t h, f, ha;
    int unsigned d, cin, e, hj;
    h = '0; f = '0; ha = '0;
    for (int unsigned j = 0; j < W; j++) h[0][j] = 8'(init_height(j));
    for (int unsigned s = 0; s < S; s++) begin
      d   = dadda_d(S - s);
      cin = 0;
      for (int unsigned j = 0; j < W; j++) begin
        hj = int'(h[s][j]);
        e  = (hj + cin > d) ? hj + cin - d : 0;
        f[s][j]   = 8'(e / 2);
        ha[s][j]  = 8'(e % 2);
        h[s+1][j] = 8'(hj + cin - e);
        cin = e / 2 + e % 2;
      end
    end
    case (sel)
      0:       return h;
      1:       return f;
      default: return ha;
    endcase
  endfunction

  localparam tab_t HT = dadda_table(0);
  localparam tab_t FT = dadda_table(1);
  localparam tab_t AT = dadda_table(2);

  // Final carry chain: fc[j] = 1 when column j receives a carry from the
  // chain (i.e. column j-1 holds at least two bits including its own carry).
  function automatic logic [W:0] chain_carries();
    logic [W:0] fc = '0;
    for (int unsigned j = 0; j < W; j++)
      fc[j+1] = (int'(HT[S][j]) + int'(fc[j])) >= 2;
    return fc;
  endfunction
  localparam logic [W:0] FC = chain_carries();

  // Elaboration checks: no carry may leave the top column, and every stage
  // must fit the counters it places into the column it has.
  function automatic bit table_ok();
    for (int unsigned s = 0; s < S; s++) begin
      if (FT[s][W-1] != 0 || AT[s][W-1] != 0) return 1'b0;
      for (int unsigned j = 0; j < W; j++)
        if (3 * int'(FT[s][j]) + 2 * int'(AT[s][j]) > int'(HT[s][j])) return 1'b0;
    end
    for (int unsigned j = 0; j < W; j++) if (HT[S][j] > 2) return 1'b0;
    return !FC[W];
  endfunction
  if (!table_ok()) begin : g_bad_table
    $error("dadda_part: Dadda schedule does not fit N=%0d PART=%0d", N, PART);
  end

  // col0[j][m]: bit m of column j before the first stage. Inside stage s,
  // cur is the column contents before it, nxt after it, and cy[j] the
  // carries column j sends to column j+1.
  logic [MAXH-1:0] col0 [W];

  // Initial columns, in ascending partial-product index (ascending j of b).
  for (genvar j = 0; j < W; j++) begin : g_init
    localparam int unsigned C    = j + OFS;
    localparam int unsigned KMIN = (C > N - 1) ? C - (N - 1) : 0;
    localparam int unsigned H0   = int'(HT[0][j]);
    for (genvar m = 0; m < MAXH; m++) begin : g_bit
      if (m < H0) begin : g_pp
        assign col0[j][m] = pp[KMIN + m][C - KMIN - m];
      end else begin : g_zero
        assign col0[j][m] = 1'b0;
      end
    end
  end

  // Reduction stages.
  for (genvar s = 0; s < S; s++) begin : g_stage
    logic [MAXH-1:0] cur [W];
    logic [MAXH-1:0] nxt [W];
    logic [MAXH-1:0] cy  [W];

    if (s == 0) begin : g_first
      assign cur = col0;
    end else begin : g_next
      assign cur = g_stage[s-1].nxt;
    end

    for (genvar j = 0; j < W; j++) begin : g_col
      localparam int unsigned NF  = int'(FT[s][j]);
      localparam int unsigned NH  = int'(AT[s][j]);
      localparam int unsigned HGT = int'(HT[s][j]);
      localparam int unsigned PT  = HGT - 3 * NF - 2 * NH;
      localparam int unsigned CIN = (j > 0) ? int'(FT[s][j-1]) + int'(AT[s][j-1]) : 0;

      for (genvar g = 0; g < NF; g++) begin : g_fa
        full_adder u_fa (
          .a(cur[j][3*g]), .b(cur[j][3*g+1]), .ci(cur[j][3*g+2]),
          .s(nxt[j][g]), .c(cy[j][g])
        );
      end
      for (genvar g = 0; g < NH; g++) begin : g_ha
        half_adder u_ha (
          .a(cur[j][3*NF+2*g]), .b(cur[j][3*NF+2*g+1]),
          .s(nxt[j][NF+g]), .c(cy[j][NF+g])
        );
      end
      for (genvar g = 0; g < PT; g++) begin : g_pass
        assign nxt[j][NF+NH+g] = cur[j][3*NF+2*NH+g];
      end
      for (genvar g = 0; g < CIN; g++) begin : g_cin
        assign nxt[j][NF+NH+PT+g] = cy[j-1][g];
      end
      for (genvar g = NF + NH + PT + CIN; g < MAXH; g++) begin : g_zero
        assign nxt[j][g] = 1'b0;
      end
      for (genvar g = NF + NH; g < MAXH; g++) begin : g_nocy
        assign cy[j][g] = 1'b0;
      end
    end
  end

  // Two rows left after the last stage.
  logic [MAXH-1:0] fin [W];
  if (S == 0) begin : g_nostage
    assign fin = col0;
  end else begin : g_laststage
    assign fin = g_stage[S-1].nxt;
  end

  // Final two-row addition: ripple chain across the columns.
  logic [W:0] fc;
  assign fc[0] = 1'b0;
  for (genvar j = 0; j < W; j++) begin : g_final
    localparam int unsigned HF = int'(HT[S][j]);
    if (HF == 2 && FC[j]) begin : g_fa
      full_adder u_fa (.a(fin[j][0]), .b(fin[j][1]), .ci(fc[j]), .s(sum[j]), .c(fc[j+1]));
    end else if (HF == 2) begin : g_ha2
      half_adder u_ha (.a(fin[j][0]), .b(fin[j][1]), .s(sum[j]), .c(fc[j+1]));
    end else if (HF == 1 && FC[j]) begin : g_ha1
      half_adder u_ha (.a(fin[j][0]), .b(fc[j]), .s(sum[j]), .c(fc[j+1]));
    end else if (HF == 1) begin : g_wire
      assign sum[j]  = fin[j][0];
      assign fc[j+1] = 1'b0;
    end else if (FC[j]) begin : g_carry
      assign sum[j]  = fc[j];
      assign fc[j+1] = 1'b0;
    end else begin : g_empty
      assign sum[j]  = 1'b0;
      assign fc[j+1] = 1'b0;
    end
  end
endmodule
