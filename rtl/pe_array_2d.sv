// pe_array_2d -- the Neural Engine's 2D PE array (128 x 128 in the paper).
//
// An output-stationary systolic grid computing C = A x B, with A of ROWS x KD
// and B of KD x COLS, for any depth KD. In each `in_valid` cycle k the caller
// presents column k of A on a_in (one value per row) and row k of B on b_in
// (one value per column). Row r of A is delayed r cycles and column c of B is
// delayed c cycles on entry (input skew), after which A values move one PE to
// the right and B values one PE down per cycle; PE (r, c) multiplies the pair
// that meets there and adds it to its own accumulator. A valid bit travels
// with the A values. The last product is added in PE (ROWS-1, COLS-1)
// ROWS + COLS - 1 clock edges after the edge that takes the last input, so C
// is complete KD + ROWS + COLS - 2 edges after the first input edge. `clear` zeroes every
// accumulator; rd_row selects the row of C shown on rd_data.
//
// The paper gives the grid and nearest-neighbour links (its figure draws
// them double-headed); the output-stationary dataflow, the rightward and
// downward flow and the operand widths are this design's choices.
module pe_array_2d #(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned COLS  = 128,
  parameter int unsigned A_W   = 32,
  parameter int unsigned B_W   = 32,
  parameter int unsigned ACC_W = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic signed [A_W-1:0]   a_in [ROWS],
  input  logic signed [B_W-1:0]   b_in [COLS],
  input  logic [$clog2(ROWS)-1:0] rd_row,
  output logic signed [ACC_W-1:0] rd_data [COLS]
);

  // ---- input skew -----------------------------------------------------------
  logic signed [A_W-1:0] a_sk [ROWS];
  logic                  v_sk [ROWS];
  logic signed [B_W-1:0] b_sk [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_askew
    if (r == 0) begin : g_d0
      assign a_sk[r] = a_in[r];
      assign v_sk[r] = in_valid;
    end else begin : g_dn
      logic signed [A_W-1:0] dl  [r];
      logic                  dlv [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < r; d++) begin dl[d] <= '0; dlv[d] <= 1'b0; end
        end else begin
          dl[0]  <= a_in[r];
          dlv[0] <= in_valid;
          for (int d = 1; d < r; d++) begin dl[d] <= dl[d-1]; dlv[d] <= dlv[d-1]; end
        end
      end
      assign a_sk[r] = dl[r-1];
      assign v_sk[r] = dlv[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bskew
    if (c == 0) begin : g_d0
      assign b_sk[c] = b_in[c];
    end else begin : g_dn
      logic signed [B_W-1:0] dl [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < c; d++) dl[d] <= '0;
        end else begin
          dl[0] <= b_in[c];
          for (int d = 1; d < c; d++) dl[d] <= dl[d-1];
        end
      end
      assign b_sk[c] = dl[c-1];
    end
  end

  // ---- PE grid -----------------------------------------------------------------
  logic signed [A_W-1:0]   a_q [ROWS][COLS];   // A value held in PE (r,c)
  logic                    v_q [ROWS][COLS];
  logic signed [B_W-1:0]   b_q [ROWS][COLS];
  logic signed [ACC_W-1:0] acc [ROWS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          a_q[r][c] <= '0;
          v_q[r][c] <= 1'b0;
          b_q[r][c] <= '0;
          acc[r][c] <= '0;
        end
    end else begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          a_q[r][c] <= (c == 0) ? a_sk[r] : a_q[r][c-1];
          v_q[r][c] <= (c == 0) ? v_sk[r] : v_q[r][c-1];
          b_q[r][c] <= (r == 0) ? b_sk[c] : b_q[r-1][c];
          if (clear)
            acc[r][c] <= '0;
          else if (v_q[r][c])
            acc[r][c] <= acc[r][c] + ACC_W'(a_q[r][c]) * ACC_W'(b_q[r][c]);
        end
    end
  end

  assign rd_data = acc[rd_row];

endmodule
