// tb_pe_array_2d -- output-stationary 2D PE array (reduced to 8 x 6).
//
// Random signed A (ROWS x KD) and B (KD x COLS) matrices of random depth KD
// are fed one k-slice per cycle, sometimes with idle cycles in between (the
// valid bit must travel with the data). Every row of C is read back and
// compared with a software product. The timing claim of the module is
// checked too: with back-to-back input, C is complete KD + ROWS + COLS - 2
// edges after the edge that takes the first input, and the corner PE still lacks its last
// product one cycle earlier. `clear` must zero the accumulators.
module tb_pe_array_2d;
  localparam int R = 8, C = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid;
  logic signed [31:0] a_in [R], b_in [C];
  logic [$clog2(R)-1:0] rd_row;
  logic signed [63:0] rd_data [C];

  pe_array_2d #(.ROWS(R), .COLS(C), .A_W(32), .B_W(32), .ACC_W(64)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  longint A [R][16], Bm [16][C], Cm [R][C];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; in_valid = 0; rd_row = 0;
    for (int i = 0; i < R; i++) a_in[i] = 0;
    for (int i = 0; i < C; i++) b_in[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      int kd, cyc;
      bit gaps;
      kd = $urandom_range(1, 16);
      gaps = (it % 2 == 1);
      for (int r = 0; r < R; r++) for (int k = 0; k < kd; k++)
        A[r][k] = longint'($urandom_range(0, 2000000)) - 1000000;
      for (int k = 0; k < kd; k++) for (int c = 0; c < C; c++)
        Bm[k][c] = (k == kd - 1 && c == C - 1) ? 5 : longint'($urandom_range(0, 2000000)) - 1000000;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        Cm[r][c] = 0;
        for (int k = 0; k < kd; k++) Cm[r][c] += A[r][k] * Bm[k][c];
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      cyc = 0;
      for (int k = 0; k < kd; k++) begin
        if (gaps && $urandom_range(0, 1)) begin
          in_valid = 0;
          for (int r = 0; r < R; r++) a_in[r] = 32'($urandom);
          for (int c = 0; c < C; c++) b_in[c] = 32'($urandom);
          @(negedge clk); cyc++;
        end
        in_valid = 1;
        for (int r = 0; r < R; r++) a_in[r] = 32'(A[r][k]);
        for (int c = 0; c < C; c++) b_in[c] = 32'(Bm[k][c]);
        @(negedge clk); cyc++;
      end
      in_valid = 0;
      if (!gaps) begin
        // cycle count: at kd + R + C - 2 the corner still lacks its last product
        while (cyc < kd + R + C - 2) begin @(negedge clk); cyc++; end
        rd_row = $bits(rd_row)'(R - 1);
        #1;
        check(rd_data[C-1] != Cm[R-1][C-1], "corner not complete one cycle early");
        @(negedge clk); cyc++;
        #1;
        check(rd_data[C-1] == Cm[R-1][C-1], $sformatf("corner complete after %0d cycles", cyc));
      end else begin
        repeat (R + C + 2) @(negedge clk);
      end
      for (int r = 0; r < R; r++) begin
        rd_row = $bits(rd_row)'(r);
        #1;
        for (int c = 0; c < C; c++)
          check(rd_data[c] == Cm[r][c], $sformatf("C[%0d][%0d] %0d vs %0d", r, c, rd_data[c], Cm[r][c]));
      end
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int r = 0; r < R; r++) begin
      rd_row = $bits(rd_row)'(r);
      #1;
      for (int c = 0; c < C; c++) check(rd_data[c] == 0, "clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
