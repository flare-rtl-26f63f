// tb_neural_engine -- slice intake, fused first layer on the PE array.
//
// Reduced sizes: 8x8 slices, an 8x8 PE array (so the 36 output pixels of a
// slice need five tiles, the last one partial) and 4 output channels. Random
// Q.12 weights and biases are loaded; several slices (min, max, 64 values)
// are sent with random gaps. For each slice the testbench recomputes W' and
// b' with the fixed-point recipe of the fusion unit and then the 3x3 valid
// convolution of the raw slice in 64-bit arithmetic, and compares every
// output value (pixel-major, channel inner) and the o_last flag, under random
// output back-pressure. The slice counter and the global buffer (raw slice in
// the lower half, feature map in the upper half) are checked as well.
module tb_neural_engine;
  import flare_pkg::*;
  localparam int K = 3, R = 8, C = 8, OC = 4;
  localparam int B = 1 << K, OE = B - 2;
  localparam longint GBB = 64'd16384;
  localparam int GBW = int'(GBB / 4);
  localparam int KT = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, s_last, w_we, b_we, o_valid, o_ready, o_last, busy;
  data_t s_data, o_data, gb_rdata;
  logic [$clog2(KT*OC)-1:0] w_addr;
  logic [$clog2(OC+1)-1:0]  b_addr;
  logic signed [CW_W-1:0]   w_data, b_data;
  logic [$clog2(GBW)-1:0]   gb_raddr;
  logic [31:0] slices_done;

  neural_engine #(.K(K), .ROWS(R), .COLS(C), .OC(OC), .GB_BYTES(GBB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  longint W [KT][OC], Bs [OC];
  longint D [B][B];
  data_t  exp_o [$];
  data_t  got_o [$];
  int     last_pos [$];
  int     nout;

  always @(posedge clk) if (o_valid && o_ready) begin
    got_o.push_back(o_data);
    if (o_last) last_pos.push_back(nout);
    nout++;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NSL = 4;
  initial begin
    longint mn, mx, r, recip, wp [KT][OC], bp [OC];
    s_valid = 0; s_data = 0; s_last = 0; w_we = 0; b_we = 0; w_addr = 0; b_addr = 0;
    w_data = 0; b_data = 0; o_ready = 0; gb_raddr = 0; nout = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < KT; k++)
      for (int o = 0; o < OC; o++) begin
        W[k][o] = longint'($urandom_range(0, 8191)) - 4096;
        @(negedge clk); w_we = 1; w_addr = $bits(w_addr)'(k * OC + o); w_data = CW_W'(W[k][o]);
      end
    for (int o = 0; o < OC; o++) begin
      Bs[o] = longint'($urandom_range(0, 8191)) - 4096;
      @(negedge clk); w_we = 0; b_we = 1; b_addr = $bits(b_addr)'(o); b_data = CW_W'(Bs[o]);
    end
    @(negedge clk); b_we = 0;
    fork
      // output consumer
      forever begin
        @(negedge clk);
        o_ready = ($urandom_range(0, 3) != 0);
      end
      // slice producer
      for (int sl = 0; sl < NSL; sl++) begin
        longint base;
        base = longint'($urandom_range(0, 4000000)) - 2000000;
        mn = 64'sh7fffffff; mx = -64'sh80000000;
        for (int y = 0; y < B; y++)
          for (int x = 0; x < B; x++) begin
            D[y][x] = base + 3000 * x - 2000 * y + longint'($urandom_range(0, 50000));
            if (D[y][x] < mn) mn = D[y][x];
            if (D[y][x] > mx) mx = D[y][x];
          end
        r = mx - mn;
        recip = (64'sd1 <<< 48) / r;
        for (int o = 0; o < OC; o++) begin
          longint sw;
          sw = 0;
          for (int k = 0; k < KT; k++) begin
            wp[k][o] = (W[k][o] * recip) >>> 20;
            sw += wp[k][o];
          end
          bp[o] = (Bs[o] <<< 28) - mn * sw;
        end
        for (int y = 0; y < OE; y++)
          for (int x = 0; x < OE; x++)
            for (int o = 0; o < OC; o++) begin
              longint acc;
              acc = bp[o];
              for (int k = 0; k < KT; k++) acc += D[y + k / 3][x + k % 3] * wp[k][o];
              exp_o.push_back(data_t'(acc >>> 24));
            end
        for (int w = 0; w < 2 + B * B; w++) begin
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) begin s_valid = 0; @(negedge clk); end
          s_valid = 1;
          s_data  = (w == 0) ? data_t'(mn) : (w == 1) ? data_t'(mx) : data_t'(D[(w - 2) / B][(w - 2) % B]);
          s_last  = (w == 1 + B * B);
          @(posedge clk);
          while (!s_ready) @(posedge clk);
        end
        @(negedge clk); s_valid = 0; s_last = 0;
        // raw slice in the global buffer (ring of slices in the lower half)
        wait (slices_done == 32'(sl + 1));
        for (int i = 0; i < B * B; i += 5) begin
          @(negedge clk); gb_raddr = $bits(gb_raddr)'(sl * B * B + i);
          @(negedge clk);
          check(gb_rdata == data_t'(D[i / B][i % B]), "raw slice in global buffer");
        end
        for (int i = 0; i < OE * OE * OC; i += 7) begin
          @(negedge clk); gb_raddr = $bits(gb_raddr)'(GBW / 2 + sl * OE * OE * OC + i);
          @(negedge clk);
          check(gb_rdata == exp_o[sl * OE * OE * OC + i], "feature map in global buffer");
        end
      end
    join_any
    disable fork;
    check(slices_done == NSL, "slice counter");
    check(got_o.size() == exp_o.size(), $sformatf("outputs %0d vs %0d", got_o.size(), exp_o.size()));
    for (int i = 0; i < exp_o.size() && i < got_o.size(); i++)
      check(got_o[i] == exp_o[i], $sformatf("out %0d: %0d vs %0d", i, got_o[i], exp_o[i]));
    check(last_pos.size() == NSL, "one o_last per slice");
    foreach (last_pos[i]) check(last_pos[i] == (i + 1) * OE * OE * OC - 1, "o_last position");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
