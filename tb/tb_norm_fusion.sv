// tb_norm_fusion -- per-slice weight rescaling for the fused first layer.
//
// Random first-layer weights (Q.12) and biases are loaded, then for many
// random (min, max) pairs the unit is started and W' and b' are compared
// bit-exactly with a software model of the same fixed-point recipe
// (recip = floor(2^48 / (max - min)), W' = sat32((W * recip) >> 20), Q.24,
// b' = (b << 28) - min * sum_k W', Q.40). Independently of the recipe, the fused
// layer applied to a random raw 3x3 patch must match, within a rounding
// tolerance, the original layer applied to the min/max-normalized patch,
// computed in floating point. The run time from start to done must be the
// 49 divider cycles plus one cycle per weight.
module tb_norm_fusion;
  import flare_pkg::*;
  localparam int KT = 9, OC = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we, b_we, start, busy, done;
  logic [$clog2(KT*OC)-1:0] w_addr;
  logic [$clog2(OC+1)-1:0]  b_addr;
  logic signed [CW_W-1:0]   w_data, b_data;
  data_t vmin, vmax;
  logic signed [31:0] wp [KT][OC];
  logic signed [63:0] bp [OC];

  norm_fusion #(.KT(KT), .OC(OC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  longint W [KT][OC];
  longint Bs [OC];

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_we = 0; b_we = 0; start = 0; w_addr = 0; b_addr = 0; w_data = 0; b_data = 0;
    vmin = 0; vmax = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < KT; k++)
      for (int o = 0; o < OC; o++) begin
        W[k][o] = longint'($urandom_range(0, 8191)) - 4096;   // +-1.0 in Q.12
        @(negedge clk); w_we = 1; w_addr = $bits(w_addr)'(k * OC + o); w_data = CW_W'(W[k][o]);
      end
    for (int o = 0; o < OC; o++) begin
      Bs[o] = longint'($urandom_range(0, 8191)) - 4096;
      @(negedge clk); w_we = 0; b_we = 1; b_addr = $bits(b_addr)'(o); b_data = CW_W'(Bs[o]);
    end
    @(negedge clk); b_we = 0;

    for (int it = 0; it < 60; it++) begin
      longint mn, mx, r, recip, wpm [KT][OC], sw, cyc;
      real d [KT];
      longint draw [KT];
      mn = longint'($urandom_range(0, 2000000000)) - 1000000000;
      unique case (it % 4)
        0: mx = mn + longint'($urandom_range(1, 100));            // tiny range
        1: mx = mn + longint'($urandom_range(65536, 2000000));
        2: mx = mn + longint'($urandom_range(1, 1000000000));
        default: mx = (it == 3) ? mn : mn + 65536;                // flat slice, unit range
      endcase
      if (mx > 64'sd2147483647) mx = 64'sd2147483647;
      @(negedge clk);
      vmin = data_t'(mn); vmax = data_t'(mx); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == 1 + 49 + KT * OC, $sformatf("latency %0d", cyc));
      r = (mx > mn) ? mx - mn : 1;
      recip = (64'sd1 <<< 48) / r;
      for (int o = 0; o < OC; o++) begin
        longint bpm, v;
        sw = 0;
        for (int k = 0; k < KT; k++) begin
          v = (W[k][o] * recip) >>> 20;
          if (v > 64'sd2147483647) v = 64'sd2147483647;
          if (v < -64'sd2147483648) v = -64'sd2147483648;
          wpm[k][o] = v; sw += v;
          check(longint'(wp[k][o]) == v, $sformatf("W'[%0d][%0d] %0d vs %0d", k, o, wp[k][o], v));
        end
        bpm = (Bs[o] <<< 28) - mn * sw;
        check(longint'(bp[o]) == bpm, $sformatf("b'[%0d] %0d vs %0d", o, bp[o], bpm));
      end
      // fused layer on raw data == original layer on normalized data
      if (it % 4 == 1 || it % 4 == 2) begin
        for (int k = 0; k < KT; k++) begin
          draw[k] = mn + longint'($urandom_range(0, 1000)) * (mx - mn) / 1000;
          d[k] = real'(draw[k] - mn) / real'(mx - mn);
        end
        for (int o = 0; o < OC; o++) begin
          real ref_v, fused, tol;
          longint acc;
          ref_v = real'(Bs[o]) / 4096.0;
          for (int k = 0; k < KT; k++) ref_v += d[k] * real'(W[k][o]) / 4096.0;
          acc = longint'(bp[o]);
          for (int k = 0; k < KT; k++) acc += draw[k] * longint'(wp[k][o]);
          fused = real'(acc) / 1099511627776.0;
          // W' truncation: under one Q.24 lsb per tap, times (D - min) <= range
          tol = 1e-6 + 9.0 * real'(mx - mn) / 65536.0 / 16777216.0;
          check(fused - ref_v < tol && ref_v - fused < tol,
                $sformatf("fused %f vs normalized %f (tol %f)", fused, ref_v, tol));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
