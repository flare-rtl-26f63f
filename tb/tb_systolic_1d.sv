// tb_systolic_1d -- checks one 1D systolic array against a software model.
//
// Random anchors are pushed through the delay line; for every target the
// testbench predicts with each weight set, quantizes, and compares pred,
// code and reconstruction with its own longint model, checks the error bound,
// then replays the code in decompression mode and checks that the same value
// comes back. Results must appear one cycle after calc.
module tb_systolic_1d;
  import flare_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pred_cfg_t cfg;
  mode_e  mode;
  logic   push, calc, out_valid;
  wsel_e  wsel;
  data_t  anchor_in, orig_in, value_in, pred_out, recon_out, value_out;
  code_t  code_in, code_out;

  systolic_1d dut (.*);

  int checks = 0, failures = 0;
  longint a [3];      // model window: t-3s, t-s, t+s

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint model_pred(input wsel_e ws, input longint w1, input longint w2,
                                        input longint w3);
    longint s;
    unique case (ws)
      WSEL_MAIN:   s = w1 * a[0] + w2 * a[1] + w3 * a[2];
      WSEL_LINEAR: s = 128 * a[1] + 128 * a[2];
      WSEL_COPY:   s = 256 * a[1];
      default:     s = 0;
    endcase
    return (s + 128) >>> 8;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint eb, p, q, rc, e;
    cfg.w1 = -16'sd32; cfg.w2 = 16'sd192; cfg.w3 = 16'sd96;   // (-1, 6, 3)/8
    eb = 1000;
    cfg.eb = data_t'(eb);
    cfg.inv2eb = 32'((64'd1 << 32) / (2 * eb));
    cfg.radius = 16'd32768;
    mode = MODE_COMPRESS; push = 0; calc = 0; wsel = WSEL_MAIN;
    anchor_in = '0; orig_in = '0; code_in = '0; value_in = '0;
    a = '{0, 0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int it = 0; it < 400; it++) begin
      wsel_e ws;
      data_t na, org;
      code_t ncode;
      ws  = wsel_e'(it % 4);
      na  = data_t'($signed($urandom_range(0, 2000000)) - 1000000);
      // mostly predictable, sometimes far away (outlier)
      org = (it % 7 == 3) ? data_t'($urandom) : data_t'(na + $signed($urandom_range(0, 20000)) - 10000);
      a[2] = na;
      p  = model_pred(ws, cfg.w1, cfg.w2, cfg.w3);
      e  = longint'(org) - p;
      q  = (e >= 0) ? (e + eb) / (2 * eb) : -((-e + eb) / (2 * eb));
      rc = p + q * 2 * eb;
      // drive compression
      @(negedge clk);
      mode = MODE_COMPRESS; anchor_in = na; orig_in = org; wsel = ws; calc = 1; push = 1;
      @(negedge clk);
      calc = 0; push = 0;
      check(out_valid, "out_valid one cycle after calc");
      check(longint'(pred_out) == p, $sformatf("pred %0d exp %0d ws %0d", pred_out, p, ws));
      if (code_out == 0) begin
        check(recon_out == org, "outlier keeps original");
        check(it % 7 == 3, "only far-off values become unpredictable");
      end else begin
        check(longint'(code_out) - 32768 == q || longint'(code_out) - 32768 == q + 1 ||
              longint'(code_out) - 32768 == q - 1, $sformatf("code %0d q %0d", code_out, q));
        check(longint'(recon_out) == p + (longint'(code_out) - 32768) * 2 * eb, "recon = pred + 2eb q");
      end
      e = longint'(org) - longint'(recon_out);
      check(e <= eb && e >= -eb, $sformatf("error bound %0d", e));
      ncode = code_out;
      // replay in decompression (window unchanged: push was applied after use,
      // so shift model back by re-pushing the same history)
      @(negedge clk);
      mode = MODE_DECOMPRESS; code_in = ncode; value_in = org; calc = 1; push = 0;
      anchor_in = na; wsel = ws;
      @(negedge clk);
      calc = 0;
      // the delay line has moved once; the window for decompression used the
      // shifted anchors, so compare against a model of that window
      begin
        longint sv0, sv1, pd;
        sv0 = a[0]; sv1 = a[1];
        a[0] = a[1]; a[1] = na;
        pd = model_pred(ws, cfg.w1, cfg.w2, cfg.w3);
        check(longint'(pred_out) == pd, "decompression prediction");
        if (ncode == 0) check(recon_out == org, "decompression verbatim");
        else check(longint'(recon_out) == pd + (longint'(ncode) - 32768) * 2 * eb,
                   "decompression reconstruction");
        a[0] = sv0; a[1] = sv1;
      end
      // commit the compression push to the model
      a[0] = a[1]; a[1] = na;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
