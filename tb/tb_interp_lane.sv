// tb_interp_lane -- one prediction lane, compression then decompression.
//
// The testbench holds the block memory, fills it with a smooth random field
// (plus a few spikes that must come out as unpredictable points) and runs a
// behavioural model of the lane: the same depth-first task order written as a
// recursion, the three passes per task, the sliding-window prediction with
// its end-of-line fallbacks and the quantizer. It compares every quant item
// (in order), every streamed slice (min, max, values) and the reconstructed
// block, checks the error bound on every point, and then decompresses the
// recorded items and checks that the same reconstruction and slices return.
// Random back-pressure is applied on every stream.
module tb_interp_lane;
  import flare_pkg::*;
  localparam int K = 4;
  localparam int B = 1 << K;
  localparam int N = B * B * B;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, mem_en, mem_we, q_valid, q_ready, c_valid, c_ready, s_valid, s_ready, s_last;
  logic busy, done;
  mode_e mode;
  pred_cfg_t cfg;
  logic [3*K:0] mem_addr;
  data_t mem_wdata, mem_rdata, s_data;
  qitem_t q_item, c_item;

  interp_lane #(.K(K)) dut (.*);

  data_t mem [2*N];
  always_ff @(posedge clk) if (mem_en) begin
    if (mem_we) mem[mem_addr] <= mem_wdata;
    mem_rdata <= mem[mem_addr];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---- model ------------------------------------------------------------------
  longint orig [N], rec [N];
  qitem_t exp_q [$];
  data_t  exp_s [$];
  longint eb;

  function automatic int idx(input int x, input int y, input int z);
    return (z * B + y) * B + x;
  endfunction

  function automatic void quant(input int i, input longint p);
    longint e, q, rc;
    bit out;
    e  = orig[i] - p;
    q  = (e * longint'(cfg.inv2eb) + (64'sd1 <<< 31)) >>> 32;
    rc = p + q * 2 * eb;
    out = (q >= 32768 || q <= -32768) || (orig[i] - rc > eb) || (rc - orig[i] > eb) ||
          rc > 64'sh7fffffff || rc < -64'sh80000000;
    rec[i] = out ? orig[i] : rc;
    exp_q.push_back('{code: out ? 16'd0 : code_t'(q + 32768), value: data_t'(orig[i])});
  endfunction

  // pass: 0 z, 1 y, 2 x ; line fixed by (a1, a2), target coordinate t
  function automatic int pidx(input int pass, input int a1, input int a2, input int t);
    if (pass == 0) return idx(a1, a2, t);
    if (pass == 1) return idx(a1, t, a2);
    return idx(t, a1, a2);
  endfunction

  function automatic void target(input int pass, input int a1, input int a2, input int t,
                                 input int s, input bit upper);
    longint p;
    bit hr;
    hr = (t + s < B) && !(pass == 0 && upper);
    if (!hr) p = rec[pidx(pass, a1, a2, t - s)];
    else if (t >= 3 * s)
      p = (longint'(cfg.w1) * rec[pidx(pass, a1, a2, t - 3*s)] +
           longint'(cfg.w2) * rec[pidx(pass, a1, a2, t - s)] +
           longint'(cfg.w3) * rec[pidx(pass, a1, a2, t + s)] + 128) >>> 8;
    else
      p = (128 * rec[pidx(pass, a1, a2, t - s)] + 128 * rec[pidx(pass, a1, a2, t + s)] + 128) >>> 8;
    quant(pidx(pass, a1, a2, t), p);
  endfunction

  function automatic void do_task(input int l, input int lo, input bit upper);
    int s, hi;
    s = 1 << (l - 1);
    hi = lo + 2 * s;
    for (int y = 0; y < B; y += 2 * s)
      for (int x = 0; x < B; x += 2 * s)
        target(0, x, y, lo + s, s, upper);
    for (int z = lo; z < hi; z += s)
      for (int x = 0; x < B; x += 2 * s)
        for (int t = s; t < B; t += 2 * s) target(1, x, z, t, s, upper);
    for (int z = lo; z < hi; z += s)
      for (int y = 0; y < B; y += s)
        for (int t = s; t < B; t += 2 * s) target(2, y, z, t, s, upper);
    if (l == 1)
      for (int z = lo; z < hi; z++) begin
        longint mn, mx;
        mn = rec[idx(0, 0, z)]; mx = mn;
        for (int i = 0; i < B * B; i++) begin
          if (rec[z * B * B + i] < mn) mn = rec[z * B * B + i];
          if (rec[z * B * B + i] > mx) mx = rec[z * B * B + i];
        end
        exp_s.push_back(data_t'(mn));
        exp_s.push_back(data_t'(mx));
        for (int i = 0; i < B * B; i++) exp_s.push_back(data_t'(rec[z * B * B + i]));
      end
    else begin
      do_task(l - 1, lo, 0);
      do_task(l - 1, lo + s, 1);
    end
  endfunction

  // ---- stream monitors ------------------------------------------------------------
  qitem_t got_q [$];
  data_t  got_s [$];
  int     slast_cnt;
  always @(posedge clk) begin
    if (q_valid && q_ready) got_q.push_back(q_item);
    if (s_valid && s_ready) begin
      got_s.push_back(s_data);
      if (s_last) slast_cnt++;
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ci;
  initial begin
    longint emax;
    eb = 50;
    cfg.w1 = -16'sd32; cfg.w2 = 16'sd192; cfg.w3 = 16'sd96;
    cfg.eb = data_t'(eb);
    cfg.inv2eb = 32'((64'd1 << 32) / (2 * eb));
    cfg.radius = 16'd32768;
    start = 0; q_ready = 0; s_ready = 0; c_valid = 0; c_item = '0;
    mode = MODE_COMPRESS;
    for (int z = 0; z < B; z++)
      for (int y = 0; y < B; y++)
        for (int x = 0; x < B; x++) begin
          longint v;
          v = 1000 * x * x - 700 * y * z + 3000 * z + $signed($urandom_range(0, 400)) - 200;
          if ($urandom_range(0, 200) == 0) v = longint'($signed($urandom)) / 4;   // spike
          orig[idx(x, y, z)] = v;
          mem[idx(x, y, z)] = data_t'(v);
        end
    quant(0, 0);
    do_task(K, 0, 0);
    check(exp_q.size() == N, "model visits every point once");
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      begin
        while (!done) begin
          @(negedge clk);
          q_ready = ($urandom_range(0, 3) != 0);
          s_ready = ($urandom_range(0, 3) != 0);
        end
      end
    join
    @(negedge clk); q_ready = 0; s_ready = 0;
    check(got_q.size() == N, $sformatf("compression: %0d items", got_q.size()));
    for (int i = 0; i < N && i < got_q.size(); i++)
      check(got_q[i] == exp_q[i] || (got_q[i].code != 0 && got_q[i].code == exp_q[i].code),
            $sformatf("item %0d code %0d exp %0d", i, got_q[i].code, exp_q[i].code));
    check(got_s.size() == exp_s.size(), "slice words");
    for (int i = 0; i < exp_s.size() && i < got_s.size(); i++)
      check(got_s[i] == exp_s[i], $sformatf("slice word %0d", i));
    check(slast_cnt == B, "one s_last per slice");
    emax = 0;
    for (int i = 0; i < N; i++) begin
      longint e;
      check(longint'(mem[N + i]) == rec[i], $sformatf("recon %0d", i));
      e = longint'(mem[N + i]) - orig[i];
      if (e < 0) e = -e;
      if (e > emax) emax = e;
    end
    check(emax <= eb, $sformatf("max error %0d within bound", emax));
    // ---- decompression ----
    for (int i = 0; i < N; i++) mem[N + i] = '0;
    for (int i = 0; i < N; i++) mem[i] = '0;   // originals are not available
    got_s.delete(); slast_cnt = 0;
    mode = MODE_DECOMPRESS;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    ci = 0;
    while (!done) begin
      c_valid = (ci < N) && ($urandom_range(0, 3) != 0);
      c_item  = (ci < N) ? exp_q[ci] : '0;
      s_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (c_valid && c_ready) ci++;
      @(negedge clk);
    end
    check(ci == N, "decompression consumed every item");
    for (int i = 0; i < N; i++)
      check(longint'(mem[N + i]) == rec[i], $sformatf("decompressed %0d", i));
    check(got_s.size() == exp_s.size(), "decompression slice words");
    for (int i = 0; i < exp_s.size() && i < got_s.size(); i++)
      check(got_s[i] == exp_s[i], $sformatf("decompression slice word %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
