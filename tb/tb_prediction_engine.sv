// tb_prediction_engine -- M lanes sharing the banked SRAM, merged streams.
//
// Three lanes (so the round-robin pointer must wrap at a non-power of two)
// work on three different 8x8x8 blocks held in the three banks at a non-zero
// slot. Each block gets its own smooth random field with a few spikes. A
// per-lane behavioural model (task order, passes, prediction, quantizer,
// slice min/max) produces each lane's expected items and slices; the
// engine's merged quant stream must be the round-robin interleave, one item
// per lane in turn, and its slice stream whole slices in lane order. The
// reconstructed blocks are checked in every bank. Decompression then feeds
// the merged item stream back and must rebuild the same blocks and slices.
// Random back-pressure on every stream.
module tb_prediction_engine;
  import flare_pkg::*;
  localparam int K = 3, MM = 3;
  localparam int B = 1 << K;
  localparam int N = B * B * B;
  localparam int LAW = 3 * K + 1;
  localparam int BAW = LAW + 2;
  localparam int SLOT = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, q_valid, q_ready, c_valid, c_ready, s_valid, s_ready, s_last, busy, done;
  mode_e mode;
  pred_cfg_t cfg;
  logic [BAW-LAW-1:0] slot;
  logic mem_en [MM], mem_we [MM];
  logic [BAW-1:0] mem_addr [MM];
  data_t mem_wdata [MM], mem_rdata [MM], s_data;
  qitem_t q_item, c_item;

  prediction_engine #(.M(MM), .K(K), .BAW(BAW)) dut (.*);

  data_t bank [MM][1 << BAW];
  for (genvar b = 0; b < MM; b++) begin : g_bank
    always_ff @(posedge clk) if (mem_en[b]) begin
      if (mem_we[b]) bank[b][mem_addr[b]] <= mem_wdata[b];
      mem_rdata[b] <= bank[b][mem_addr[b]];
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---- model ------------------------------------------------------------------
  longint orig_a [MM][N], rec_a [MM][N];
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
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  qitem_t lane_q [MM][$];
  data_t  lane_s [MM][$];
  qitem_t all_q [$];
  data_t  all_s [$];
  int ci;
  localparam int SB = 2 + B * B;   // words per slice
  initial begin
    eb = 50;
    cfg.w1 = -16'sd32; cfg.w2 = 16'sd192; cfg.w3 = 16'sd96;
    cfg.eb = data_t'(eb);
    cfg.inv2eb = 32'((64'd1 << 32) / (2 * eb));
    cfg.radius = 16'd32768;
    start = 0; q_ready = 0; s_ready = 0; c_valid = 0; c_item = '0;
    mode = MODE_COMPRESS; slot = (BAW-LAW)'(SLOT);
    for (int b = 0; b < MM; b++) begin
      for (int z = 0; z < B; z++)
        for (int y = 0; y < B; y++)
          for (int x = 0; x < B; x++) begin
            longint v;
            v = (b + 1) * 900 * x * y - 700 * y * z + 3000 * z * b + $signed($urandom_range(0, 400)) - 200;
            if ($urandom_range(0, 100) == 0) v = longint'($signed($urandom)) / 4;
            orig[idx(x, y, z)] = v;
            bank[b][SLOT * 2 * N + idx(x, y, z)] = data_t'(v);
          end
      exp_q.delete(); exp_s.delete();
      quant(0, 0);
      do_task(K, 0, 0);
      for (int i = 0; i < N; i++) begin orig_a[b][i] = orig[i]; rec_a[b][i] = rec[i]; end
      foreach (exp_q[i]) lane_q[b].push_back(exp_q[i]);
      foreach (exp_s[i]) lane_s[b].push_back(exp_s[i]);
    end
    for (int i = 0; i < N; i++) for (int b = 0; b < MM; b++) all_q.push_back(lane_q[b][i]);
    for (int sl = 0; sl < B; sl++) for (int b = 0; b < MM; b++)
      for (int w = 0; w < SB; w++) all_s.push_back(lane_s[b][sl * SB + w]);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      q_ready = ($urandom_range(0, 3) != 0);
      s_ready = ($urandom_range(0, 3) != 0);
    end
    @(negedge clk); q_ready = 0; s_ready = 0;
    check(got_q.size() == MM * N, $sformatf("compression: %0d items", got_q.size()));
    for (int i = 0; i < MM * N && i < got_q.size(); i++)
      check(got_q[i] == all_q[i] || (got_q[i].code != 0 && got_q[i].code == all_q[i].code),
            $sformatf("merged item %0d code %0d exp %0d", i, got_q[i].code, all_q[i].code));
    check(got_s.size() == all_s.size(), "slice words");
    for (int i = 0; i < all_s.size() && i < got_s.size(); i++)
      check(got_s[i] == all_s[i], $sformatf("merged slice word %0d", i));
    check(slast_cnt == MM * B, "one s_last per slice");
    for (int b = 0; b < MM; b++)
      for (int i = 0; i < N; i++) begin
        longint e;
        check(longint'(bank[b][(SLOT * 2 + 1) * N + i]) == rec_a[b][i], $sformatf("recon bank %0d point %0d", b, i));
        e = longint'(bank[b][(SLOT * 2 + 1) * N + i]) - orig_a[b][i];
        check(e <= eb && e >= -eb, "error bound");
      end
    // ---- decompression ----
    for (int b = 0; b < MM; b++)
      for (int i = 0; i < 2 * N; i++) bank[b][SLOT * 2 * N + i] = '0;
    got_s.delete(); slast_cnt = 0;
    mode = MODE_DECOMPRESS;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    ci = 0;
    while (!done) begin
      c_valid = (ci < MM * N) && ($urandom_range(0, 3) != 0);
      c_item  = (ci < MM * N) ? all_q[ci] : '0;
      s_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (c_valid && c_ready) ci++;
      @(negedge clk);
    end
    check(ci == MM * N, "decompression consumed every item");
    for (int b = 0; b < MM; b++)
      for (int i = 0; i < N; i++)
        check(longint'(bank[b][(SLOT * 2 + 1) * N + i]) == rec_a[b][i], $sformatf("decompressed bank %0d point %0d", b, i));
    check(got_s.size() == all_s.size(), "decompression slice words");
    for (int i = 0; i < all_s.size() && i < got_s.size(); i++)
      check(got_s[i] == all_s[i], $sformatf("decompression slice word %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
