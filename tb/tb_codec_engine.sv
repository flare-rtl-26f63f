// tb_codec_engine -- canonical Huffman encode, histogram and decode.
//
// The testbench builds its own canonical code: a few dozen symbols around
// the zero-error code (radius 32768) plus symbol 0 (unpredictable point) get
// random lengths from 1 to 20 bits under the Kraft inequality, codes are
// assigned in (length, symbol) order, and the tables are written into the
// engine. A random symbol stream (with verbatim values behind symbol 0) is
// encoded under random bitstream back-pressure; every 32-bit word is checked
// against a bit-exact software packer, including the zero-padded last word
// after `flush`. The histogram is read back and compared. The words are then
// fed to the decoder with random gaps and random output back-pressure, and
// every decoded symbol (and verbatim value) must match the original stream;
// after `dec_clear` the decoder must start cleanly on a new stream.
// The encoder must take one symbol per cycle when nothing stalls it.
module tb_codec_engine;
  import flare_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_we;
  logic [2:0]  cfg_sel;
  logic [CODE_W-1:0] cfg_addr;
  logic [37:0] cfg_wdata;
  logic        hist_clear, hist_busy;
  logic [CODE_W-1:0] hist_addr;
  logic [31:0] hist_data;
  logic        enc_valid, enc_ready, flush, flush_done, bs_valid, bs_ready;
  qitem_t      enc_item, dec_item;
  logic [31:0] bs_data, bi_data;
  logic        dec_clear, bi_valid, bi_ready, dec_valid, dec_ready;

  codec_engine dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  localparam int NS = 40;
  localparam int NITEMS = 3000;
  int unsigned syms [NS];
  int          lens [NS];
  longint unsigned codes [NS];
  int          hist_m [NS];
  int          item_sym [NITEMS];
  logic [31:0] item_val [NITEMS];
  bit          bits_q [$];
  logic [31:0] words [$];

  initial begin
    #50000000;
    $display("watchdog: words=%0d bits=%0d", words.size(), bits_q.size());
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int sel, input int addr, input longint unsigned data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = 3'(sel); cfg_addr = CODE_W'(addr); cfg_wdata = 38'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    longint unsigned kraft, code;
    int idx, order [NS], stall_free, nout;
    cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_wdata = 0;
    hist_clear = 0; hist_addr = 0; enc_valid = 0; enc_item = '0; flush = 0; bs_ready = 0;
    bi_valid = 0; bi_data = 0; dec_ready = 0; dec_clear = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- build a canonical code ----------------------------------------
    syms[0] = 0;
    for (int i = 1; i < NS; i++) syms[i] = 32768 + ((i % 2) ? (i / 2) : -(i / 2));
    kraft = 0;
    for (int i = 0; i < NS; i++) begin
      int l;
      do l = $urandom_range(1, 20);
      while (kraft + (64'd1 << (20 - l)) > (64'd1 << 20) - 64'(NS - 1 - i));
      lens[i] = l;
      kraft += 64'd1 << (20 - l);
    end
    for (int i = 0; i < NS; i++) order[i] = i;
    for (int i = 0; i < NS; i++)          // sort by (length, symbol)
      for (int j = i + 1; j < NS; j++)
        if (lens[order[j]] < lens[order[i]] ||
            (lens[order[j]] == lens[order[i]] && syms[order[j]] < syms[order[i]])) begin
          automatic int t = order[i]; order[i] = order[j]; order[j] = t;
        end
    code = 0; idx = 0;
    for (int l = 1; l <= 32; l++) begin
      automatic int cnt = 0, fidx = idx;
      automatic longint unsigned fc = code;
      for (int i = 0; i < NS; i++)
        if (lens[order[i]] == l) begin
          codes[order[i]] = code; code++;
          wr(1, idx, syms[order[i]]); idx++; cnt++;
        end
      wr(2, l, fc); wr(3, l, fidx); wr(4, l, cnt);
      code = code << 1;
    end
    for (int i = 0; i < NS; i++) wr(0, syms[i], {6'(lens[i]), 32'(codes[i])});

    // ---- histogram clear ----------------------------------------------------
    @(negedge clk); hist_clear = 1; @(negedge clk); hist_clear = 0;
    while (hist_busy) @(negedge clk);

    // ---- stream ---------------------------------------------------------------
    for (int i = 0; i < NS; i++) hist_m[i] = 0;
    for (int n = 0; n < NITEMS; n++) begin
      automatic int k = ($urandom_range(0, 9) == 0) ? 0 : $urandom_range(0, NS - 1);
      item_sym[n] = k; item_val[n] = $urandom; hist_m[k]++;
      for (int b = lens[k] - 1; b >= 0; b--) bits_q.push_back(codes[k][b]);
      if (syms[k] == 0) for (int b = 31; b >= 0; b--) bits_q.push_back(item_val[n][b]);
    end
    while (bits_q.size() % 32 != 0) bits_q.push_back(1'b0);

    // ---- encode ---------------------------------------------------------------
    fork
      begin
        // first 200 items with the bitstream always ready: count stall-free takes
        stall_free = 0;
        for (int n = 0; n < NITEMS; n++) begin
          @(negedge clk);
          enc_valid = 1; enc_item.code = CODE_W'(syms[item_sym[n]]); enc_item.value = item_val[n];
          @(posedge clk);
          while (!enc_ready) @(posedge clk);
          if (n < 200 && !bs_valid) stall_free++;
        end
        @(negedge clk);
        enc_valid = 0; flush = 1;
        while (!flush_done) @(negedge clk);
        flush = 0;
      end
      begin
        forever begin
          @(negedge clk);
          bs_ready = (words.size() * 32 < 32 * 64) ? 1'b1 : ($urandom_range(0, 3) != 0);
          @(posedge clk);
          if (bs_valid && bs_ready) words.push_back(bs_data);
        end
      end
      begin
        @(negedge clk);
        while (!(flush && flush_done)) @(negedge clk);
      end
    join_any
    disable fork;
    bs_ready = 0;
    check(words.size() == bits_q.size() / 32, $sformatf("word count %0d vs %0d", words.size(), bits_q.size() / 32));
    for (int w = 0; w < words.size() && w < bits_q.size() / 32; w++) begin
      logic [31:0] e;
      for (int b = 0; b < 32; b++) e[31 - b] = bits_q[w * 32 + b];
      check(words[w] == e, $sformatf("word %0d %h vs %h", w, words[w], e));
    end
    check(stall_free > 150, $sformatf("one symbol per cycle (%0d of 200 without a word to emit)", stall_free));

    // ---- histogram --------------------------------------------------------------
    for (int i = 0; i < NS; i++) begin
      @(negedge clk); hist_addr = CODE_W'(syms[i]);
      @(negedge clk);
      check(hist_data == 32'(hist_m[i]), $sformatf("hist[%0d] %0d vs %0d", syms[i], hist_data, hist_m[i]));
    end

    // ---- decode -----------------------------------------------------------------
    nout = 0;
    fork
      begin
        for (int w = 0; w < words.size(); w++) begin
          @(negedge clk);
          bi_valid = ($urandom_range(0, 4) != 0); bi_data = words[w];
          @(posedge clk);
          while (!(bi_valid && bi_ready)) begin
            @(negedge clk); bi_valid = 1; @(posedge clk);
          end
        end
        @(negedge clk); bi_valid = 0;
        forever @(negedge clk);
      end
      begin
        while (nout < NITEMS) begin
          @(negedge clk);
          dec_ready = ($urandom_range(0, 3) != 0);
          @(posedge clk);
          if (dec_valid && dec_ready) begin
            check(dec_item.code == CODE_W'(syms[item_sym[nout]]),
                  $sformatf("decoded %0d: %0d vs %0d", nout, dec_item.code, syms[item_sym[nout]]));
            if (syms[item_sym[nout]] == 0)
              check(dec_item.value == item_val[nout], "verbatim value");
            nout++;
          end
        end
      end
    join_any
    disable fork;
    check(nout == NITEMS, "all symbols decoded");
    // the padding of the last word leaves the decoder mid-code: clear it and
    // decode the first words again
    @(negedge clk); dec_ready = 0; bi_valid = 0; dec_clear = 1;
    @(negedge clk); dec_clear = 0;
    nout = 0;
    fork
      begin
        for (int w = 0; w < 8; w++) begin
          @(negedge clk); bi_valid = 1; bi_data = words[w];
          @(posedge clk);
          while (!bi_ready) @(posedge clk);
        end
        @(negedge clk); bi_valid = 0;
      end
      begin
        while (nout < 4) begin
          @(negedge clk); dec_ready = 1;
          @(posedge clk);
          if (dec_valid) begin
            check(dec_item.code == CODE_W'(syms[item_sym[nout]]), "decode after dec_clear");
            nout++;
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
