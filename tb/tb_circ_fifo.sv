// tb_circ_fifo -- circular FIFO: order, full/empty, back-pressure.
//
// A 16-deep FIFO is driven with random valid and ready for a few thousand
// cycles; every word must come out once and in order, in_ready must drop
// exactly when 16 words are held (ring count plus the output register), and
// the count output must match a software count. Wrap-around is exercised
// many times, and `clear` must empty it.
module tb_circ_fifo;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [$clog2(D):0] count;

  circ_fifo #(.WIDTH(32), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  logic [31:0] q [$];
  int sent = 0, recvd = 0, fullseen = 0;
  bit nomon = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 9) < ((cyc / 500) % 2 ? 3 : 8));
      out_ready = ($urandom_range(0, 9) < ((cyc / 500) % 2 ? 8 : 3));
      in_data   = $urandom;
      @(posedge clk);
      if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
      if (out_valid && out_ready) begin
        check(q.size() > 0 && out_data == q[0], "order");
        if (q.size() > 0) void'(q.pop_front());
        recvd++;
      end
      if (!in_ready) fullseen++;
    end
    check(fullseen > 0, "FIFO filled up at least once");
    // clear empties it
    nomon = 1;
    @(negedge clk); in_valid = 1; out_ready = 0; @(negedge clk); in_valid = 0;
    clear = 1; @(negedge clk); clear = 0; q.delete();
    check(!out_valid && count == 0, "clear empties the FIFO");
    check(sent > 1000 && recvd > 1000, "traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ring occupancy matches: held words = count + output register
  always @(negedge clk) if (rst_n && !nomon) begin
    check(int'(count) + int'(out_valid) == q.size(), $sformatf("count %0d + %0d vs %0d", count, out_valid, q.size()));
    check(in_ready == (count != D), "in_ready iff ring not full");
  end
endmodule
