// tb_sram_buffer -- banked SRAM with lane ports and a DRAM-side port.
//
// Small capacity (4 banks of 1024 words). Writes random words through the
// DRAM-side port, reads them back through the lane ports (all banks in the
// same cycle) and the other way round, checks the one-cycle read latency,
// that read data holds while a bank is idle, and that the DRAM-side port
// wins over a lane port on the same bank.
module tb_sram_buffer;
  import flare_pkg::*;
  localparam int NB = 4;
  localparam longint CAP = 16384;           // bytes
  localparam int W = CAP / 4, BW = W / NB;

  logic clk = 0;
  always #5 clk = ~clk;

  logic en [NB], we [NB];
  logic [$clog2(BW)-1:0] addr [NB];
  data_t wdata [NB], rdata [NB];
  logic h_en, h_we;
  logic [$clog2(W)-1:0] h_addr;
  data_t h_wdata, h_rdata;

  sram_buffer #(.CAP_BYTES(CAP), .NBANK(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  data_t ref_m [W];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NB; b++) begin en[b] = 0; we[b] = 0; addr[b] = '0; wdata[b] = '0; end
    h_en = 0; h_we = 0; h_addr = '0; h_wdata = '0;
    @(negedge clk);
    // fill through the DRAM-side port
    for (int i = 0; i < W; i++) begin
      ref_m[i] = data_t'($urandom);
      h_en = 1; h_we = 1; h_addr = i[$clog2(W)-1:0]; h_wdata = ref_m[i];
      @(negedge clk);
    end
    h_en = 0; h_we = 0;
    // read through all lane ports in parallel
    for (int i = 0; i < BW; i += 7) begin
      for (int b = 0; b < NB; b++) begin en[b] = 1; we[b] = 0; addr[b] = i[$clog2(BW)-1:0]; end
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        check(rdata[b] == ref_m[b * BW + i], $sformatf("lane read bank %0d word %0d", b, i));
        en[b] = 0;
      end
      @(negedge clk);
      for (int b = 0; b < NB; b++)
        check(rdata[b] == ref_m[b * BW + i], "read data holds while idle");
    end
    // lane writes, DRAM-side reads
    for (int i = 0; i < BW; i += 5) begin
      for (int b = 0; b < NB; b++) begin
        en[b] = 1; we[b] = 1; addr[b] = i[$clog2(BW)-1:0];
        wdata[b] = data_t'($urandom); ref_m[b * BW + i] = wdata[b];
      end
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin en[b] = 0; we[b] = 0; end
    end
    for (int i = 0; i < W; i += 3) begin
      h_en = 1; h_we = 0; h_addr = i[$clog2(W)-1:0];
      @(negedge clk);
      h_en = 0;
      check(h_rdata == ref_m[i], $sformatf("host read %0d", i));
    end
    // priority: host write and lane write to the same bank and word
    en[2] = 1; we[2] = 1; addr[2] = 10; wdata[2] = 32'h1111_1111;
    h_en = 1; h_we = 1; h_addr = $clog2(W)'(2 * BW + 10); h_wdata = 32'h2222_2222;
    @(negedge clk);
    en[2] = 0; we[2] = 0; h_we = 0;
    @(negedge clk);
    h_en = 0;
    check(h_rdata == 32'h2222_2222, "DRAM-side port wins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
