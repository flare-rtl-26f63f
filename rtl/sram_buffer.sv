// sram_buffer -- the core's on-chip SRAM buffer (32 MB in the paper).
//
// The buffer is split into NBANK single-port banks, one per systolic-array
// lane of the Prediction Engine, so the M lanes read and write their blocks
// at the same time. Each bank has a one-cycle registered read; its read data
// holds while the bank is not enabled. A second, DRAM-side port (h_*) reaches
// every word by a flat address {bank, word}; it is how blocks are loaded from
// and written back to DRAM, and it wins over the lane port of the bank it
// addresses. Banking per lane and the host-port priority are this design's
// choices: the paper gives only the capacity and that the buffer feeds the
// Prediction Engine.
module sram_buffer
  import flare_pkg::*;
#(
  parameter longint unsigned CAP_BYTES = 64'd33554432,  // 32 MB (Table 4)
  parameter int unsigned     NBANK     = 4,             // = M lanes
  localparam longint unsigned WORDS    = CAP_BYTES / (DATA_W / 8),
  localparam longint unsigned BWORDS   = WORDS / NBANK,
  localparam int unsigned    BAW       = $clog2(BWORDS),
  localparam int unsigned    HAW       = $clog2(WORDS)
) (
  input  logic           clk,
  // lane ports
  input  logic           en    [NBANK],
  input  logic           we    [NBANK],
  input  logic [BAW-1:0] addr  [NBANK],
  input  data_t          wdata [NBANK],
  output data_t          rdata [NBANK],
  // DRAM-side port
  input  logic           h_en,
  input  logic           h_we,
  input  logic [HAW-1:0] h_addr,
  input  data_t          h_wdata,
  output data_t          h_rdata
);

  localparam int unsigned BSW = (NBANK > 1) ? $clog2(NBANK) : 1;

  logic [BSW-1:0] h_bank, h_bank_q;
  assign h_bank = (NBANK > 1) ? BSW'(h_addr >> BAW) : '0;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    data_t mem [BWORDS];
    logic           hsel;
    logic           p_en, p_we;
    logic [BAW-1:0] p_addr;
    data_t          p_wdata;
    assign hsel    = h_en && (h_bank == BSW'(b));
    assign p_en    = hsel || en[b];
    assign p_we    = hsel ? h_we : we[b];
    assign p_addr  = hsel ? h_addr[BAW-1:0] : addr[b];
    assign p_wdata = hsel ? h_wdata : wdata[b];
    always_ff @(posedge clk) begin
      if (p_en) begin
        if (p_we) mem[p_addr] <= p_wdata;
        rdata[b] <= mem[p_addr];
      end
    end
  end

  always_ff @(posedge clk)
    if (h_en) h_bank_q <= h_bank;

  assign h_rdata = rdata[h_bank_q];

endmodule
