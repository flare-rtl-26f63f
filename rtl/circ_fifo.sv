// circ_fifo -- circular FIFO buffer (FIFO1 and FIFO2 of the core).
//
// The Prediction Engine produces quantized errors and reconstructed slices at
// uneven intervals because of the look-ahead order; FIFO1 (quantized errors,
// 8 MB) and FIFO2 (reconstructed slices, 32 MB) absorb that so the Codec and
// Neural Engines can run concurrently. This is a single-clock ring buffer:
// write and read pointers one bit wider than the index, storage as an array
// read one cycle after the pointer moves (first-word fall-through via a
// one-entry output register). Handshake: valid/ready on both sides; a word
// moves when both are high. `clear` empties the FIFO in one cycle (the core
// uses it at the start of a run). Capacities follow the paper (Table 4); the ring
// structure is named by the paper ("FIFO-based circular buffers"), the
// pointer scheme is this design's.
// Lint note: rst_n also gates the handshake assertion below, so lint reports
// it as used both asynchronously and synchronously; that is intended.
module circ_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8388608,   // 32 MB of 32-bit words (FIFO2)
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      count       // words held in the ring
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;
  logic             ovalid;
  logic [WIDTH-1:0] odata;

  wire full  = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  wire empty = (wp == rp);
  wire push  = in_valid && in_ready;
  wire load  = !empty && (!ovalid || out_ready);  // refill output register

  assign in_ready  = !full;
  assign out_valid = ovalid;
  assign out_data  = odata;
  assign count     = wp - rp;

  always_ff @(posedge clk) begin
    if (push) mem[wp[AW-1:0]] <= in_data;
    if (load) odata <= mem[rp[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp     <= '0;
      rp     <= '0;
      ovalid <= 1'b0;
    end else if (clear) begin
      wp     <= '0;
      rp     <= '0;
      ovalid <= 1'b0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (load) begin
        rp     <= rp + 1'b1;
        ovalid <= 1'b1;
      end else if (out_ready) begin
        ovalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk)
    if (rst_n && in_valid && !in_ready) assert (full) else $error("in_ready low while not full");

endmodule
