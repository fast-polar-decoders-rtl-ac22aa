// codeword_ram: output buffer for the estimated codeword.
//
// A simple dual-port RAM: the decoder writes 2P estimated bits per cycle at
// word addresses 0 .. N/(2P)-1; the outside reads RDW bits per cycle at
// addresses 0 .. N/RDW-1, bit j of read word a being codeword bit a*RDW+j.
// Reads are synchronous. With the default sizes this is the paper's 64 words
// of 512 bits with a 256-bit read bus. Buffering the estimate lets the decoder
// start the next frame at once and lets the estimate leave at a steady rate.
module codeword_ram #(
  parameter int unsigned N   = 32768,
  parameter int unsigned P   = 256,
  parameter int unsigned RDW = 256,
  parameter int unsigned WDEPTH = N/(2*P),
  parameter int unsigned WAW = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  parameter int unsigned RAW = $clog2(N/RDW)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [WAW-1:0]  wr_addr,
  input  logic            wr_data [2*P],
  input  logic [RAW-1:0]  rd_addr,
  output logic [RDW-1:0]  rd_data
);
  localparam int unsigned RATIO = 2*P/RDW;   // read words per written word
  localparam int unsigned SELW  = (RATIO > 1) ? $clog2(RATIO) : 1;

  logic [2*P-1:0] mem [WDEPTH];
  logic [2*P-1:0] q, wr_packed;
  logic [SELW-1:0] sel;

  always_comb
    for (int i = 0; i < 2*P; i++) wr_packed[i] = wr_data[i];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_packed;
    q   <= mem[WAW'(rd_addr / RAW'(RATIO))];
    sel <= SELW'(rd_addr % RAW'(RATIO));
  end

  assign rd_data = q[sel*RDW +: RDW];
endmodule
