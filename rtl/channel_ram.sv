// channel_ram: double buffer for the channel LLRs of two frames.
//
// The decoder reads 2P channel LLRs per cycle while the input bus carries only
// BUS LLRs per cycle, so the memory is split into BANKS = 2P/BUS banks, each
// BUS LLRs wide and 2*N/(2P) words deep (one half per frame). A write goes
// to one bank; a read takes the same address from every bank at once and
// returns a full 2P-LLR word, bank b supplying LLRs [b*BUS, (b+1)*BUS).
// Reads are synchronous. With the default sizes this is the paper's 16 banks
// of 128 x 160 bits. One half is loaded while the other is decoded; the
// halves are never read and written at the same address.
module channel_ram #(
  parameter int unsigned N   = 32768,
  parameter int unsigned P   = 256,
  parameter int unsigned WC  = 5,
  parameter int unsigned BUS = 32,
  parameter int unsigned BANKS = 2*P/BUS,
  parameter int unsigned DEPTH = 2*N/(2*P),
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned BW    = (BANKS > 1) ? $clog2(BANKS) : 1
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [BW-1:0]        wr_bank,
  input  logic [AW-1:0]        wr_addr,
  input  logic signed [WC-1:0] wr_data [BUS],
  input  logic [AW-1:0]        rd_addr,
  output logic signed [WC-1:0] rd_data [2*P]
);
  logic [BUS*WC-1:0] bank_mem [BANKS][DEPTH];
  logic [BUS*WC-1:0] q [BANKS];
  logic [BUS*WC-1:0] wr_packed;

  always_comb
    for (int i = 0; i < BUS; i++) wr_packed[i*WC +: WC] = wr_data[i];

  always_ff @(posedge clk) begin
    for (int b = 0; b < BANKS; b++) begin
      if (we && wr_bank == BW'(b)) bank_mem[b][wr_addr] <= wr_packed;
      q[b] <= bank_mem[b][rd_addr];
    end
  end

  always_comb
    for (int b = 0; b < BANKS; b++)
      for (int i = 0; i < BUS; i++)
        rd_data[b*BUS+i] = q[b][i*WC +: WC];
endmodule
