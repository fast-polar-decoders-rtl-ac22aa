// instr_ram: the instruction memory that holds the decoding program.
//
// DEPTH words of one 5-bit instruction each (3000 by default, the size the
// paper allows for its length-32768 codes, below the 32768 bits a frozen-bit
// mask would take). The host writes the program through the write port; the
// controller reads one instruction per cycle with a synchronous read.
module instr_ram
  import polar_pkg::*;
#(
  parameter int unsigned DEPTH = 3000,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  instr_t        wr_data,
  input  logic [AW-1:0] rd_addr,
  output instr_t        rd_data
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
