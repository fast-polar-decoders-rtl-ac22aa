// alpha_ram: memory for the internal (non-channel) alpha values.
//
// Two memories, each P LLRs wide, share one word address. A read returns the
// word of both memories (2P LLRs, what P f or g elements consume); a write
// updates only one of them (P LLRs, what they produce), chosen by wr_sel.
// Reads are synchronous: data appear the cycle after rd_addr. When a read and
// a write hit the same word of the same memory in the same cycle, a register
// holding the newly written data supplies the read instead of the array, so
// the reader always sees the latest value. The organisation and the bypass
// register follow the paper; the depth comes from the stage layout in
// polar_pkg.
module alpha_ram #(
  parameter int unsigned P     = 256,
  parameter int unsigned W     = 7,
  parameter int unsigned DEPTH = 71,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic [AW-1:0]       rd_addr,
  output logic signed [W-1:0] rd_data [2*P],
  input  logic                we,
  input  logic                wr_sel,    // 0: lower memory, 1: upper memory
  input  logic [AW-1:0]       wr_addr,
  input  logic signed [W-1:0] wr_data [P]
);
  logic [P*W-1:0] mem0 [DEPTH];
  logic [P*W-1:0] mem1 [DEPTH];
  logic [P*W-1:0] q0, q1, byp;
  logic           hit0, hit1;
  logic [P*W-1:0] wr_packed;

  always_comb
    for (int i = 0; i < P; i++) wr_packed[i*W +: W] = wr_data[i];

  always_ff @(posedge clk) begin
    if (we && !wr_sel) mem0[wr_addr] <= wr_packed;
    if (we &&  wr_sel) mem1[wr_addr] <= wr_packed;
    q0   <= mem0[rd_addr];
    q1   <= mem1[rd_addr];
    byp  <= wr_packed;
    hit0 <= we && !wr_sel && (wr_addr == rd_addr);
    hit1 <= we &&  wr_sel && (wr_addr == rd_addr);
  end

  always_comb begin
    for (int i = 0; i < P; i++) begin
      rd_data[i]   = hit0 ? byp[i*W +: W] : q0[i*W +: W];
      rd_data[P+i] = hit1 ? byp[i*W +: W] : q1[i*W +: W];
    end
  end
endmodule
