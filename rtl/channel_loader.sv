// channel_loader: writes incoming channel LLRs into the free half of the
// channel RAM while the decoder works on the other half.
//
// Input: BUS LLRs per beat with a valid/ready handshake (32 five-bit LLRs,
// a 160-bit bus, by default as in the paper), N/BUS beats per frame in channel
// order. Beat b goes to bank b mod BANKS at word b div BANKS of the half being
// loaded. Two flags record which halves hold a complete frame. ready is low
// while the half to be loaded still holds a frame waiting to be decoded.
// frame_ready tells the controller that the half it reads next is full; a
// one-cycle frame_done from the controller frees that half and swaps the
// roles of the halves. The ping-pong flags and handshake are this design's
// choice; the paper only says the read and write halves are swapped when a
// frame is decoded and that loading uses handshaking.
module channel_loader #(
  parameter int unsigned N   = 32768,
  parameter int unsigned P   = 256,
  parameter int unsigned WC  = 5,
  parameter int unsigned BUS = 32,
  parameter int unsigned BANKS = 2*P/BUS,
  parameter int unsigned AW    = $clog2(2*N/(2*P)),
  parameter int unsigned BW    = (BANKS > 1) ? $clog2(BANKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [WC-1:0] in_data [BUS],
  output logic                 ram_we,
  output logic [BW-1:0]        ram_bank,
  output logic [AW-1:0]        ram_addr,
  output logic signed [WC-1:0] ram_data [BUS],
  input  logic                 frame_done,
  output logic                 frame_ready,
  output logic                 rd_half
);
  localparam int unsigned BEATS = N/BUS;
  localparam int unsigned CW    = $clog2(BEATS);

  logic [1:0]    full;
  logic          wr_half;
  logic [CW-1:0] beat;
  logic          accept;

  assign in_ready    = !full[wr_half];
  assign accept      = in_valid && in_ready;
  assign frame_ready = full[rd_half];
  assign ram_we      = accept;
  assign ram_bank    = BW'(beat % CW'(BANKS));
  assign ram_addr    = {wr_half, (AW-1)'(beat / CW'(BANKS))};
  assign ram_data    = in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= 2'b00;
      wr_half <= 1'b0;
      rd_half <= 1'b0;
      beat    <= '0;
    end else begin
      if (accept) begin
        if (beat == CW'(BEATS-1)) begin
          beat          <= '0;
          full[wr_half] <= 1'b1;
          wr_half       <= !wr_half;
        end else begin
          beat <= beat + 1'b1;
        end
      end
      if (frame_done) begin
        full[rd_half] <= 1'b0;
        rd_half       <= !rd_half;
      end
    end
  end

  // The controller only finishes a frame it could read.
  assert property (@(posedge clk) disable iff (!rst_n) frame_done |-> frame_ready);
endmodule
