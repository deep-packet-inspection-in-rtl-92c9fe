// Shared packet buffer of one RE matching engine.
//
// Every N-bit input word (N = K * NB) is stored as K independent NB-bit blocks, one
// per row, as in the paper's picture of the buffer: the columns are words, the rows
// are the blocks that FA 1..K read. Row i has its own read address, so FA i can read
// its block of whatever word its current packet is at, while the other FAs read
// other words. A second read port returns whole words, for forwarding a packet to
// the next stage once its matching result is known. A small side memory holds
// per-word metadata (end-of-packet flag and number of valid blocks), with one read
// port for the engine's scheduler and one for the forwarding path.
//
// The row organisation follows the paper. The depth, the metadata and the second
// word-wide read port are this design's choices. All reads are asynchronous
// (combinational from the address), writes take effect at the clock edge.
module packet_buffer #(
  parameter int unsigned K      = 64,
  parameter int unsigned NB     = 8,
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned META_W = 8,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  // write one whole word
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [K*NB-1:0]     wr_data,
  input  logic [META_W-1:0]   wr_meta,
  // per-row block reads, one per FA
  input  logic [AW-1:0]       row_addr [K],
  output logic [NB-1:0]       row_data [K],
  // metadata read for the scheduler
  input  logic [AW-1:0]       meta_addr,
  output logic [META_W-1:0]   meta_data,
  // whole-word read for forwarding
  input  logic [AW-1:0]       rd_addr,
  output logic [K*NB-1:0]     rd_data,
  output logic [META_W-1:0]   rd_meta
);

  for (genvar r = 0; r < K; r++) begin : g_row
    logic [NB-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en) mem[wr_addr] <= wr_data[r*NB +: NB];
    end

    assign row_data[r]          = mem[row_addr[r]];
    assign rd_data[r*NB +: NB]  = mem[rd_addr];
  end

  logic [META_W-1:0] meta [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) meta[wr_addr] <= wr_meta;
  end

  assign meta_data = meta[meta_addr];
  assign rd_meta   = meta[rd_addr];

endmodule
