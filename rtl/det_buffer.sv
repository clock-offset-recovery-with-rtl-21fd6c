// det_buffer: detection memory of Bob.
//
// Holds the raw timestamps of one synchronization run, in arrival order, so
// that the offset recovery can sweep over them once per level. A simple
// dual-port RAM: one write port from the acquisition, one read port with one
// cycle of read latency (rd_data is the word at the address presented with
// rd_en in the previous cycle, and holds otherwise). It maps onto block RAM.
//
// The default depth, 2**18 words, covers the most detections a detector with
// ~96 us dead time can deliver during the longest pattern (24.9 s); the
// noise-free runs need only a few thousand words.
module det_buffer #(
  parameter int unsigned DEPTH = iqsync_pkg::DET_DEPTH,
  parameter int unsigned WIDTH = iqsync_pkg::TS_W
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
