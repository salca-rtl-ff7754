// sdp_ram: simple dual-port RAM (one write port, one read port), the
// storage primitive behind every on-chip buffer of the pipeline.
//
// Writes take effect at the clock edge. Reads are registered: the word at
// rd_addr appears on rd_data one cycle after rd_en. A read and a write to
// the same address in one cycle return the old word (read-first), which is
// the behaviour the histogram lanes rely on when they bypass hazards.
// Contents are not reset; every user tracks validity itself.
module sdp_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
