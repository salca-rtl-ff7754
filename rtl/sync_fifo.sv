// sync_fifo: small synchronous FIFO used as the data_buf between HBM
// responses and the compute stages. Registered storage, first-word
// fall-through: rd_data shows the oldest entry whenever !empty; a push and a
// pop may happen in the same cycle. `count` gives the fill level.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end
  always_ff @(posedge clk) if (push && !full) mem[wp] <= wr_data;

`ifndef SYNTHESIS
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("sync_fifo: push into full FIFO");
`endif
endmodule
