// pingpong_ram: double-buffered stage-to-stage buffer (Score RAM, Quant RAM,
// Qxk RAM and the stage-4/5 index RAM of the pipeline).
//
// Two banks of DEPTH words. The producer writes into bank wr_bank and pulses
// wr_commit when a head is complete; the consumer reads from bank rd_bank and
// pulses rd_release when it has finished with that head. A bank is full
// between commit and release. wr_free says the producer's bank may be
// written, rd_avail says the consumer's bank holds a committed head; each
// side flips to the other bank after its pulse, so one head can be written
// while the previous one is read. Reads have one cycle latency (sdp_ram).
// The double-buffer idea follows the source; the commit/release handshake is
// this design's own.
module pingpong_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // producer side
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             wr_commit,
  output logic             wr_free,
  // consumer side
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             rd_release,
  output logic             rd_avail
);
  logic       wbank, rbank, rbank_d;
  logic [1:0] full;
  logic [WIDTH-1:0] q0, q1;

  assign wr_free  = !full[wbank];
  assign rd_avail = full[rbank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0; rbank <= 1'b0; full <= 2'b00;
    end else begin
      if (wr_commit) begin
        full[wbank] <= 1'b1;
        wbank       <= !wbank;
      end
      if (rd_release) begin
        full[rbank] <= 1'b0;
        rbank       <= !rbank;
      end
    end
  end

  always_ff @(posedge clk) if (rd_en) rbank_d <= rbank;

  sdp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_bank0 (
    .clk, .wr_en(wr_en && !wbank), .wr_addr, .wr_data,
    .rd_en(rd_en && !rbank), .rd_addr, .rd_data(q0));
  sdp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_bank1 (
    .clk, .wr_en(wr_en && wbank), .wr_addr, .wr_data,
    .rd_en(rd_en && rbank), .rd_addr, .rd_data(q1));

  assign rd_data = rbank_d ? q1 : q0;

`ifndef SYNTHESIS
  a_no_write_full: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> wr_free) else $error("pingpong_ram: write into a full bank");
  a_no_commit_full: assert property (@(posedge clk) disable iff (!rst_n)
    wr_commit |-> wr_free) else $error("pingpong_ram: commit into a full bank");
  a_no_release_empty: assert property (@(posedge clk) disable iff (!rst_n)
    rd_release |-> rd_avail) else $error("pingpong_ram: release of an empty bank");
`endif
endmodule
