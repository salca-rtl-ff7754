// hist_unit: one lane of the SRAM-based Top-K threshold locating unit.
//
// A pseudo-dual-port SRAM of BINS entries, each <layer_id, head_id, count>,
// counts how often each INT8 code occurs. An incoming code is the SRAM read
// address; the value read is incremented and written back to the same
// address, a read-accumulate-write pipeline accepting one code per cycle:
//   S0  read issued; the code is compared with the addresses of the two
//       previous requests (delay registers)
//   S1  read data returns; operand = newest matching delay register, else
//       the SRAM word if its tag equals the current <layer,head,count>, else 0;
//       operand + 1 goes to delay register 1
//   S2  delay register 1 is written back to the SRAM and moves on to delay
//       register 2
// The tag check gives every head a zeroed histogram without a 256-cycle
// clear; the two delay registers remove the read-after-write hazard of
// back-to-back hits on one address (register 1 wins when both match).
// When idle (no code in S0) the read port serves scan requests: scan_count
// is the tag-checked count of scan_addr one cycle after scan_en.
// SRAM contents are unknown at power-up, so after reset the lane spends
// BINS cycles writing the reserved all-ones tag into every entry (busy high);
// the all-ones <layer,head,count> tag must therefore not be used by a real head.
// Mechanism and pipeline follow the source's figure; the widths and the
// power-up sweep are this design's own.
module hist_unit
  import salca_pkg::*;
#(
  parameter int unsigned BINS = HIST_BINS,
  parameter int unsigned CW   = 16,
  localparam int unsigned AW  = $clog2(BINS),
  localparam int unsigned TW  = $bits(head_tag_t)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  head_tag_t     tag,
  input  logic          in_valid,
  input  logic [AW-1:0] in_addr,
  input  logic          scan_en,
  input  logic [AW-1:0] scan_addr,
  output logic [CW-1:0] scan_count,
  output logic          busy,
  // event counters for verification of the bypass paths
  output logic          ev_bypass1,
  output logic          ev_bypass2,
  output logic          ev_stale
);
  logic          rd_en;
  logic [AW-1:0] rd_addr;
  logic [TW+CW-1:0] rd_data;

  // pipeline registers
  logic          v1, v2;
  logic          init;
  logic [AW-1:0] init_addr;
  logic [AW-1:0] a1, a2;
  logic [CW-1:0] c2, c3;
  logic          h1_new, h1_old;
  logic [CW-1:0] operand;
  logic          tag_ok;

  assign rd_en   = in_valid || scan_en;
  assign rd_addr = in_valid ? in_addr : scan_addr;
  assign tag_ok  = rd_data[TW+CW-1:CW] == tag;

  sdp_ram #(.WIDTH(TW + CW), .DEPTH(BINS)) u_ram (
    .clk, .wr_en(v2 || init), .wr_addr(init ? init_addr : a2),
    .wr_data(init ? {TW'('1), CW'(0)} : {tag, c2}),
    .rd_en, .rd_addr, .rd_data);

  always_comb begin
    if (h1_new)      operand = c2;
    else if (h1_old) operand = c3;
    else if (tag_ok) operand = rd_data[CW-1:0];
    else             operand = '0;
  end

  assign scan_count = tag_ok ? rd_data[CW-1:0] : '0;
  assign busy       = v1 || v2 || init;
  assign ev_bypass1 = v1 && h1_new;
  assign ev_bypass2 = v1 && !h1_new && h1_old;
  assign ev_stale   = v1 && !h1_new && !h1_old && !tag_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; h1_new <= 1'b0; h1_old <= 1'b0;
      init <= 1'b1; init_addr <= '0;
    end else begin
      if (init) begin
        init_addr <= init_addr + 1'b1;
        if (init_addr == AW'(BINS - 1)) init <= 1'b0;
      end
      // S0 -> S1: compare with the requests now in S1 and S2
      v1     <= in_valid;
      h1_new <= in_valid && v1 && (in_addr == a1);
      h1_old <= in_valid && v2 && (in_addr == a2);
      // S1 -> S2 (delay register 1), S2 -> delay register 2
      v2 <= v1;
    end
  end

  always_ff @(posedge clk) begin
    a1 <= in_addr;
    if (v1) begin a2 <= a1; c2 <= operand + 1'b1; end
    c3 <= c2;
  end
endmodule
