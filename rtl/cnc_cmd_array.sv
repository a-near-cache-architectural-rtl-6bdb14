// cnc_cmd_array: command array of one CNC unit.
//
// An SRAM of ROWS x COLS bits (256 x 512 by default, 16 kB, i.e. 8192 commands
// of 16 bits) that holds the pre-computed command program of an algorithm.
// LD_CMD writes one cache block, 32 commands, into row `wrow`. During
// execution the controller reads one command per cycle: command i lives in
// row i / 32 at bits [16*(i%32) +: 16]. The read is synchronous; `rcmd` is
// valid the cycle after `re` with `raddr`.
//
// The capacity is the paper's; the packing of commands in a row and the
// one-cycle read are this design's choices.
module cnc_cmd_array
  import cnc_pkg::*;
#(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned COLS  = 512,
  parameter int unsigned PER   = COLS / CMD_W,
  parameter int unsigned AW    = $clog2(ROWS),
  parameter int unsigned CAW   = $clog2(ROWS * PER)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wrow,
  input  logic [COLS-1:0]  wdata,
  input  logic             re,
  input  logic [CAW-1:0]   raddr,
  output logic [CMD_W-1:0] rcmd
);

  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] row_q;
  logic [$clog2(PER)-1:0] sel_q;

  always_ff @(posedge clk) begin
    if (we) mem[wrow] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) begin
      row_q <= mem[raddr[CAW-1:$clog2(PER)]];
      sel_q <= raddr[$clog2(PER)-1:0];
    end
  end

  assign rcmd = row_q[sel_q*CMD_W +: CMD_W];

endmodule
