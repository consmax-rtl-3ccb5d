// int_fp_lut -- one bitwidth-split INT-to-FP lookup table of a ConSmax unit.
//
// A 4-bit slice of the INT8 attention score addresses DEPTH entries of WIDTH bits. Each
// entry holds an exponential that is already dequantised to 16b floating point: the MSB
// table of a unit holds e^(16*s*m) for the signed upper nibble m, the LSB table e^(s*l)
// for the unsigned lower nibble l, where s is the quantisation step of the scores. The
// 16-entry x 16b size is the published one. Because the contents depend on s, the table is
// a register file the host writes; that, the write port and the reset to zero are this
// design's choices.
//
// Interface: wr_en/wr_addr/wr_data write one entry at the rising clock edge; rd_addr ->
// rd_data is combinational (same cycle). Synchronous active-high reset clears all entries.
module int_fp_lut #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (wr_en) begin
      mem[wr_addr] <= wr_data;
    end
  end

  assign rd_data = mem[rd_addr];

endmodule
