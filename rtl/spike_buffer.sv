// spike_buffer: the spikes one layer produced in the current timestep,
// stored as one word of C bits (one bit per feature map) per position.
//
// The producing layer writes whole position words; the consuming layer reads
// one position word per cycle with a combinational read, which lets a
// convolution slide its window by one position per read. A single-cycle clear
// empties the buffer (used for the input buffer, which is filled by
// individual events; layer buffers are fully rewritten every timestep), and
// set_en ORs a single spike bit into a word (used for input events).
// Buffering between layers is this design's choice.
//
// Interface: clr; wr_en/wr_addr/wr_data (whole word); set_en/set_addr/set_bit
// (one bit); rd_addr -> rd_data. Writes take effect at the clock edge, clear
// has priority over writes.
module spike_buffer #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned C     = 1,
  parameter int unsigned A_W   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                        clk,
  input  logic                        clr,
  input  logic                        wr_en,
  input  logic [A_W-1:0]              wr_addr,
  input  logic [C-1:0]                wr_data,
  input  logic                        set_en,
  input  logic [A_W-1:0]              set_addr,
  input  logic [(C>1?$clog2(C):1)-1:0] set_bit,
  input  logic [A_W-1:0]              rd_addr,
  output logic [C-1:0]                rd_data
);

  logic [C-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (clr) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (wr_en && (int'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
      if (set_en && (int'(set_addr) < DEPTH)) mem[set_addr][set_bit] <= 1'b1;
    end
  end

  assign rd_data = (int'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;

endmodule
