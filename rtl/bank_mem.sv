// bank_mem: partitioned on-chip memory for weights or thresholds.
//
// A layer reads a whole UF-bit weight word every cycle, wider than one block
// RAM port (32 bits).  The weight array is therefore reshaped into 32-bit
// words and partitioned over NBANK = ceil(WIDTH/32) banks that share one read
// address; bank b holds bits [32b +: 32] of every word.  Each bank is a plain
// single-read, single-write memory, so it maps to block RAM.
//
// Load port: one 32-bit word per cycle into bank ld_bank at ld_addr.
// Read port: rd_data is the word at rd_addr one clock after rd_addr
// (synchronous read, like a block RAM).  The partitioning follows the
// published memory mapping; the load port is this design's choice.
// When WIDTH is not a multiple of 32, the top bits of the last bank are
// stored but never read.
module bank_mem #(
  parameter int WIDTH = 384,
  parameter int DEPTH = 384,
  parameter int AWD   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int NBANK = (WIDTH + 31) / 32
) (
  input  logic             clk,
  input  logic             ld_en,
  input  logic [6:0]       ld_bank,
  input  logic [AWD-1:0]   ld_addr,
  input  logic [31:0]      ld_data,
  input  logic [AWD-1:0]   rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [NBANK*32-1:0] rd_word;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [31:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (ld_en && ld_bank == 7'(b)) mem[ld_addr] <= ld_data;
      rd_word[b*32 +: 32] <= mem[rd_addr];
    end
  end

  assign rd_data = rd_word[WIDTH-1:0];
endmodule
