// fmap_channel: double-buffered feature-map memory between two layers.
//
// Every layer boundary has two copies (banks) of the binary feature map.
// During a phase the producing layer writes bank `phase` while the consuming
// layer reads bank `~phase`; when all layers have finished the phase bit
// flips and the banks change roles, so all layers work at the same time on
// consecutive images.  The maps are held in registers (distributed memory),
// which allows a whole row to be read in one cycle.
//
// Storage: H rows per bank, a row is W pixels of D channel bits,
// pixel x channel d at bit x*D + d.
// Write port: wr_bits[x] -> pixel x, channel wr_ch, row wr_row of bank phase.
// Read port: rd_data is row rd_row of bank ~phase, combinational.
module fmap_channel #(
  parameter int H  = 16,
  parameter int W  = 16,
  parameter int D  = 128,
  parameter int RW = (H > 1) ? $clog2(H) : 1,
  parameter int DW = (D > 1) ? $clog2(D) : 1
) (
  input  logic           clk,
  input  logic           phase,
  input  logic           wr_en,
  input  logic [RW-1:0]  wr_row,
  input  logic [DW-1:0]  wr_ch,
  input  logic [W-1:0]   wr_bits,
  input  logic [RW-1:0]  rd_row,
  output logic [W*D-1:0] rd_data
);
  logic [W*D-1:0] bank0 [H];
  logic [W*D-1:0] bank1 [H];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int x = 0; x < W; x++) begin
        if (phase) bank1[wr_row][x*D + int'(wr_ch)] <= wr_bits[x];
        else       bank0[wr_row][x*D + int'(wr_ch)] <= wr_bits[x];
      end
    end
  end

  assign rd_data = phase ? bank0[rd_row] : bank1[rd_row];
endmodule
