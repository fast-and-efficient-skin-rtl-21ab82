// skin_histogram: shared skin / non-skin histogram look-up table.
//
// The offline training stage builds a skin and a non-skin colour histogram.
// This table holds both for every quantised colour: word = {P(skin) 6 bits,
// P(non-skin) 6 bits}, the 12-bit bus of the block diagram. The index is the
// colour quantised to 4 bits per channel, {R[7:4], G[7:4], B[7:4]}; that
// quantisation and the 6/6 split are this design's choices.
//
// One synchronous read port per skin core (data one clock after the
// address) and one write port for loading trained values. Contents are not
// reset; they must be loaded before use.
module skin_histogram #(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned IDX_W   = 12
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [IDX_W-1:0] wr_addr,
  input  logic [11:0]      wr_data,
  input  logic [IDX_W-1:0] rd_addr [N_PORTS],
  output logic [11:0]      rd_data [N_PORTS]
);
  logic [11:0] mem [2**IDX_W];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    for (int p = 0; p < N_PORTS; p++) rd_data[p] <= mem[rd_addr[p]];
  end
endmodule
