// seq_ram: buffer memory with one write port and NR read ports.
//
// Used for the sequence buffers of the equalizer: the input window
// ([81 x 4] words), the forward and backward biLSTM outputs ([81 x 35] each)
// and the equalized output ([61 x 2]); and for the weight memories of the
// LSTM and CNN engines. Each read port registers its data: the word at
// raddr[p] appears on rdata[p] one clock later (a synchronous-read RAM, as an
// FPGA block RAM or an ASIC SRAM macro behaves). A write and a read of the
// same address in one cycle return the old word. Contents are not reset.
//
// The paper gives only the shapes of these tensors; the memory organisation
// is this design's choice.
module seq_ram #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 81,
  parameter int NR    = 1,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr [NR],
  output logic [WIDTH-1:0] rdata [NR]
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (int'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < NR; p++) begin : g_rd
    always_ff @(posedge clk) begin
      rdata[p] <= mem[raddr[p]];
    end
  end

endmodule
