// shm_banks: the shared memory array, 32 independent banks of ROWS x 64-bit words
// (48 KB at ROWS = 192). Banks 0-15 form bank group 0 and banks 16-31 group 1.
// Every bank has its own enable, write enable, row and a write mask of two 32-bit
// halves, so up to 32 accesses proceed in parallel; a 128-byte block is striped
// over the 16 banks of one group and read or written in one cycle.
// Timing: synchronous; read data appears the cycle after the enable.
// The 48 KB size follows the evaluated configuration; the 8-byte bank word and the
// two groups of 16 banks follow the shared-memory figure. The figure's "256 rows"
// is the reach of the 8-bit row field; 48 KB gives 192 rows.
module shm_banks #(
  parameter int unsigned NBANKS = 32,
  parameter int unsigned ROWS   = 192
) (
  input  logic              clk,
  input  logic [NBANKS-1:0] en,
  input  logic [NBANKS-1:0] we,
  input  logic [1:0]        wmask [NBANKS],
  input  logic [7:0]        row   [NBANKS],
  input  logic [63:0]       wdata [NBANKS],
  output logic [63:0]       rdata [NBANKS]
);
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    logic [31:0] lo [ROWS];
    logic [31:0] hi [ROWS];
    always_ff @(posedge clk) begin
      if (en[b] && int'(row[b]) < ROWS) begin
        if (we[b]) begin
          if (wmask[b][0]) lo[row[b]] <= wdata[b][31:0];
          if (wmask[b][1]) hi[row[b]] <= wdata[b][63:32];
        end else begin
          rdata[b] <= {hi[row[b]], lo[row[b]]};
        end
      end
    end
  end
endmodule
