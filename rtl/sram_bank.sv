// sram_bank: synchronous one-read-one-write on-chip SRAM bank.
//
// Used for the three on-chip buffers of the accelerator: the weight SRAM (banks
// of 64 bit x 1024 rows, one per BSTC decoding lane), the token SRAM holding
// activations and queries, and the temp SRAM holding the vital-key masks from
// bit-grained prediction. Only the capacities come from the published
// configuration; the port arrangement (one write and one read port, one-cycle
// registered read, write-first not guaranteed) is this design's choice.
// A read of address a issued with re in cycle t returns mem[a] on rdata in cycle
// t+1; rdata holds its value while re is low. The array is not reset.
module sram_bank #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
