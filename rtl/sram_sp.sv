// sram_sp: single-port synchronous SRAM, used for every on-chip buffer of the
// DSPE (Query/Key SRAMs, Value SRAM, Parameter, Weight, Input and Output
// buffers, Cos-SRAM).
//
// A read or write happens when en is high at a rising clock edge; read data
// appears on rdata one cycle later and holds until the next read. A write does
// not update rdata. The capacities come from the paper (48KB, 24KB); the
// single port, the one-cycle latency and the word width are this design's
// choices. The array is plain logic so it maps onto a compiled SRAM macro.
module sram_sp #(
  parameter int unsigned DEPTH = 768,
  parameter int unsigned WIDTH = 512
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
