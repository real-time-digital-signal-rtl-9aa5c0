// pulse_ram: the pulse data memory.
//
// One trace of 16-bit samples. The trigger logic writes the raw charge trace
// into it, the Savitzky-Golay filter overwrites it in place with the current
// pulse, and the later parameter passes only read it. Writes are synchronous;
// the read port is combinational, so a processing stage can issue one address
// and use the word in the same clock, as a DSP reads its internal data memory.
// The depth is this design's choice; the 16-bit word follows the DSP data
// memory.
module pulse_ram #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned DEPTH  = 1024,
  localparam int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [ADDR_W-1:0] raddr,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
