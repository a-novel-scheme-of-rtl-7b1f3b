// dp_bram: dual-port block RAM holding the clutter map, one word per range bin.
//
// Modelled on the FPGA's dual-port block RAM primitive: port A writes, port B
// reads, as the DIAGC card uses them. Both ports are clocked by the range
// clock. A read is synchronous: the word at `addrb` sampled with `enb` high
// appears on `dob` after that clock edge and is held while `enb` is low;
// `rstb` clears the output register. A write and a read of the same address
// in one cycle return the old word (read-first). The port names follow the
// primitive's pin names; the depth and width are parameters, 2048 x 14 by
// default, which is this design's choice (the paper gives neither).
module dp_bram #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned W     = 14,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // port A: write
  input  logic          ena,
  input  logic          wea,
  input  logic [AW-1:0] addra,
  input  logic [W-1:0]  dia,
  // port B: read
  input  logic          enb,
  input  logic          rstb,
  input  logic [AW-1:0] addrb,
  output logic [W-1:0]  dob
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ena && wea) mem[addra] <= dia;
  end

  always_ff @(posedge clk) begin
    if (rstb)     dob <= '0;
    else if (enb) dob <= mem[addrb];
  end

endmodule
