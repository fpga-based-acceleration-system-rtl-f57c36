// sdp_ram: simple dual-port RAM, one write port and one read port.
//
// The read is asynchronous (data follows the address in the same cycle),
// which lets the streaming blocks of the tracker read neighbours without
// extra pipeline bookkeeping; a synthesis tool maps it to distributed RAM or
// registers. The write is synchronous. Contents are not reset.
module sdp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AB = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AB-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AB-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
