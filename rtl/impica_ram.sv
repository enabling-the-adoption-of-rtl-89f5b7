// impica_ram: simple dual-port synchronous RAM, used as IMPICA's 16KB
// instruction RAM and 16KB data RAM. Port A and port B each read or write one
// word per cycle; a read returns its data on the cycle after the address is
// presented. The paper gives the capacities (16KB each); word width and the
// one-cycle read latency are this design's choices. Writing both ports to the
// same address in one cycle is not allowed (port B wins).
module impica_ram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned BYTES = 16384,               // paper: 16KB
  localparam int unsigned DEPTH = BYTES / (WIDTH / 8),
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      b_rdata <= mem[b_addr];
    end
  end
endmodule
