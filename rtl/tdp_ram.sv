// tdp_ram: true-dual-port synchronous RAM, default 256 words x 16 bits.
//
// The paper builds its data bank from eight 256 x 16-bit true-dual-port
// memories (FPGA block RAM). Each of the two ports has its own enable, write
// enable, address and data; a read returns the addressed word on the next
// clock edge (registered output), a write stores on the clock edge. A port
// that writes returns the old word (read-first). When both ports write the
// same address in one cycle port B wins; the accelerator never does this.
// Written as an array so that synthesis infers a block RAM.
module tdp_ram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  // port A
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end
endmodule
