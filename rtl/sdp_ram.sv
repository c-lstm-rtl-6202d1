// sdp_ram: on-chip block RAM with one write port and one read port (simple dual port).
//
// Every buffer of the accelerator is one of these: the weight spectra, peephole and bias
// vectors, the cell state and, through pingpong_buf, the double buffers between pipeline
// stages. A write takes effect at the clock edge; a read returns the word at raddr on the next
// clock (registered output, as block RAM does). Reading and writing one address in the same
// cycle returns the old word. The contents are not reset: every word is written before it is
// read.
module sdp_ram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
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
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
