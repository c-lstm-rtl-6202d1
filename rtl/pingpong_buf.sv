// pingpong_buf: double buffer between two coarse-grained pipeline stages.
//
// Two banks of DEPTH words. The producer writes the bank named by wbank while the consumer reads
// the other one, so both stages run at the same time on consecutive frames. A pulse on swap
// (given by the pipeline controller at the end of a step in which the producer filled its bank)
// exchanges the roles: the bank just written becomes readable and the old read bank is handed to
// the producer. Reads return data one clock after raddr, as in sdp_ram.
module pingpong_buf #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 512,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             swap,
  output logic             wbank,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    wbank <= 1'b0;
    else if (swap) wbank <= ~wbank;
  end

  // bank bit on top of the address: each bank is rounded up to a power of two
  sdp_ram #(.DEPTH(2 * (1 << AW)), .WIDTH(WIDTH)) u_mem (
    .clk,
    .we    (we),
    .waddr ({wbank, waddr}),
    .wdata (wdata),
    .re    (re),
    .raddr ({~wbank, raddr}),
    .rdata (rdata)
  );

endmodule
