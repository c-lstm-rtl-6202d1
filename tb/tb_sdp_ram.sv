// tb_sdp_ram: writes random words to random addresses of a small RAM while reading others,
// compares every read (one cycle of latency, old data on a same-address collision) with a
// model array, and checks that a read without re holds the output.
module tb_sdp_ram;
  localparam int D = 37, W = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  sdp_ram #(.DEPTH(D), .WIDTH(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model [D];
  bit           known [D];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [W-1:0] exp_d;
    bit exp_v;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < D; a++) known[a] = 0;
    @(posedge clk);
    // fill
    for (int a = 0; a < D; a++) begin
      #1; we = 1; waddr = 6'(a); wdata = W'($urandom); model[a] = wdata; known[a] = 1;
      @(posedge clk);
    end
    for (int c = 0; c < 400; c++) begin
      #1;
      we = $urandom_range(0, 1); re = $urandom_range(0, 3) != 0;
      waddr = 6'($urandom_range(0, D - 1)); raddr = (c % 5 == 0) ? waddr : 6'($urandom_range(0, D - 1));
      wdata = W'($urandom);
      exp_d = re ? model[raddr] : rdata; exp_v = 1;
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== exp_d) begin failures++; $display("cycle %0d: read %h expected %h", c, rdata, exp_d); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
