// tb_pingpong_buf: a producer fills one bank with a frame's words while a consumer reads the
// previous frame from the other bank; after each swap the consumer must see exactly what the
// producer wrote in the step before, and never the words being written at the same time.
module tb_pingpong_buf;
  localparam int D = 20, W = 16, STEPS = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic swap, wbank, we, re;
  logic [4:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  pingpong_buf #(.DEPTH(D), .WIDTH(W)) dut (.*);

  int checks = 0, failures = 0;
  function automatic logic [W-1:0] val(input int step, input int a);
    return W'(step * 1000 + a * 7 + 3);
  endfunction
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    swap = 0; we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++; if (wbank !== 1'b0) begin failures++; $display("wbank after reset %b", wbank); end
    for (int s = 0; s < STEPS; s++) begin
      for (int a = 0; a < D; a++) begin
        #1; we = 1; waddr = 5'(a); wdata = val(s, a);
        re = (s > 0); raddr = 5'(D - 1 - a);
        @(posedge clk);
        #1;
        if (s > 0) begin
          checks++;
          if (rdata !== val(s - 1, D - 1 - a)) begin
            failures++; $display("step %0d addr %0d: %0d expected %0d", s, D - 1 - a, rdata, val(s - 1, D - 1 - a));
          end
        end
      end
      #1; we = 0; re = 0; swap = 1;
      @(posedge clk);
      #1 swap = 0;
      checks++; if (wbank !== 1'((s + 1) % 2)) begin failures++; $display("wbank %b after swap %0d", wbank, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
