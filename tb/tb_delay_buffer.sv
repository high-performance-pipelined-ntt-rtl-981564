// tb_delay_buffer: checks that the stage buffer is an exact DEPTH-cycle delay.
//
// Random data enter every cycle; the output in cycle t must equal the input
// of cycle t - DEPTH, and `primed` must rise exactly DEPTH cycles after reset.
// Run for DEPTH = 1 (a register) and DEPTH = 12.
module tb_delay_buffer;
  localparam int unsigned WIDTH = 10;

  logic clk = 0, rst_n = 0;
  logic [WIDTH-1:0] din1, dout1, din12, dout12;
  logic primed1, primed12;
  int checks = 0, failures = 0;

  delay_buffer #(.WIDTH(WIDTH), .DEPTH(1))  dut1  (.clk, .rst_n, .din(din1),  .dout(dout1),  .primed(primed1));
  delay_buffer #(.WIDTH(WIDTH), .DEPTH(12)) dut12 (.clk, .rst_n, .din(din12), .dout(dout12), .primed(primed12));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] h1 [$], h12 [$];
    din1 = 0; din12 = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 400; cyc++) begin
      // values presented now are captured at the next edge
      din1 = $urandom; din12 = $urandom;
      #1;
      checks++;
      if (primed12 !== (cyc >= 12)) begin failures++; $display("primed12 wrong at %0d", cyc); end
      checks++;
      if (primed1 !== (cyc >= 1)) begin failures++; $display("primed1 wrong at %0d", cyc); end
      if (cyc >= 12) begin
        checks++;
        if (dout12 !== h12[cyc - 12]) begin failures++; $display("dout12 wrong at %0d", cyc); end
      end
      if (cyc >= 1) begin
        checks++;
        if (dout1 !== h1[cyc - 1]) begin failures++; $display("dout1 wrong at %0d", cyc); end
      end
      h1.push_back(din1); h12.push_back(din12);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
