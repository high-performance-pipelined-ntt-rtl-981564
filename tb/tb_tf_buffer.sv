// tb_tf_buffer: checks the digit-sliced twiddle factor buffer.
//
// Writes random 32-bit words (4 digits of 8 bits) to a 6-entry buffer, keeps a
// model copy, and then reads each digit slice through its own, independently
// chosen address; every slice must return digit i of the word at its address.
// A write must not disturb other entries.
module tb_tf_buffer;
  localparam int unsigned D = 8, K = 4, DEPTH = 6, AW = 3;

  logic clk = 0;
  logic we;
  logic [AW-1:0] waddr;
  logic [K*D-1:0] wdata;
  logic [AW-1:0] raddr [K];
  logic [D-1:0] rdata [K];
  logic [K*D-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  tf_buffer #(.D(D), .K(K), .DEPTH(DEPTH), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < K; i++) raddr[i] = 0;
    for (int e = 0; e < DEPTH; e++) begin
      @(negedge clk);
      we = 1; waddr = AW'(e); wdata = $urandom; model[e] = wdata;
    end
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      we = (it % 3 == 0);
      waddr = AW'($urandom % DEPTH);
      wdata = $urandom;
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 0;
      for (int i = 0; i < K; i++) raddr[i] = AW'($urandom % DEPTH);
      #1;
      for (int i = 0; i < K; i++) begin
        checks++;
        if (rdata[i] !== model[raddr[i]][i*D +: D]) begin
          failures++;
          $display("slice %0d addr %0d got %h exp %h", i, raddr[i], rdata[i], model[raddr[i]][i*D +: D]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
