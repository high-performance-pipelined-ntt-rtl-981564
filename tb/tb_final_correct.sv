// tb_final_correct: checks the final conditional subtraction.
//
// 32-bit words (4 digits of 8 bits), Q = 268435649. Words v in [0, 2Q),
// including Q - 1, Q and 2Q - 1, go in back to back or with gaps; each must
// come out as v mod Q exactly K = 4 cycles later, with its flags.
module tb_final_correct;
  import ntt_tb_pkg::*;
  localparam int unsigned D = 8, K = 4, W = 32, NW = 300;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] q;
  logic in_valid, in_sop, out_valid, out_sop;
  logic [1:0] in_didx, out_didx;
  logic [D-1:0] in_digit, out_digit;
  int checks = 0, failures = 0, taken = 0, kept = 0;

  final_correct #(.D(D), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] wv [NW];
  int start_cyc [NW];
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // monitor: collect output words and their timing
  initial begin
    logic [W-1:0] acc;
    int n = 0;
    forever begin
      @(negedge clk);
      if (out_valid) begin
        acc[out_didx*D +: D] = out_digit;
        if (out_didx == 0) begin
          checks++;
          if (cyc != start_cyc[n] + K) begin
            failures++; $display("word %0d latency %0d", n, cyc - start_cyc[n]);
          end
          checks++;
          if (out_sop !== (n % 10 == 0)) begin failures++; $display("sop wrong word %0d", n); end
        end
        if (out_didx == 3) begin
          checks++;
          if (acc !== ((wv[n] >= q) ? wv[n] - q : wv[n])) begin
            failures++; $display("word %0d v=%h got %h", n, wv[n], acc);
          end
          if (wv[n] >= q) taken++; else kept++;
          n++;
          if (n == NW) begin
            checks++;
            if (taken == 0 || kept == 0) failures++;
            $display("subtractions taken=%0d kept=%0d", taken, kept);
            $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
            $finish;
          end
        end
      end
    end
  end

  initial begin
    q = 32'd268435649;
    in_valid = 0; in_sop = 0; in_didx = 0; in_digit = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NW; n++) begin
      wv[n] = W'($urandom % (2 * q));
      case (n % 13)
        1: wv[n] = q - 1;
        2: wv[n] = q;
        3: wv[n] = 2 * q - 1;
        4: wv[n] = 0;
        default: ;
      endcase
      for (int j = 0; j < K; j++) begin
        @(negedge clk);
        if (j == 0) start_cyc[n] = cyc;
        in_valid = 1; in_sop = (j == 0) && (n % 10 == 0); in_didx = 2'(j);
        in_digit = wv[n][j*D +: D];
      end
      if ($urandom % 3 == 0) begin
        @(negedge clk);
        in_valid = 0; in_didx = 0; in_digit = $urandom;
      end
    end
    @(negedge clk);
    in_valid = 0;
  end
endmodule
