// tb_ds_bfu: checks the digit-serial butterfly against word arithmetic.
//
// 32-bit words (4 digits of 8 bits), Q a 29-bit odd modulus. Random a, b in
// [0, 2Q) are streamed least significant digit first; the collected digits
// must equal a + b and a - b + 2Q exactly (both below 4Q < 2^32), including
// cases with a < b, where the 2Q correction is needed. Idle cycles between
// words check that the carries are held and restarted correctly.
module tb_ds_bfu;
  import ntt_tb_pkg::*;

  localparam int unsigned D = 8;
  localparam int unsigned K = 4;
  localparam int unsigned W = D * K;

  logic clk = 0, rst_n = 0;
  logic en, first;
  logic [D-1:0] a, b, q2, sum, diff;
  int checks = 0, failures = 0, neg_cases = 0;

  ds_bfu #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] q, va, vb, got_s, got_d, exp_s, exp_d;
    q = 32'd268435649;
    en = 0; first = 0; a = 0; b = 0; q2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      va = W'($urandom % (2 * q));
      vb = W'($urandom % (2 * q));
      if (n % 5 == 0) va = 0;
      if (n % 7 == 0) vb = 2 * q - 1;
      if (va < vb) neg_cases++;
      for (int j = 0; j < K; j++) begin
        @(negedge clk);
        en = 1; first = (j == 0);
        a = va[j*D +: D]; b = vb[j*D +: D]; q2 = W'(2 * q) >> (j * D);
        #1;
        got_s[j*D +: D] = sum;
        got_d[j*D +: D] = diff;
      end
      @(negedge clk);
      en = 0; a = $urandom; b = $urandom;
      if ($urandom % 2) begin
        @(negedge clk);
      end
      exp_s = va + vb;
      exp_d = va - vb + 2 * q;
      checks++;
      if (got_s !== exp_s) begin
        failures++;
        $display("sum mismatch a=%h b=%h got=%h exp=%h", va, vb, got_s, exp_s);
      end
      checks++;
      if (got_d !== exp_d) begin
        failures++;
        $display("diff mismatch a=%h b=%h got=%h exp=%h", va, vb, got_d, exp_d);
      end
    end
    checks++;
    if (neg_cases == 0) begin
      failures++;
      $display("no case with a < b was exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
