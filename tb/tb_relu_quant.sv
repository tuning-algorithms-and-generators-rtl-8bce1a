// tb_relu_quant: sweeps sums, biases and shifts and compares the quantizer
// with min(15, max(0, sum + bias) >> shift), also checking the ReLU and
// saturation flags.
module tb_relu_quant;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [16:0] sum;
  logic signed [15:0] bias;
  logic [4:0] shift;
  logic [3:0] act;
  logic clipped_neg, saturated;
  int checks = 0, failures = 0;
  int n_neg = 0, n_sat = 0;

  relu_quant #(.IN_W(17)) dut (.sum, .bias, .shift, .act, .clipped_neg, .saturated);

  task automatic check_one(int s, int b, int sh);
    int v, q;
    bit neg, sat;
    sum = 17'(s); bias = 16'(b); shift = 5'(sh);
    #1;
    v = s + b;
    neg = v < 0;
    q = neg ? 0 : (v >> sh);
    sat = !neg && q > 15;
    if (sat) q = 15;
    n_neg += int'(neg); n_sat += int'(sat);
    checks++;
    if (int'(act) != q || clipped_neg != neg || saturated != sat) begin
      failures++;
      if (failures < 10) $display("s=%0d b=%0d sh=%0d got %0d/%b/%b expected %0d/%b/%b",
                                  s, b, sh, act, clipped_neg, saturated, q, neg, sat);
    end
  endtask

  initial begin
    check_one(-65536, -32768, 0);
    check_one(65535, 32767, 0);
    check_one(65535, 32767, 31);
    check_one(15, 0, 0);
    check_one(16, 0, 0);
    check_one(-1, 1, 0);
    for (int t = 0; t < 5000; t++) begin
      check_one($signed($urandom) % 65536, $signed($urandom) % 2048, $urandom_range(0, 15));
      if (t % 16 == 0) @(posedge clk);
    end
    if (n_neg == 0 || n_sat == 0) begin failures++; $display("corner cases not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
