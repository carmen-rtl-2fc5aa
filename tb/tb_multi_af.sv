// tb_multi_af: drives every activation function of the multi-AF block with
// random Q4.12 inputs in [-8, 8) plus corner values and compares each
// output with the function computed in double precision, to within a few
// Q4.12 LSBs. SoftMax is run on vectors of 1 to 12 elements; its outputs
// must come back in order, with out_last on the final one. The output side
// applies random back-pressure.
module tb_multi_af;
  import carmen_pkg::*;

  logic clk = 1'b0, rst_n;
  af_e af_sel;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic signed [AF_W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  localparam real LSB = 1.0 / 4096.0;

  multi_af #(.SM_DEPTH(16)) dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) out_ready <= ($urandom_range(3) != 0);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sigm(input real v);
    return 1.0 / (1.0 + $exp(-v));
  endfunction

  function automatic real ref_af(input af_e f, input real v);
    case (f)
      AF_NONE:    return v;
      AF_RELU:    return (v > 0.0) ? v : 0.0;
      AF_SIGMOID: return sigm(v);
      AF_TANH:    return $tanh(v);
      AF_SWISH:   return v * sigm(v);
      AF_GELU:    return v * sigm(1.702 * v);
      AF_SELU:    return (v > 0.0) ? 1.0507009873554805 * v
                                   : 1.7580993408473766 * ($exp(v) - 1.0);
      default:    return 0.0;
    endcase
  endfunction

  function automatic real clampq(input real v);
    if (v > 32767.0 * LSB) return 32767.0 * LSB;
    if (v < -8.0) return -8.0;
    return v;
  endfunction

  task automatic send(input logic signed [AF_W-1:0] d, input bit last);
    @(negedge clk);
    in_valid = 1; in_data = d; in_last = last;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic recv(output real v, output bit last);
    @(posedge clk);
    while (!(out_valid && out_ready)) @(posedge clk);
    v = real'(out_data) * LSB;
    last = out_last;
  endtask

  task automatic check(input string what, input real got, input real exp_v, input real tol);
    checks++;
    if (got - exp_v > tol || exp_v - got > tol) begin
      failures++;
      $display("FAIL %s got %f expected %f", what, got, exp_v);
    end
  endtask

  initial begin
    real got, x;
    bit last;
    rst_n = 0; in_valid = 0; in_data = 0; in_last = 0; af_sel = AF_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 7; f++) begin
      af_sel = af_e'(f);
      for (int t = 0; t < 60; t++) begin
        logic signed [AF_W-1:0] d;
        case (t)
          0: d = 16'sh0000;
          1: d = 16'sh7fff;
          2: d = -16'sh8000;
          3: d = 16'sh0001;
          4: d = -16'sh0001;
          default: d = AF_W'($urandom);
        endcase
        x = real'(d) * LSB;
        fork
          send(d, 1'b1);
          recv(got, last);
        join
        check($sformatf("%s(%f)", af_sel.name(), x), got, clampq(ref_af(af_sel, x)), 5.0 * LSB);
      end
    end
    // SoftMax on vectors of several lengths.
    af_sel = AF_SOFTMAX;
    for (int len = 1; len <= 12; len++) begin
      real xs [12];
      real m, s;
      logic signed [AF_W-1:0] ds [12];
      m = -100.0; s = 0.0;
      for (int i = 0; i < len; i++) begin
        ds[i] = AF_W'($signed(14'($urandom)));  // [-2, 2)
        xs[i] = real'(ds[i]) * LSB;
        if (xs[i] > m) m = xs[i];
      end
      for (int i = 0; i < len; i++) s += $exp(xs[i] - m);
      fork
        for (int i = 0; i < len; i++) send(ds[i], i == len - 1);
        for (int i = 0; i < len; i++) begin
          recv(got, last);
          check($sformatf("softmax len %0d elem %0d", len, i), got, $exp(xs[i] - m) / s, 4.0 * LSB);
          checks++;
          if (last != (i == len - 1)) begin
            failures++;
            $display("FAIL softmax out_last at %0d of %0d", i, len);
          end
        end
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
