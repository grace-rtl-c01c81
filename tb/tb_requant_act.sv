// tb_requant_act: random accumulators and quantisation parameters through
// the requantise-and-activate stage, compared with a reference computed
// here in 64-bit integer arithmetic (requantisation and ReLU) and with the
// exact logistic function (sigmoid, within 4 LSB of the Q0.7 output: the piecewise-linear
// approximation is good to about 0.02).
module tb_requant_act;
  import grace_pkg::*;
  int checks = 0, failures = 0;
  logic signed [31:0] acc;
  rq_t                rq;
  logic signed [7:0]  y;

  requant_act dut (.acc, .rq, .y);

  function automatic int ref_q(longint a, int m, int s, int z);
    longint p;
    p = a * m;
    if (s != 0) p = (p + (64'sd1 <<< (s - 1))) >>> s;
    p = p + z;
    if (p > 127) p = 127;
    if (p < -128) p = -128;
    return int'(p);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q, e;
    real s;
    for (int t = 0; t < 6000; t++) begin
      acc      = (t % 3 == 0) ? $signed($urandom) : $signed($urandom_range(0, 8000)) - 4000;
      rq.mult  = 16'($urandom_range(1, 65535));
      rq.shift = 6'($urandom_range(0, 30));
      rq.zero  = 8'($urandom_range(0, 40)) - 8'sd20;
      rq.act   = act_e'(t % 3);
      #1;
      q = ref_q(longint'(acc), int'(rq.mult), int'(rq.shift), int'(rq.zero));
      checks++;
      case (rq.act)
        ACT_NONE: if (y != q) begin
          failures++; $display("none: acc=%0d m=%0d s=%0d got %0d exp %0d", acc, rq.mult, rq.shift, y, q);
        end
        ACT_RELU: begin
          e = (q < int'(rq.zero)) ? int'(rq.zero) : q;
          if (y != e) begin
            failures++; $display("relu: got %0d exp %0d", y, e);
          end
        end
        default: begin
          s = 127.0 / (1.0 + $exp(-real'(q) / 16.0));
          if (real'(y) > s + 4.0 || real'(y) < s - 4.0 || y < 0) begin
            failures++; $display("sigmoid: x=%0d got %0d exp %f", q, y, s);
          end
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
