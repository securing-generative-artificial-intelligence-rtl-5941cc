// tb_threshold_binarizer: random samples and per-MTJ thresholds, including
// samples equal to the threshold (must give 0) and one above (must give 1).
module tb_threshold_binarizer;
  logic [15:0][11:0] sample, vth;
  logic [15:0]       bits;
  threshold_binarizer #(.N(16), .W(12)) dut (.sample, .vth, .bits);

  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 500; k++) begin
      for (int i = 0; i < 16; i++) begin
        int v, t;
        t = $urandom % 4096;
        case ($urandom % 4)
          0: v = t;
          1: v = (t < 4095) ? t + 1 : t;
          default: v = $urandom % 4096;
        endcase
        sample[i] = 12'(v);
        vth[i]    = 12'(t);
      end
      #1;
      for (int i = 0; i < 16; i++) begin
        bit exp_b;
        exp_b = (int'(sample[i]) - int'(vth[i])) > 0;
        checks++;
        if (bits[i] !== exp_b) begin
          failures++;
          $display("FAIL: ch %0d sample %0d vth %0d bit %b", i, sample[i], vth[i], bits[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
