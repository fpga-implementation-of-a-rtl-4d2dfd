// tb_categorizer: checks the sign reduction (>= 0 -> 1, < 0 -> 0) and the
// one-clock alignment of samples, strobe and enable, on edge values and random
// samples.
module tb_categorizer;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_en, out_valid, out_en, sign_i, sign_q;
  logic signed [W-1:0] in_i, in_q, out_i, out_q;
  int checks = 0, failures = 0;

  categorizer #(.SAMPLE_W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [W-1:0] ei, eq;
    logic ev, ee;
    in_valid = 0; in_en = 0; in_i = 0; in_q = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      case (n)
        0: begin in_i = 0;      in_q = -1;     end
        1: begin in_i = 16'sh7fff; in_q = 16'sh8000; end
        2: begin in_i = 1;      in_q = 0;      end
        default: begin in_i = W'($urandom); in_q = W'($urandom); end
      endcase
      in_valid = 1'($urandom); in_en = 1'($urandom);
      ei = in_i; eq = in_q; ev = in_valid; ee = in_en;
      @(negedge clk);   // outputs one clock later
      checks++;
      if (sign_i !== (ei >= 0) || sign_q !== (eq >= 0) || out_i !== ei || out_q !== eq ||
          out_valid !== ev || out_en !== ee) begin
        failures++;
        $display("mismatch: in %0d %0d -> sign %b %b", ei, eq, sign_i, sign_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
