// tb_ttf_shifter: random phi patterns and shift amounts, every output bit
// compared with pattern[shift + j - W] (zero outside the pattern).
module tb_ttf_shifter;
  import tts_pkg::*;

  localparam int unsigned W = 19;
  logic [NPHI-1:0] pattern;
  phibin_t shift;
  logic [2*W:0] out;
  int checks = 0, failures = 0;
  int src;
  bit e;

  ttf_shifter #(.N_PHI(NPHI), .W(W)) dut (.*);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      pattern = {$urandom, $urandom, $urandom, $urandom};
      if (t % 3 == 0) pattern = NPHI'(1) << $urandom_range(NPHI - 1);
      shift = phibin_t'($urandom_range(NPHI - 1));
      #1;
      checks++;
      for (int j = 0; j <= 2 * W; j++) begin
        src = int'(shift) + j - W;
        e = (src >= 0 && src < int'(NPHI)) ? pattern[src] : 1'b0;
        if (out[j] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL shift=%0d j=%0d got %0b exp %0b", shift, j, out[j], e);
          break;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
