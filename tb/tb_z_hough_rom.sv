// tb_z_hough_rom: checks both Hough ROMs (layer 1 at 250 mm, layer 3 at
// 525 mm) over every z bin and every z0 row against the real-arithmetic
// reference band (first bin and length), including the one-cycle read
// latency and hold when en is low.  Also checks the widest band: 3 bins
// for both layers at the default binning.
module tb_z_hough_rom;
  import tts_pkg::*;
  import tts_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic  en;
  zbin_t nz;
  zbin_t a1 [NZ0];
  zbin_t a3 [NZ0];
  logic [SPW-1:0] v1 [NZ0];
  logic [SPW-1:0] v3 [NZ0];
  int maxsp1 = 0, maxsp3 = 0;

  int checks = 0, failures = 0;

  z_hough_rom #(.R_MM(R1_MM)) dut1 (.clk, .en, .nz, .addr(a1), .span(v1));
  z_hough_rom #(.R_MM(R3_MM)) dut3 (.clk, .en, .nz, .addr(a3), .span(v3));

  task automatic check_row(input int kz, input int k0, input real r, input logic [SPW-1:0] v,
                           input zbin_t a);
    int lo, hi, sp;
    bit ok;
    ok = ref_hough(kz, k0, r, NZ, Z_BIN_MM, Z0_BIN_MM, lo, hi);
    sp = ok ? hi - lo + 1 : 0;
    if (r < 300.0 && sp > maxsp1) maxsp1 = sp;
    if (r > 300.0 && sp > maxsp3) maxsp3 = sp;
    checks++;
    if (int'(v) != sp || (sp > 0 && int'(a) != lo)) begin
      failures++;
      if (failures < 10)
        $display("FAIL r=%0.0f kz=%0d k0=%0d exp lo=%0d span=%0d got a=%0d span=%0d", r, kz, k0, lo, sp, a, v);
    end
  endtask

  initial begin
    en = 1'b0; nz = '0;
    @(posedge clk);
    for (int kz = 0; kz < int'(NZ); kz++) begin
      en <= 1'b1; nz <= zbin_t'(kz);
      @(posedge clk);      // lookup registered at this edge
      en <= 1'b0; nz <= zbin_t'((kz * 7) % NZ);
      #1;
      for (int k0 = 0; k0 < int'(NZ0); k0++) begin
        check_row(kz, k0, 250.0, v1[k0], a1[k0]);
        check_row(kz, k0, 525.0, v3[k0], a3[k0]);
      end
      @(posedge clk);      // en low: outputs must hold
      #1;
      for (int k0 = 0; k0 < int'(NZ0); k0++) check_row(kz, k0, 250.0, v1[k0], a1[k0]);
    end
    checks++;
    if (maxsp1 != 3 || maxsp3 != 3) begin
      failures++;
      $display("FAIL band widths %0d / %0d", maxsp1, maxsp3);
    end
    $display("widest band: layer 1 %0d bins, layer 3 %0d bins", maxsp1, maxsp3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
