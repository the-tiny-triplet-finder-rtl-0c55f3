// tb_hit_storage_block: random hits are written into the storage block with
// random per-row bands (first word and 0..4 words), columns are read back
// and compared with a bitmap model; a refresh must empty the whole block in one cycle, and the
// next event's writes must not see stale bits.
module tb_hit_storage_block;
  import tts_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, refresh, wr_en, rd_en;
  zbin_t wr_addr [NZ0];
  logic [SPW-1:0] wr_span [NZ0];
  phibin_t wr_phi;
  zbin_t rd_addr;
  logic [NPHI-1:0] rd_data [NZ0];

  bit model [NZ0][NZ][NPHI];
  int checks = 0, failures = 0;

  hit_storage_block dut (.*);

  task automatic clear_model();
    for (int k = 0; k < int'(NZ0); k++)
      for (int a = 0; a < int'(NZ); a++)
        for (int p = 0; p < int'(NPHI); p++) model[k][a][p] = 1'b0;
  endtask

  task automatic write_hit(input int base);
    wr_en <= 1'b1;
    wr_phi <= phibin_t'($urandom_range(NPHI - 1));
    for (int k = 0; k < int'(NZ0); k++) begin
      wr_addr[k] <= zbin_t'((base + k * 3 + $urandom_range(2)) % NZ);
      wr_span[k] <= SPW'($urandom_range(4));
    end
    @(posedge clk);
    for (int k = 0; k < int'(NZ0); k++)
      for (int i = 0; i < int'(wr_span[k]); i++)
        if (int'(wr_addr[k]) + i < int'(NZ)) model[k][int'(wr_addr[k]) + i][wr_phi] = 1'b1;
  endtask

  task automatic read_check(input int a);
    rd_en <= 1'b1; rd_addr <= zbin_t'(a);
    @(posedge clk);
    rd_en <= 1'b0;
    #1;
    for (int k = 0; k < int'(NZ0); k++) begin
      checks++;
      for (int p = 0; p < int'(NPHI); p++) begin
        if (rd_data[k][p] != model[k][a][p]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d addr %0d bit %0d got %0b", k, a, p, rd_data[k][p]);
          break;
        end
      end
    end
  endtask

  int base;

  initial begin
    rst_n = 1'b0; refresh = 1'b0; wr_en = 1'b0; rd_en = 1'b0; rd_addr = '0; wr_phi = '0;
    for (int k = 0; k < int'(NZ0); k++) begin wr_addr[k] = '0; wr_span[k] = '0; end
    clear_model();
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int ev = 0; ev < 4; ev++) begin
      base = (ev == 3) ? int'(NZ) - 30 : ev * 37;   // last event runs into the top bins
      // a dense cluster so that several hits share words
      for (int h = 0; h < 112; h++) write_hit(base + (h % 20));
      wr_en <= 1'b0;
      #1;
      for (int a = 0; a < int'(NZ); a += 1) if ((a % 4) == ev || (a >= base && a < base + 60)) read_check(a);
      // one-cycle refresh, then the block must read empty everywhere
      refresh <= 1'b1;
      @(posedge clk);
      refresh <= 1'b0;
      clear_model();
      for (int a = base; a < base + 60; a++) read_check(a % NZ);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
