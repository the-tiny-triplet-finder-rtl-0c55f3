// tb_result_buffer: random writes and reads of result records through a
// small buffer (DEPTH 16); checks FIFO order, the show-ahead read data,
// the fill level, the write address sequence, and that it can hold DEPTH
// records.
module tb_result_buffer;
  import tts_pkg::*;

  localparam int D = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, wr_en, rd_en, rd_valid;
  result_t wr_data, rd_data;
  logic [$clog2(D)-1:0] wr_addr;
  logic [$clog2(D):0] level;

  result_buffer #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  result_t q [$];
  int full_seen = 0;
  int waddr = 0;

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; rd_en = 1'b0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check state before this cycle's operations
      checks++;
      if (int'(level) != q.size() || rd_valid != (q.size() > 0) ||
          (q.size() > 0 && rd_data != q[0]) || int'(wr_addr) != waddr % D) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d level=%0d exp %0d valid=%0b", t, level, q.size(), rd_valid);
      end
      if (q.size() == D) full_seen++;
      // phases: fill up, drain, mixed
      wr_en = (q.size() < D) && ((t / 200) % 2 == 0 ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0));
      rd_en = ((t / 200) % 2 == 1 ? ($urandom_range(3) != 0) : ($urandom_range(4) == 0));
      wr_data = result_t'({$urandom, $urandom, $urandom});
      @(posedge clk);
      #1;
      if (rd_en && q.size() > 0) void'(q.pop_front());
      if (wr_en) begin q.push_back(wr_data); waddr++; end
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL never full"); end
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
