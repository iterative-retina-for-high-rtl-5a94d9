// Testbench of hit_ram: random writes and reads against a shadow copy,
// including read-during-write to the same slot (old data is returned) and the
// one-cycle read latency.
module tb_hit_ram;
  import retina_pkg::*;

  logic clk = 0, wr_en = 0, rd_en = 0;
  hit_idx_t wr_addr = '0, rd_addr = '0;
  hit_t wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  hit_t shadow [MAX_HITS];

  always #5 clk = ~clk;

  hit_ram dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every slot
    for (int i = 0; i < MAX_HITS; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = hit_idx_t'(i); wr_data = hit_t'($urandom);
      shadow[i] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    // random mix of accesses
    for (int t = 0; t < 1000; t++) begin
      hit_t expect_d;
      @(negedge clk);
      rd_en   = 1;
      rd_addr = hit_idx_t'($urandom_range(MAX_HITS - 1));
      wr_en   = $urandom_range(1);
      wr_addr = ($urandom_range(3) == 0) ? rd_addr : hit_idx_t'($urandom_range(MAX_HITS - 1));
      wr_data = hit_t'($urandom);
      expect_d = shadow[rd_addr];
      @(posedge clk);
      if (wr_en) shadow[wr_addr] = wr_data;
      #1;
      checks++;
      if (rd_data !== expect_d) begin
        failures++;
        if (failures < 10) $display("read %0d: got %h expected %h", rd_addr, rd_data, expect_d);
      end
    end
    // rd_en low holds the output
    @(negedge clk) begin rd_en = 0; wr_en = 0; end
    begin
      hit_t held;
      held = rd_data;
      repeat (3) @(posedge clk);
      #1 checks++;
      if (rd_data !== held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
