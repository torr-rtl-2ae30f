// tb_item_memory: fills a small banked item memory (256 columns in 4 banks,
// 12 classes on 8 lanes, so the second lane group is partly padding) with
// random concept bits, then reads every column group with all banks enabled
// and with a random bank mask. Enabled reads must return the stored bits one
// cycle later; reads of a disabled bank must return zero and raise rd_gated.
module tb_item_memory;
  localparam int unsigned D = 256, B = 4, M = 12, W = 8, G = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic         rd_en = 0, wr_en = 0, rd_gated;
  logic [7:0]   rd_col = '0, wr_col = '0;
  logic [0:0]   rd_grp = '0, wr_grp = '0;
  logic [B-1:0] bank_en = '1;
  logic [W-1:0] rd_data, wr_data = '0;
  logic [W-1:0] ref_mem [D][G];
  int checks = 0, failures = 0;

  item_memory #(.D(D), .B(B), .M(M), .W(W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < int'(D); c++)
      for (int g = 0; g < int'(G); g++) begin
        @(negedge clk);
        ref_mem[c][g] = W'($urandom);
        wr_en = 1; wr_col = 8'(c); wr_grp = 1'(g); wr_data = ref_mem[c][g];
      end
    @(negedge clk) wr_en = 0;
    for (int pass = 0; pass < 2; pass++) begin
      bank_en = (pass == 0) ? 4'hf : 4'b0101;
      for (int c = 0; c < int'(D); c++)
        for (int g = 0; g < int'(G); g++) begin
          @(negedge clk);
          rd_en = 1; rd_col = 8'(c); rd_grp = 1'(g);
          @(negedge clk);
          rd_en = 0;
          checks++;
          if (bank_en[c / (D / B)]) begin
            if (rd_data !== ref_mem[c][g] || rd_gated) begin
              failures++;
              $display("FAIL: col %0d grp %0d read %h exp %h", c, g, rd_data, ref_mem[c][g]);
            end
          end else if (rd_data !== '0 || !rd_gated) begin
            failures++;
            $display("FAIL: gated col %0d returned %h", c, rd_data);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
