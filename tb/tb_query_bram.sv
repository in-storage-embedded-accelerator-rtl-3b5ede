// tb_query_bram: writes random items to random addresses of the query block
// RAM, keeps a shadow copy, and reads addresses back, checking the data one
// cycle after the read enable and that a read does not change on a cycle
// without rd_en.
module tb_query_bram;
  localparam int DEPTH = 2048;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [10:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [31:0] shadow [DEPTH];
  bit          written [DEPTH];
  int checks = 0, failures = 0;

  query_bram dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] held;
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    @(negedge clk);
    // fill every address once, then overwrite some
    for (int a = 0; a < DEPTH + 500; a++) begin
      wr_en   = 1;
      wr_addr = (a < DEPTH) ? 11'(a) : 11'($urandom_range(0, DEPTH-1));
      wr_data = $urandom;
      shadow[wr_addr]  = wr_data;
      written[wr_addr] = 1;
      @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      rd_en   = 1;
      rd_addr = 11'($urandom_range(0, DEPTH-1));
      @(negedge clk);
      checks++;
      if (rd_data !== shadow[rd_addr]) begin
        failures++;
        $display("read %0d: got %h expected %h", rd_addr, rd_data, shadow[rd_addr]);
      end
      // hold: no rd_en, output must keep its value
      held  = rd_data;
      rd_en = 0;
      rd_addr = 11'($urandom_range(0, DEPTH-1));
      @(negedge clk);
      checks++;
      if (rd_data !== held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
