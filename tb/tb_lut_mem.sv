// tb_lut_mem: fills the whole 256 x 13 table with a pattern computed from the
// address, reads every entry back in random order and checks data and the
// one-cycle read latency.
module tb_lut_mem;
  localparam int AW = 8, DW = 13;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [DW-1:0] wr_data = '0;
  logic rd_valid;
  logic [DW-1:0] rd_data;
  int checks = 0, failures = 0;

  lut_mem #(.AW(AW), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [DW-1:0] pat(input int a, input int salt);
    return DW'((a * 37 + salt) ^ (a << 5) ^ (salt >> 3));
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int salt;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      salt = pass * 1234 + 77;
      for (int a = 0; a < 2**AW; a++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = AW'(a); wr_data = pat(a, salt);
      end
      @(negedge clk);
      wr_en = 0;
      for (int i = 0; i < 2**AW; i++) begin
        int a;
        a = (i * 73 + pass) % (2**AW);
        @(negedge clk);
        rd_en = 1; rd_addr = AW'(a);
        @(negedge clk);
        rd_en = 0;
        checks += 2;
        if (!rd_valid) begin failures++; $display("no rd_valid"); end
        if (rd_data !== pat(a, salt)) begin
          failures++; $display("addr %0d: %h exp %h", a, rd_data, pat(a, salt));
        end
      end
      @(negedge clk);
      checks++;
      if (rd_valid) begin failures++; $display("rd_valid without rd_en"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
