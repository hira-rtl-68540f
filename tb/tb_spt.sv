// tb_spt: programs the Subarray Pairs Table with a symmetric pattern (subarrays i and j pair
// when i != j and (i + j) is a multiple of 3, about a third of all pairs) and reads every
// entry back on both ports; also checks the table is empty after reset.
module tb_spt;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en;
  logic [6:0] wr_sa;
  logic [127:0] wr_vec;
  logic [6:0] rd_sa [2];
  logic [127:0] rd_vec [2];

  spt dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic logic [127:0] pat(input int i);
    logic [127:0] v;
    for (int j = 0; j < 128; j++) v[j] = (i != j) && ((i + j) % 3 == 0);
    return v;
  endfunction

  initial begin
    wr_en = 0; wr_sa = 0; wr_vec = 0; rd_sa[0] = 0; rd_sa[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 128; i += 17) begin
      @(negedge clk); rd_sa[0] = 7'(i); #0;
      check(rd_vec[0] == '0, "empty after reset");
    end
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); wr_en = 1; wr_sa = 7'(i); wr_vec = pat(i);
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); rd_sa[0] = 7'(i); rd_sa[1] = 7'(127 - i); #0;
      check(rd_vec[0] == pat(i), "port 0 readback");
      check(rd_vec[1] == pat(127 - i), "port 1 readback");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
