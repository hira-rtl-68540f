// tb_refptr_table: drives lookups with random subarray masks and advances the returned
// subarray (as the refresh finder does), comparing against a reference model: least-advanced
// allowed subarray, row address, done flags, and the restart of a bank's window once every
// subarray has been refreshed. Also checks that over each window every row of a bank is
// handed out exactly once.
module tb_refptr_table;
  localparam int NB = 2, NS = 8, RPS = 4, PW = 10;
  localparam int SW = 3, RW = 5;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [0:0]    q_bank;
  logic [NS-1:0] q_mask;
  logic          q_found;
  logic [SW-1:0] q_sa;
  logic [RW-1:0] q_row;
  logic [1:0]    adv_valid;
  logic [0:0]    adv_bank [2];
  logic [SW-1:0] adv_sa   [2];
  logic [1:0]    windows_done;

  refptr_table #(.NUM_BANKS(NB), .NUM_SA(NS), .ROWS_PER_SA(RPS), .PTR_W(PW)) dut (.*);

  int m_ptr [NB][NS];
  bit m_done [NB][NS];
  int m_win;
  int seen [NB][NS*RPS];

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    q_bank = 0; q_mask = '1; adv_valid = 0; adv_bank[0] = 0; adv_bank[1] = 0; adv_sa[0] = 0; adv_sa[1] = 0;
    m_win = 0;
    for (int b = 0; b < NB; b++) for (int s = 0; s < NS; s++) begin m_ptr[b][s] = 0; m_done[b][s] = 0; end
    for (int b = 0; b < NB; b++) for (int r = 0; r < NS*RPS; r++) seen[b][r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      q_bank = 1'($urandom_range(0, 1));
      q_mask = ($urandom_range(0, 3) == 0) ? '1 : NS'($urandom);
      adv_valid = 0;
      #0;
      begin
        int bs, bp;
        bs = -1; bp = 0;
        for (int s = 0; s < NS; s++)
          if (q_mask[s] && !m_done[q_bank][s] && (bs < 0 || m_ptr[q_bank][s] < bp)) begin bs = s; bp = m_ptr[q_bank][s]; end
        check(q_found == (bs >= 0), "found");
        if (bs >= 0) begin
          check(int'(q_sa) == bs, $sformatf("sa %0d vs %0d", q_sa, bs));
          check(int'(q_row) == bs * RPS + bp, "row");
          // use it, as the finder would, most of the time
          if ($urandom_range(0, 3) != 0) begin
            adv_valid[0] = 1; adv_bank[0] = q_bank; adv_sa[0] = q_sa;
            seen[q_bank][bs * RPS + bp]++;
            check(seen[q_bank][bs * RPS + bp] == 1, "row handed out twice in a window");
            m_ptr[q_bank][bs] = (bp == RPS - 1) ? 0 : bp + 1;
            if (bp == RPS - 1) m_done[q_bank][bs] = 1;
            begin
              bit all;
              all = 1;
              for (int s = 0; s < NS; s++) all &= m_done[q_bank][s];
              if (all) begin
                for (int s = 0; s < NS; s++) m_done[q_bank][s] = 0;
                for (int r = 0; r < NS*RPS; r++) begin
                  check(seen[q_bank][r] == 1, "row skipped in a window");
                  seen[q_bank][r] = 0;
                end
                m_win++;
              end
            end
          end
        end
      end
      @(posedge clk);
    end
    @(negedge clk);
    check(int'(windows_done) == (m_win % 4), "windows_done");
    check(m_win >= 4, "too few windows completed");
    $display("windows completed: %0d", m_win);
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
