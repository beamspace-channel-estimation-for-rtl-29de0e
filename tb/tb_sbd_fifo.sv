// tb_sbd_fifo: random writes and reads against a queue model, including
// filling the FIFO to its depth and writing while full with a read in the
// same cycle; checks read data, the one-cycle read latency and the count.
module tb_sbd_fifo;
  localparam int unsigned DEPTH = 21;
  localparam int unsigned W     = 20;

  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, rd_valid;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  int n_full = 0, n_full_rw = 0;
  logic [W-1:0] q [$];

  always #5 clk = ~clk;

  sbd_fifo #(.DEPTH(DEPTH), .W(W)) dut (.clk, .rst_n, .wr_en, .wr_data, .rd_en, .rd_valid, .rd_data, .count);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [W-1:0] exp_d;
    bit exp_v;
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int phase;
      phase = (i / 200) % 3;   // 0: fill-biased, 1: drain-biased, 2: balanced
      @(negedge clk);
      rd_en   = (q.size() > 0) && ($urandom_range(0, 9) < (phase == 0 ? 2 : phase == 1 ? 8 : 5));
      wr_en   = ((q.size() < DEPTH) || rd_en) && ($urandom_range(0, 9) < (phase == 0 ? 9 : phase == 1 ? 2 : 5));
      wr_data = W'($urandom);
      if (q.size() == DEPTH) n_full++;
      if (q.size() == DEPTH && rd_en && wr_en) n_full_rw++;
      exp_v = rd_en;
      if (rd_en) exp_d = q.pop_front();
      if (wr_en) q.push_back(wr_data);
      @(posedge clk);
      #1;
      check(rd_valid == exp_v, "rd_valid one cycle after rd_en");
      if (exp_v) check(rd_data == exp_d, $sformatf("read %h expected %h", rd_data, exp_d));
      check(int'(count) == q.size(), $sformatf("count %0d expected %0d", count, q.size()));
    end
    @(negedge clk); wr_en = 0; rd_en = 0;
    check(n_full > 0 && n_full_rw > 0, "full FIFO and write-while-full-with-read covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
