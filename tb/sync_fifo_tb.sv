// sync_fifo_tb: random push/pop traffic against a queue model; checks the
// head value, empty, full and count every cycle, including runs to full.
module sync_fifo_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int W = 16, D = 15;
  logic rst_n, push, pop, empty, full;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%0t %s", $time, what); end
  endtask

  initial begin
    int fulls = 0;
    rst_n = 0; push = 0; pop = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      int bias;
      bias = (it / 500) % 2;  // alternate filling and draining phases
      @(negedge clk);
      chk(empty == (model.size() == 0), "empty");
      chk(full == (model.size() == D), "full");
      chk(int'(count) == model.size(), "count");
      if (model.size() > 0) chk(rd_data == model[0], "head");
      if (full) fulls++;
      push = !full && ($urandom_range(3) < (bias ? 3 : 1));
      pop  = !empty && ($urandom_range(3) < (bias ? 1 : 3));
      wr_data = W'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(wr_data);
    end
    chk(fulls > 0, "never reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
