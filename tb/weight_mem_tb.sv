// weight_mem_tb: writes every word of the full 9135-entry parameter memory,
// reads all back in parallel, then overwrites a random subset, checks that
// out-of-range writes and writes with wr_en low change nothing.
module weight_mem_tb;
  import tf_pkg::*;

  localparam int DEPTH = 9135;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en;
  logic [$clog2(DEPTH)-1:0] wr_addr;
  data_t wr_data;
  data_t q [DEPTH];
  int model [DEPTH];

  weight_mem #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all(input string tag);
    for (int i = 0; i < DEPTH; i++) begin
      checks++;
      if (int'(q[i]) != model[i]) begin
        failures++;
        if (failures < 10) $display("%s: word %0d got %0d exp %0d", tag, i, q[i], model[i]);
      end
    end
  endtask

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 14'(i); wr_data = data_t'($urandom);
      model[i] = int'(wr_data);
    end
    @(negedge clk); wr_en = 0;
    compare_all("fill");
    for (int k = 0; k < 3000; k++) begin
      int a;
      @(negedge clk);
      a = $urandom_range(16383);
      wr_addr = 14'(a); wr_data = data_t'($urandom); wr_en = $urandom_range(1);
      if (wr_en && a < DEPTH) model[a] = int'(wr_data);
    end
    @(negedge clk); wr_en = 0;
    compare_all("update");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
