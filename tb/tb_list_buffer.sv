// tb_list_buffer -- appends more entries than the buffer holds, checks count,
// overflow counting and every entry read back by index, then clear.
module tb_list_buffer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DEPTH = 16;
  logic               clear, wr_en;
  logic [31:0]        wr_data, rd_data;
  logic [3:0]         rd_idx;
  logic [4:0]         count;
  logic [15:0]        n_overflow;

  list_buffer #(.T(logic [31:0]), .DEPTH(DEPTH)) dut (.*);

  logic [31:0] model [$];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    clear = 1'b0; wr_en = 1'b0; wr_data = '0; rd_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 3; round++) begin
      automatic int n = (round == 1) ? DEPTH + 5 : 7 + round;
      model.delete();
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        wr_en   = 1'b1;
        wr_data = $urandom;
        if (model.size() < DEPTH) model.push_back(wr_data);
      end
      @(negedge clk);
      wr_en = 1'b0;
      chk(int'(count) == model.size(), $sformatf("count %0d expected %0d", count, model.size()));
      chk(int'(n_overflow) == n - model.size(), "overflow count");
      foreach (model[i]) begin
        rd_idx = 4'(i);
        #1;
        chk(rd_data == model[i], "read back");
      end
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      chk(count == 0 && n_overflow == 0, "clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
