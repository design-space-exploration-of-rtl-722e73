// tb_addr_shift_reg: fills the address shift register with random addresses,
// shifts them out and compares with a queue; also mixes pushes and shifts in the
// same cycle, and checks clear.
module tb_addr_shift_reg;
  localparam int DEPTH = 50, AW = 10;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, shift = 0;
  logic [AW-1:0] push_addr = '0, head;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [AW-1:0] q[$];

  addr_shift_reg #(.DEPTH(DEPTH), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  task automatic cmp();
    checks++;
    if (int'(count) != q.size() || (q.size() > 0 && head != q[0])) begin
      failures++;
      $display("FAIL count=%0d exp=%0d head=%0d exp=%0d", count, q.size(), head,
               q.size() ? q[0] : 0);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      // fill
      int n;
      n = $urandom_range(DEPTH, 0);
      for (int i = 0; i < n; i++) begin
        @(negedge clk); push = 1; push_addr = AW'($urandom); shift = 0;
        @(posedge clk); q.push_back(push_addr);
        @(negedge clk); push = 0; cmp();
      end
      // drain, sometimes pushing at the same time
      while (q.size() > 0) begin
        @(negedge clk);
        shift = 1;
        push  = ($urandom_range(3, 0) == 0);
        push_addr = AW'($urandom);
        @(posedge clk);
        void'(q.pop_front());
        if (push) q.push_back(push_addr);
        @(negedge clk); shift = 0; push = 0; cmp();
      end
      // clear
      @(negedge clk); push = 1; push_addr = 5;
      @(negedge clk); push = 0; clear = 1;
      @(negedge clk); clear = 0; cmp();
    end
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
