// tb_mem_unit: a memory block shared by three neural units (regions of 40
// words). Fills it through the load port, then issues random read requests from
// the three units and checks against a model: at most one grant per cycle, the
// lowest-numbered requesting unit wins, nothing is granted during a load write,
// every granted read returns its unit's word one cycle later and rd_data holds
// it while no read is made.
module tb_mem_unit;
  localparam int UD = 40, P = 3, LAW = $clog2(UD), AW = $clog2(P * UD);
  logic clk = 0, wr_en = 0;
  logic [P-1:0] rd_req = '0, rd_gnt;
  logic [LAW-1:0] rd_addr [P];
  logic [AW-1:0] wr_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  logic [31:0] model [P*UD];
  int checks = 0, failures = 0, conflicts = 0;

  mem_unit #(.UNIT_DEPTH(UD), .PORTS(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int p = 0; p < P; p++) rd_addr[p] = '0;
    for (int i = 0; i < P * UD; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = $urandom; model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 3000; t++) begin
      logic [P-1:0] exp_gnt;
      int winner;
      logic [31:0] exp_data;
      @(negedge clk);
      rd_req = P'($urandom);
      for (int p = 0; p < P; p++) rd_addr[p] = LAW'($urandom_range(UD - 1, 0));
      wr_en = ($urandom_range(9, 0) == 0);
      if (wr_en) begin
        wr_addr = AW'($urandom_range(P * UD - 1, 0)); wr_data = $urandom;
      end
      winner = -1;
      if (!wr_en) for (int p = P - 1; p >= 0; p--) if (rd_req[p]) winner = p;
      exp_gnt = (winner < 0) ? '0 : P'(1) << winner;
      #1;
      checks++;
      if (rd_gnt !== exp_gnt) begin
        failures++; $display("FAIL req=%b wr=%0b gnt=%b exp=%b", rd_req, wr_en, rd_gnt, exp_gnt);
      end
      if ($countones(rd_req) > 1) conflicts++;
      if (winner >= 0) exp_data = model[winner * UD + int'(rd_addr[winner])];
      if (wr_en) model[wr_addr] = wr_data;
      if (winner >= 0) begin
        @(negedge clk);
        rd_req = '0; wr_en = 0;
        checks++;
        if (rd_data !== exp_data) begin
          failures++; $display("FAIL unit %0d read %h exp %h", winner, rd_data, exp_data);
        end
        @(negedge clk);
        checks++;
        if (rd_data !== exp_data) begin failures++; $display("FAIL hold %h exp %h", rd_data, exp_data); end
      end
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no competing requests"); end
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
