// tb_matching_lut -- self-checking test of the matching LUT: random writes,
// then reads of written and unwritten addresses; checks the contents and the
// one-clock read latency.
module tb_matching_lut;
  import emtrig_pkg::*;
  localparam int AW = POS_LUT_AW, DW = PT_W;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [DW-1:0] rd_data, wr_data = '0;
  logic wr_en = 1'b0;
  int checks = 0, failures = 0;

  matching_lut #(.AW(AW), .DW(DW)) dut (.*);

  logic [DW-1:0] model [int];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < 500; i++) begin
      wr_en = 1'b1; wr_addr = AW'($urandom); wr_data = DW'($urandom);
      model[int'(wr_addr)] = wr_data;
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int i = 0; i < 1000; i++) begin
      logic [DW-1:0] exp;
      rd_addr = (i % 2 == 0) ? AW'($urandom) : AW'(i * 37);
      if (i % 3 == 0) begin  // pick a written address
        int k; void'(model.first(k));
        repeat ($urandom % 20) void'(model.next(k));
        rd_addr = AW'(k);
      end
      exp = model.exists(int'(rd_addr)) ? model[int'(rd_addr)] : '0;
      @(posedge clk);
      #0.1;
      checks++;
      if (rd_data !== exp) begin
        failures++;
        if (failures < 10) $display("read %h: got %h exp %h", rd_addr, rd_data, exp);
      end
      @(negedge clk);
    end
    // read-during-write returns the old word; next read the new one
    wr_en = 1'b1; wr_addr = 'h123; wr_data = 4'h5; rd_addr = 'h123;
    begin
      logic [DW-1:0] old;
      old = model.exists('h123) ? model['h123] : '0;
      @(posedge clk); #0.1;
      checks++; if (rd_data !== old) failures++;
    end
    @(negedge clk); wr_en = 1'b0;
    @(posedge clk); #0.1;
    checks++; if (rd_data !== 4'h5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
