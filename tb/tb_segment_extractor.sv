// tb_segment_extractor -- fills the pattern-list memory with a known function
// of the address, then reads two addresses per tick and checks both segments
// and their valid/first tags one clock later.
module tb_segment_extractor;
  import emtrig_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b1, rst = 1'b1;
  always #1 clk = ~clk;
  logic [RAM_AW-1:0] addr_in [2];
  logic [1:0]        addr_vld = '0;
  logic              first = 1'b0;
  segment_t          seg_out [2];
  logic [1:0]        seg_vld;
  logic              seg_first;
  logic              cfg_we = 1'b0;
  logic [RAM_AW-1:0] cfg_addr = '0;
  segment_t          cfg_data = '0;
  int checks = 0, failures = 0;

  segment_extractor dut (.*);

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_in[0] = '0; addr_in[1] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int a = 0; a < 2**RAM_AW; a++) begin
      cfg_we = 1'b1; cfg_addr = RAM_AW'(a); cfg_data = seg_f(0, 0, a);
      @(negedge clk);
    end
    cfg_we = 1'b0;
    for (int i = 0; i < 5000; i++) begin
      logic [RAM_AW-1:0] a0, a1;
      logic [1:0] v;
      logic f;
      a0 = RAM_AW'($urandom); a1 = RAM_AW'($urandom);
      v = 2'($urandom); f = ($urandom % 4 == 0);
      addr_in[0] = a0; addr_in[1] = a1; addr_vld = v; first = f;
      @(negedge clk);
      checks++;
      if (seg_out[0] !== seg_f(0, 0, a0) || seg_out[1] !== seg_f(0, 0, a1) ||
          seg_vld !== v || seg_first !== f) begin
        failures++;
        if (failures < 10) $display("addr %h %h: got %h %h exp %h %h", a0, a1, seg_out[0], seg_out[1],
                                    seg_f(0, 0, a0), seg_f(0, 0, a1));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
