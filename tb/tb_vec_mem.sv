// tb_vec_mem -- checks the 64-lane vector memory: masked lane writes,
// whole-row writes, the one-cycle read latency and read-before-write in
// the same cycle, against a shadow array kept by the testbench.
module tb_vec_mem;
  localparam int LANES = 8, DEPTH = 16;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [3:0] raddr, waddr;
  logic [LANES-1:0][31:0] rdata, wdata;
  logic we;
  logic [LANES-1:0] wmask;
  logic [31:0] shadow [DEPTH][LANES];

  vec_mem #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  initial begin
    we = 0; raddr = 0; waddr = 0; wmask = '0; wdata = '0;
    // fill every row
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk);
      we = 1; waddr = 4'(r); wmask = '1;
      for (int l = 0; l < LANES; l++) begin
        wdata[l] = $urandom;
        shadow[r][l] = wdata[l];
      end
    end
    // random masked writes and reads
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = 1'($urandom);
      waddr = 4'($urandom);
      wmask = LANES'($urandom);
      for (int l = 0; l < LANES; l++) wdata[l] = $urandom;
      raddr = ($urandom % 4 == 0) ? waddr : 4'($urandom);
      begin
        logic [31:0] exp [LANES];
        for (int l = 0; l < LANES; l++) exp[l] = shadow[raddr][l];
        if (we) for (int l = 0; l < LANES; l++) if (wmask[l]) shadow[waddr][l] = wdata[l];
        @(posedge clk); #1;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (rdata[l] !== exp[l]) begin
            failures++;
            if (failures < 5) $display("FAIL row %0d lane %0d got %h exp %h", raddr, l, rdata[l], exp[l]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
