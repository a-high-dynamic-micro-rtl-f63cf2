// tb_ram_1r1w -- self-checking test of the one-write one-read RAM: random
// writes and reads against a reference array, one-clock read latency, read
// data held while rd_en is low, and read-during-write returning old data.
module tb_ram_1r1w;
  localparam int DEPTH = 64, WIDTH = 32;
  logic clk = 0, we = 0, rd_en = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [WIDTH-1:0] wdata = 0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  ram_1r1w #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp_q;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 6'(a); wdata = $urandom; ref_mem[a] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    // random traffic
    for (int n = 0; n < 2000; n++) begin
      we = 1'($urandom); waddr = 6'($urandom); wdata = $urandom;
      rd_en = 1'($urandom_range(0, 3) != 0);
      raddr = ($urandom_range(0, 4) == 0) ? waddr : 6'($urandom);
      exp_q = rdata;
      if (rd_en) exp_q = ref_mem[raddr];      // old data on collision
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
      checks++;
      if (rdata !== exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d: got %h expected %h", raddr, rdata, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
