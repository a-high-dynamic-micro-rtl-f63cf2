// tb_frame_integrator -- self-checking test of the image integration
//   Image[i,j] = sum_k ((x(k,j) - Dark(j)) * Norm(j)) >>> 14
// at reduced size (4 ASICs x 4 strips, 4 frames). Random dark and gain
// tables are loaded, random samples are fed slot by slot as the JAMEX timing
// would, and every image word written is compared with a reference computed
// here with 64-bit integers. Also checked: the vector read-back of the last
// frame, the output latency, the saturation flag (a long frame of extreme
// values) and the overrun flag (strobes closer than N_CHIPS clocks).
module tb_frame_integrator;
  import saxs_pkg::*;
  localparam int N_CHIPS = 4, N_MUX = 4, N_FRAMES = 4, SLOT = 5;
  localparam int N_PIX = N_CHIPS * N_MUX, PW = 4, MW = 2, IAW = 6;
  logic clk = 0, rst_n = 0;
  logic sample_strobe = 0; logic [MW-1:0] sample_ch = 0;
  logic [13:0] adc_data [N_CHIPS];
  cyc_info_t cyc = '0;
  logic dark_we = 0, norm_we = 0; logic [PW-1:0] dark_addr = 0, norm_addr = 0;
  logic [13:0] dark_data = 0; logic [15:0] norm_data = 0;
  logic img_we; logic [IAW-1:0] img_addr; logic [31:0] img_data;
  logic frame_done; logic [15:0] done_frame;
  logic vec_rd_en = 0; logic [PW-1:0] vec_rd_addr = 0; logic [31:0] vec_rd_data;
  logic err_sat, err_overrun, busy;
  int checks = 0, failures = 0;

  frame_integrator #(.N_CHIPS(N_CHIPS), .N_MUX(N_MUX), .N_FRAMES(N_FRAMES)) dut (.*);
  always #5 clk = ~clk;

  longint dark [N_PIX], norm [N_PIX], acc [N_PIX];
  longint exp_img [N_FRAMES * N_PIX];
  logic [31:0] got_img [N_FRAMES * N_PIX];
  bit    got_valid [N_FRAMES * N_PIX];
  int n_sat = 0, n_over = 0, n_done = 0, n_img = 0;
  longint t_now = 0, t_last_strobe = 0, max_lat = 0;

  always @(posedge clk) if (rst_n) begin
    t_now++;
    if (img_we) begin
      got_img[img_addr] = img_data; got_valid[img_addr] = 1; n_img++;
      if (t_now - t_last_strobe > max_lat) max_lat = t_now - t_last_strobe;
    end
    n_sat  += int'(err_sat);
    n_over += int'(err_overrun);
    n_done += int'(frame_done);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic longint sat32(input longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  // one JAMEX cycle: N_MUX slots of SLOT clocks, strobe on the last clock
  task automatic do_cycle(input int f, input bit first, input bit last, input int mode);
    cyc.active = 1; cyc.first = first; cyc.last = last; cyc.frame = 16'(f);
    for (int ch = 0; ch < N_MUX; ch++) begin
      for (int c = 0; c < N_CHIPS; c++) begin
        int j; longint term;
        adc_data[c] = (mode == 1) ? 14'd0 : 14'($urandom);
        j = c * N_MUX + ch;
        term = ((longint'(adc_data[c]) - dark[j]) * norm[j]) >>> 14;
        acc[j] = first ? sat32(term) : sat32(acc[j] + term);
        if (last) exp_img[f * N_PIX + j] = acc[j];
      end
      repeat (SLOT - 1) @(negedge clk);
      sample_ch = MW'(ch); sample_strobe = 1;
      @(negedge clk); sample_strobe = 0;
      t_last_strobe = t_now;
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tfc [N_FRAMES];
    for (int c = 0; c < N_CHIPS; c++) adc_data[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // correction tables
    for (int j = 0; j < N_PIX; j++) begin
      dark[j] = $urandom_range(0, 3000); norm[j] = $urandom_range(8192, 32768);
      @(negedge clk);
      dark_we = 1; dark_addr = PW'(j); dark_data = 14'(dark[j]);
      norm_we = 1; norm_addr = PW'(j); norm_data = 16'(norm[j]);
    end
    @(negedge clk); dark_we = 0; norm_we = 0;
    // four frames of 3, 1, 5, 2 cycles
    tfc = '{3, 1, 5, 2};
    for (int f = 0; f < N_FRAMES; f++)
      for (int k = 0; k < tfc[f]; k++) do_cycle(f, k == 0, k == tfc[f] - 1, 0);
    cyc.active = 0;
    repeat (N_CHIPS + 5) @(negedge clk);
    for (int a = 0; a < N_FRAMES * N_PIX; a++)
      check(got_valid[a] && got_img[a] == 32'(exp_img[a]),
            $sformatf("Image[%0d,%0d] = %0d expected %0d", a / N_PIX, a % N_PIX,
                      $signed(got_img[a]), exp_img[a]));
    check(n_img == N_FRAMES * N_PIX, $sformatf("%0d image writes", n_img));
    check(n_done == N_FRAMES, $sformatf("one frame_done per frame (%0d)", n_done));
    check(max_lat <= N_CHIPS + 3, $sformatf("latency %0d clocks", max_lat));
    check(n_sat == 0 && n_over == 0, $sformatf("no saturation or overrun in normal data (%0d %0d)", n_sat, n_over));
    // GET VECTOR: last completed frame
    for (int j = 0; j < N_PIX; j++) begin
      vec_rd_en = 1; vec_rd_addr = PW'(j); @(negedge clk); vec_rd_en = 0;
      check(vec_rd_data == 32'(exp_img[(N_FRAMES - 1) * N_PIX + j]), $sformatf("vector[%0d]", j));
    end
    // saturation: dark = max, sample = 0, max gain, long frame
    for (int j = 0; j < N_PIX; j++) begin
      dark[j] = 16383; norm[j] = 65535;
      dark_we = 1; dark_addr = PW'(j); dark_data = 14'(dark[j]);
      norm_we = 1; norm_addr = PW'(j); norm_data = 16'(norm[j]);
      @(negedge clk);
    end
    dark_we = 0; norm_we = 0;
    for (int k = 0; k < 32800; k++) do_cycle(0, k == 0, k == 32799, 1);
    cyc.active = 0;
    repeat (N_CHIPS + 5) @(negedge clk);
    check(n_sat > 0, "saturation flagged");
    for (int j = 0; j < N_PIX; j++)
      check(got_img[j] == 32'h8000_0000, $sformatf("pixel %0d saturated to the minimum", j));
    // overrun: two strobes N_CHIPS-2 clocks apart
    cyc.active = 1; cyc.first = 1; cyc.last = 0;
    sample_strobe = 1; @(negedge clk); sample_strobe = 0;
    repeat (N_CHIPS - 3) @(negedge clk);
    sample_strobe = 1; @(negedge clk); sample_strobe = 0; cyc.active = 0;
    repeat (3) @(negedge clk);
    check(n_over == 1, $sformatf("overrun flagged (%0d)", n_over));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
