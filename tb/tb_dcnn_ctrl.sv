// tb_dcnn_ctrl: drives the inference sequencer with a behavioural datapath
// that answers every load and every layer run after a random delay. For
// several configurations (which layers are streamed, conv1 group size) the
// sequence of loads (target, word count, end-of-stream mark) and layer runs
// (step, conv1 filter base and count) is compared with the expected one,
// then the 10 scores must come out on the output stream in order with tlast
// on the last, and ap_done / ap_idle / cycles must behave.
module tb_dcnn_ctrl;
  import dcnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ap_start = 1'b0, ap_done, ap_idle;
  logic [3:0] dyn_mask = 4'hF;
  logic [7:0] c1_group = 8'd4;
  logic [31:0] cycles;
  logic ld_start, ld_expect_last, ld_clear_err, ld_done = 1'b0;
  logic [15:0] ld_count;
  logic [3:0] ld_target, o_raddr;
  logic [8:0] run_start, layer_done = '0;
  logic [7:0] c1_base, c1_cnt;
  data_t o_rdata;
  word_t m_tdata;
  logic m_tvalid, m_tready = 1'b0, m_tlast;
  int checks = 0, failures = 0;

  dcnn_ctrl #(.C1_SLOT(4)) dut (.clk, .rst_n, .ap_start, .ap_done, .ap_idle, .dyn_mask, .c1_group, .cycles,
    .ld_start, .ld_count, .ld_target, .ld_expect_last, .ld_clear_err, .ld_done,
    .run_start, .layer_done, .c1_base, .c1_cnt, .o_raddr, .o_rdata,
    .m_tdata, .m_tvalid, .m_tready, .m_tlast);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural datapath
  string ev[$];
  int scores[10];
  always @(posedge clk) o_rdata <= data_t'(scores[o_raddr]);

  always @(posedge clk) begin
    if (rst_n && ld_start) begin
      ev.push_back($sformatf("L%0d:%0d:%0d", ld_target, ld_count, ld_expect_last));
      fork begin
        repeat (1 + $urandom % 20) @(posedge clk);
        ld_done <= 1'b1;
        @(posedge clk);
        ld_done <= 1'b0;
      end join_none
    end
    for (int s = 0; s < 9; s++)
      if (rst_n && run_start[s]) begin
        automatic int ss = s;
        ev.push_back((s == 1) ? $sformatf("R1:%0d:%0d", c1_base, c1_cnt) : $sformatf("R%0d", s));
        fork begin
          repeat (1 + $urandom % 20) @(posedge clk);
          layer_done[ss] <= 1'b1;
          @(posedge clk);
          layer_done[ss] <= 1'b0;
        end join_none
      end
  end

  int got[$];
  bit got_last[$];
  always @(posedge clk) begin
    m_tready <= ($urandom % 2) == 0;
    if (rst_n && m_tvalid && m_tready) begin
      got.push_back(int'(m_tdata));
      got_last.push_back(m_tlast);
    end
  end

  task automatic run(input logic [3:0] mask, input int group);
    string ex[$];
    int g, base, cnt, last_blk;
    g = (group < 1) ? 1 : (group > 4) ? 4 : group;
    // which block ends the stream
    last_blk = mask[3] ? 7 : mask[2] ? 6 : mask[1] ? 5 : mask[0] ? 3 : 1;
    ex.push_back("L0:784:0");
    base = 0;
    while (base < 6) begin
      cnt = (g < 6 - base) ? g : 6 - base;
      ex.push_back($sformatf("L1:%0d:%0d", cnt * 26, (last_blk == 1 && base + cnt == 6)));
      ex.push_back($sformatf("R1:%0d:%0d", base, cnt));
      base += cnt;
    end
    ex.push_back("R2");
    if (mask[0]) ex.push_back($sformatf("L3:2416:%0d", last_blk == 3));
    ex.push_back("R3");
    ex.push_back("R4");
    if (mask[1]) ex.push_back($sformatf("L5:30840:%0d", last_blk == 5));
    ex.push_back("R5");
    if (mask[2]) ex.push_back($sformatf("L6:10164:%0d", last_blk == 6));
    ex.push_back("R6");
    if (mask[3]) ex.push_back($sformatf("L7:850:%0d", last_blk == 7));
    ex.push_back("R7");

    for (int i = 0; i < 10; i++) scores[i] = int'($urandom % 60000) - 30000;
    ev.delete(); got.delete(); got_last.delete();
    @(negedge clk);
    dyn_mask = mask; c1_group = 8'(group); ap_start = 1'b1;
    @(negedge clk); ap_start = 1'b0;
    chk(!ap_idle, "idle after start");
    while (!ap_done) @(posedge clk);
    @(negedge clk);
    chk(ap_idle, "not idle after done");
    chk(ev.size() == ex.size(), $sformatf("mask %h group %0d: %0d events, expected %0d", mask, group, ev.size(), ex.size()));
    for (int i = 0; i < ex.size() && i < ev.size(); i++)
      chk(ev[i] == ex[i], $sformatf("mask %h group %0d event %0d: %s expected %s", mask, group, i, ev[i], ex[i]));
    chk(got.size() == 10, $sformatf("%0d scores out", got.size()));
    for (int i = 0; i < 10 && i < got.size(); i++) begin
      chk(got[i] == scores[i], $sformatf("score %0d: %0d expected %0d", i, got[i], scores[i]));
      chk(got_last[i] == (i == 9), $sformatf("tlast on score %0d", i));
    end
    chk(cycles > 32'(2 * ex.size()), $sformatf("cycles %0d", cycles));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    run(4'hF, 4);
    run(4'h1, 4);
    run(4'h0, 6);
    run(4'h5, 1);
    run(4'hA, 3);
    run(4'h0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
