// Self-checking testbench for spi_master.
//
// Two instances are exercised: one at the default 16-bit word and divide-by-4
// clock, one with an 8-bit word and divide-by-1 clock. A behavioural mode-0
// slave returns a random word for every transfer. For each word the bench
// checks the word the slave received, the word returned on rsp_data, the
// number of SCLK edges, the SCLK half period, the idle level of SCLK around
// the chip-select period, and the cycle counts from acceptance to rsp_valid
// ((2*W+1)*DIV) and between back-to-back acceptances ((2*W+2)*DIV).
module tb_spi_master;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL at cycle %0d: %s", cyc, what);
    end
  endtask

  // ---------------- instance A: defaults ----------------
  localparam int WA = 16, DA = 4;
  logic          a_valid = 0, a_ready, a_rsp_valid;
  logic [WA-1:0] a_data = '0, a_rsp, a_slv_tx = '0, a_slv_rx;
  logic          a_sclk, a_cs_n, a_mosi, a_miso;
  int            a_bits, a_words;

  spi_master dut_a (
    .clk, .rst_n, .cmd_valid(a_valid), .cmd_ready(a_ready), .cmd_data(a_data),
    .rsp_valid(a_rsp_valid), .rsp_data(a_rsp),
    .spi_sclk(a_sclk), .spi_cs_n(a_cs_n), .spi_mosi(a_mosi), .spi_miso(a_miso)
  );
  spi_slave_model #(.WORD_W(WA)) slv_a (
    .sclk(a_sclk), .cs_n(a_cs_n), .mosi(a_mosi), .miso(a_miso),
    .tx_word(a_slv_tx), .rx_word(a_slv_rx), .bits(a_bits), .words(a_words)
  );

  // ---------------- instance B: 8-bit word, divide by 1 ----------------
  localparam int WB = 8, DB = 1;
  logic          b_valid = 0, b_ready, b_rsp_valid;
  logic [WB-1:0] b_data = '0, b_rsp, b_slv_tx = '0, b_slv_rx;
  logic          b_sclk, b_cs_n, b_mosi, b_miso;
  int            b_bits, b_words;

  spi_master #(.WORD_W(WB), .CLK_DIV(DB)) dut_b (
    .clk, .rst_n, .cmd_valid(b_valid), .cmd_ready(b_ready), .cmd_data(b_data),
    .rsp_valid(b_rsp_valid), .rsp_data(b_rsp),
    .spi_sclk(b_sclk), .spi_cs_n(b_cs_n), .spi_mosi(b_mosi), .spi_miso(b_miso)
  );
  spi_slave_model #(.WORD_W(WB)) slv_b (
    .sclk(b_sclk), .cs_n(b_cs_n), .mosi(b_mosi), .miso(b_miso),
    .tx_word(b_slv_tx), .rx_word(b_slv_rx), .bits(b_bits), .words(b_words)
  );

  // SCLK half period and idle level checks (instance A).
  int a_last_edge = -1;
  always @(a_sclk) if (rst_n) begin
    if (a_last_edge >= 0 && !a_cs_n)
      check(cyc - a_last_edge == DA || a_last_edge < 0, "A: SCLK half period");
    a_last_edge = cyc;
  end
  always @(negedge a_cs_n) begin
    check(a_sclk == 1'b0, "A: SCLK low when chip select falls");
    a_last_edge = -1;
  end
  always @(posedge a_cs_n) if (rst_n) check(a_sclk == 1'b0, "A: SCLK low when chip select rises");

  // Send n random words through instance A back to back.
  task automatic run_a(input int n);
    int t_acc, t_prev, words0;
    logic [WA-1:0] w, r;
    t_prev = -1;
    words0 = a_words;
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      w = WA'($urandom);
      r = WA'($urandom);
      a_data = w; a_valid = 1; a_slv_tx = r;
      // Hold the word until it is taken.
      while (!a_ready) @(negedge clk);
      t_acc = cyc + 1;   // accepted on the next rising edge
      @(negedge clk);
      a_valid = 0;
      a_data = WA'($urandom);  // may change once accepted
      if (t_prev >= 0)
        check(t_acc - t_prev == (2*WA+2)*DA,
              $sformatf("A: word-to-word %0d cycles, expected %0d", t_acc - t_prev, (2*WA+2)*DA));
      t_prev = t_acc;
      while (!a_rsp_valid) @(negedge clk);
      check(cyc - t_acc == (2*WA+1)*DA,
            $sformatf("A: accept to response %0d cycles, expected %0d", cyc - t_acc, (2*WA+1)*DA));
      check(a_rsp == r, $sformatf("A: read back %h expected %h", a_rsp, r));
      check(a_slv_rx == w, $sformatf("A: slave got %h expected %h", a_slv_rx, w));
      check(a_bits == WA, $sformatf("A: %0d SCLK edges", a_bits));
    end
    check(a_words - words0 == n, "A: number of chip-select periods");
  endtask

  task automatic run_b(input int n);
    int t_acc, t_prev, words0;
    logic [WB-1:0] w, r;
    t_prev = -1;
    words0 = b_words;
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      w = WB'($urandom);
      r = WB'($urandom);
      b_data = w; b_valid = 1; b_slv_tx = r;
      while (!b_ready) @(negedge clk);
      t_acc = cyc + 1;   // accepted on the next rising edge
      @(negedge clk);
      b_valid = 0;
      if (t_prev >= 0)
        check(t_acc - t_prev == (2*WB+2)*DB, "B: word-to-word cycles");
      t_prev = t_acc;
      while (!b_rsp_valid) @(negedge clk);
      check(cyc - t_acc == (2*WB+1)*DB,
            $sformatf("B: accept to response %0d cycles, expected %0d", cyc - t_acc, (2*WB+1)*DB));
      check(b_rsp == r, $sformatf("B: read back %h expected %h", b_rsp, r));
      check(b_slv_rx == w, $sformatf("B: slave got %h expected %h", b_slv_rx, w));
      check(b_bits == WB, "B: SCLK edges");
    end
    check(b_words - words0 == n, "B: number of chip-select periods");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    check(a_cs_n && b_cs_n && !a_sclk && !b_sclk && a_ready && b_ready, "idle after reset");
    fork
      run_a(40);
      run_b(40);
    join
    repeat (10) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
