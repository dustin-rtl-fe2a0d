// tb_event_unit: self-checking test of the barrier and clock gating.
//
// Cores arrive at the barrier one by one at random cycles. Checked: a core's
// clock enable drops in the cycle after it arrives; no event fires before the
// last core of the mask arrives; the event fires in the cycle after the last
// arrival; all clock enables return exactly two cycles after the event; a
// reduced barrier mask makes the event wait only for the masked cores.
module tb_event_unit;
  localparam int N = 16;

  logic clk, rst_n;
  initial begin
    clk = 0;
    rst_n = 0;
    forever #5 clk = ~clk;
  end

  logic         mask_we, evt;
  logic [N-1:0] mask, arrive, clk_en;
  int checks = 0, failures = 0;

  event_unit #(.N_CORES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .mask_we_i(mask_we), .mask_i(mask),
                                 .arrive_i(arrive), .core_clk_en_o(clk_en), .evt_o(evt));

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic barrier(logic [N-1:0] m);
    logic [N-1:0] todo, slept;
    todo = m; slept = '0;
    while (todo != '0) begin
      arrive = '0;
      for (int i = 0; i < N; i++) if (todo[i] && $urandom_range(0, 3) == 0) arrive[i] = 1;
      if ((todo & ~arrive) == '0 || arrive == '0) begin end
      @(posedge clk); #1;
      todo  = todo & ~arrive;
      slept = slept | arrive;
      arrive = '0;
      chk((clk_en & slept) == '0, "arrived cores sleep");
      chk((clk_en & ~m) == ~m, "other cores keep running");
      if (todo != '0) chk(!evt, "no event before the last arrival");
    end
    chk(evt, "event in the cycle after the last arrival");
    chk((clk_en & m) == '0, "still asleep at the event");
    @(posedge clk); #1;
    chk(!evt && (clk_en & m) == '0, "asleep one cycle after the event");
    @(posedge clk); #1;
    chk(clk_en == '1, "awake two cycles after the event");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mask_we = 0; mask = '0; arrive = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 5; r++) barrier('1);
    mask_we = 1; mask = 16'h00F0;
    @(posedge clk); #1 mask_we = 0;
    for (int r = 0; r < 5; r++) barrier(16'h00F0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
