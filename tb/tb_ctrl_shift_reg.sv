// tb_ctrl_shift_reg: checks the 24-bit control-word shift register.
//
// Random words are sent MSB first with shift_en high; after 24 clocks the
// parallel word must equal the word sent, and while the next word goes in
// sdo must return the previous word MSB first. Clocks with shift_en low
// must hold the word, and rst_n must clear it at once, without a clock.
module tb_ctrl_shift_reg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int W = 24;

  logic         clk = 1'b0;
  logic         rst_n = 1'b1;
  logic         shift_en = 1'b0;
  logic         sdi = 1'b0;
  logic         sdo;
  logic [W-1:0] word;
  int           checks = 0;
  int           failures = 0;

  ctrl_shift_reg #(.WIDTH(W)) dut (
    .clk(clk), .rst_n(rst_n), .shift_en(shift_en), .sdi(sdi),
    .sdo(sdo), .word(word)
  );

  task automatic tick();
    #5000 clk = 1'b1;
    #5000 clk = 1'b0;
  endtask

  task automatic expect_eq(input string what, input logic [W-1:0] got,
                           input logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] prev;
    logic [W-1:0] w;
    // asynchronous reset pulse, no clock edge
    #1000 rst_n = 1'b0;
    #1000;
    expect_eq("reset", word, '0);
    rst_n = 1'b1;
    prev = '0;
    for (int k = 0; k < 40; k++) begin
      w = W'($urandom());
      shift_en = 1'b1;
      for (int i = W - 1; i >= 0; i--) begin
        sdi = w[i];
        expect_eq("sdo", {{(W-1){1'b0}}, sdo}, {{(W-1){1'b0}}, prev[i]});
        tick();
      end
      shift_en = 1'b0;
      expect_eq("word", word, w);
      // clocks without shift_en hold the word
      sdi = ~sdi;
      repeat (3) tick();
      expect_eq("hold", word, w);
      prev = w;
    end
    // asynchronous reset of a loaded word
    #1000 rst_n = 1'b0;
    #1000;
    expect_eq("async reset", word, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
