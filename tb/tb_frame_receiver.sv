// Testbench of frame_receiver: feeds decoded bits directly (one bit every
// 19 clocks, as from the Manchester decoder) and checks that
//  * random frames after a preamble and 0xD5 come out bit-exact, with one
//    toggle of frame_toggle_o and one count each, right after the last bit,
//  * bits before the delimiter (noise, preamble) are ignored,
//  * a frame cut by loss of lock is dropped and counted as an abort, and the
//    receiver then takes the next frame.
`timescale 1ns/1ps
module tb_frame_receiver;
  import retina_pkg::*;
  logic clk = 0, rst_n = 1;
  logic bit_valid = 0, bit_data = 0, locked = 0;
  stim_frame_t frame_o;
  logic frame_toggle_o;
  logic [15:0] frame_cnt_o, abort_cnt_o;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;   // a falling edge, so every flop is reset

  frame_receiver dut (.*);

  always #13.369 clk = ~clk;

  task automatic send_bit(bit b);
    repeat (18) @(posedge clk);
    bit_valid <= 1; bit_data <= b;
    @(posedge clk);
    bit_valid <= 0;
  endtask

  task automatic send_frame(logic [FRAME_BITS-1:0] f, int cut_at = -1);
    for (int i = 0; i < 8; i++) send_bit(i[0]);         // preamble 0101...
    for (int i = 7; i >= 0; i--) send_bit(SFD[i]);
    for (int i = FRAME_BITS - 1; i >= 0; i--) begin
      if (FRAME_BITS - 1 - i == cut_at) begin
        locked <= 0; repeat (30) @(posedge clk); locked <= 1;
        return;
      end
      send_bit(f[i]);
    end
  endtask

  function automatic logic [FRAME_BITS-1:0] rand_frame();
    logic [FRAME_BITS-1:0] f;
    for (int i = 0; i < FRAME_BITS; i += 32) f[i +: 32] = $urandom;
    return f;
  endfunction

  initial begin
    logic [FRAME_BITS-1:0] f;
    logic tog;
    repeat (4) @(posedge clk);
    rst_n = 1; locked = 1;
    // noise before the first frame
    for (int i = 0; i < 20; i++) send_bit(bit'($urandom_range(0, 1)) & bit'(i % 3 != 0));
    for (int n = 0; n < 6; n++) begin
      f = rand_frame();
      tog = frame_toggle_o;
      send_frame(f);
      @(posedge clk); #1;
      checks++;
      if (frame_o !== f) begin failures++; $display("frame %0d mismatch", n); end
      checks++;
      if (frame_toggle_o == tog) begin failures++; $display("no toggle for frame %0d", n); end
    end
    checks++; if (frame_cnt_o != 6) begin failures++; $display("frame count %0d", frame_cnt_o); end
    // a frame cut in the middle
    f = rand_frame();
    tog = frame_toggle_o;
    send_frame(f, 100);
    checks++; if (abort_cnt_o != 1) begin failures++; $display("aborts %0d", abort_cnt_o); end
    checks++; if (frame_toggle_o != tog) begin failures++; $display("cut frame delivered"); end
    // the next one is received again
    f = rand_frame();
    send_frame(f);
    @(posedge clk); #1;
    checks++; if (frame_o !== f || frame_cnt_o != 7) begin failures++; $display("no recovery after abort"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
