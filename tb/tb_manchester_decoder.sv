// Testbench of manchester_decoder: drives a 2 Mbit/s Manchester stream on
// rx_in with an asynchronous 37.4 MHz sampling clock, slightly off the
// nominal bit rate, and checks every decoded bit against the sent ones,
// the bit rate (one strobe per 18-19 clocks), lock after a preamble and loss
// of lock when the line stays idle.
`timescale 1ns/1ps
module tb_manchester_decoder;
  logic clk = 0, rst_n = 1, rx = 0;
  logic bit_valid, bit_data, locked;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;   // a falling edge, so every flop is reset
  bit sent[$];
  int nrx = 0, cyc = 0, last_v = -1;
  bit collecting = 0;
  real half_ns = 250.0;

  manchester_decoder dut (.clk(clk), .rst_n(rst_n), .rx_in(rx),
                          .bit_valid(bit_valid), .bit_data(bit_data), .locked(locked));

  always #13.369 clk = ~clk;

  always @(posedge clk) begin
    cyc++;
    if (bit_valid && collecting) begin
      checks++;
      if (nrx >= sent.size() || bit_data != sent[nrx]) begin
        failures++;
        if (failures < 10) $display("bit %0d: got %0d", nrx, bit_data);
      end
      if (last_v >= 0 && (cyc - last_v < 17 || cyc - last_v > 21)) begin
        failures++; $display("bit spacing %0d cycles", cyc - last_v);
      end
      last_v = cyc;
      nrx++;
    end
  end

  // one Manchester bit: first half is the complement, second half the bit
  task automatic send_bit(bit b);
    rx = ~b; #(half_ns * 1ns);
    rx = b;  #(half_ns * 1ns);
  endtask

  initial begin
    #200ns rst_n = 1;
    #1us;
    checks++; if (locked) begin failures++; $display("locked while idle"); end
    // preamble of alternating bits: the decoder locks on it
    for (int i = 0; i < 16; i++) send_bit(i[0]);
    checks++; if (!locked) begin failures++; $display("no lock after preamble"); end
    // random payload, a little fast and a little slow
    collecting = 1;
    for (int r = 0; r < 3; r++) begin
      half_ns = (r == 0) ? 250.0 : (r == 1) ? 245.0 : 255.0;
      for (int i = 0; i < 300; i++) begin
        bit b = bit'($urandom_range(0, 1));
        sent.push_back(b);
        send_bit(b);
      end
    end
    rx = 0;
    #2us;
    collecting = 0;
    checks++;
    if (nrx != sent.size()) begin failures++; $display("decoded %0d of %0d", nrx, sent.size()); end
    checks++; if (locked) begin failures++; $display("lock kept on idle line"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
