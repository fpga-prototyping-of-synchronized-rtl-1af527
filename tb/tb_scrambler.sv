// tb_scrambler -- self-checking test of the XOR scrambler with 16 state bits
// and a 4-bit information word: information bit p must flip exactly state
// bits 4p..4p+3 when it is one and the source is on, and nothing may change
// with the source off. Also checks that scrambling twice restores the state.
module tb_scrambler;
  logic [15:0] state, z, z2;
  logic [3:0]  info;
  logic        info_on;
  int checks = 0, failures = 0;

  scrambler dut  (.state, .info, .info_on, .z);
  scrambler dut2 (.state(z), .info, .info_on, .z(z2));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] mask;

  initial begin
    for (int n = 0; n < 1000; n++) begin
      state = 16'($urandom); info = 4'($urandom); info_on = 1'($urandom);
      #1;
      mask = {{4{info[3]}}, {4{info[2]}}, {4{info[1]}}, {4{info[0]}}};
      if (!info_on) mask = '0;
      checks++;
      if (z !== (state ^ mask)) begin
        failures++;
        $display("FAIL state=%h info=%h on=%b z=%h", state, info, info_on, z);
      end
      checks++;
      if (z2 !== state) begin
        failures++;
        $display("FAIL not invertible: %h -> %h -> %h", state, z, z2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
