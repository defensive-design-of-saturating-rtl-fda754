// tb_choice_counter_next -- exhaustive check of the choice counter's
// next-state function against the transition list
//   11 -H-> 11, 11 -M-> 10, 10 -H-> 11, 10 -M-> 01,
//   01 -H-> 10, 01 -M-> 00, 00 -H-> 01, 00 -M-> 00.
module tb_choice_counter_next;
  import psc_pkg::*;
  choice_state_e s_i, s_o;
  logic hit;
  int checks = 0, failures = 0;
  // expected[state][hit]
  logic [1:0] expected [4][2];

  choice_counter_next dut (.state_i(s_i), .hit_i(hit), .state_o(s_o));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expected[3][1] = 2'b11; expected[3][0] = 2'b10;
    expected[2][1] = 2'b11; expected[2][0] = 2'b01;
    expected[1][1] = 2'b10; expected[1][0] = 2'b00;
    expected[0][1] = 2'b01; expected[0][0] = 2'b00;
    for (int s = 0; s < 4; s++)
      for (int h = 0; h < 2; h++) begin
        s_i = choice_state_e'(s);
        hit = h[0];
        #1;
        checks++;
        if (s_o != expected[s][h]) begin
          failures++;
          $display("FAIL: state %0d hit %0d -> %0d, expected %0d", s, h, s_o, expected[s][h]);
        end
      end
    // selection bit: T1 chosen exactly in 11 and 10
    for (int s = 0; s < 4; s++) begin
      checks++;
      if ((s >= 2) != (choice_state_e'(s) inside {T1_STRONG, T1_WEAK})) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
