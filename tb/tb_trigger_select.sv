// tb_trigger_select -- exhaustive test of the trigger source multiplexer.
//
// Applies every source code 0..15 with every combination of the software
// trigger and the two channels' rising and falling flags, and compares
// 'trig' with the source table written out here: 1 software, 2/3 channel A
// rise/fall, 4/5 channel B rise/fall, 10/11 either channel rise/fall, all
// other codes never.
module tb_trigger_select;
  logic [3:0] src;
  logic sw_trig;
  logic [1:0] rise, fall;
  logic trig;
  int checks = 0, failures = 0;

  trigger_select dut (.*);

  function automatic bit expect_trig(int s, bit sw, bit [1:0] r, bit [1:0] f);
    case (s)
      1:  return sw;
      2:  return r[0];
      3:  return f[0];
      4:  return r[1];
      5:  return f[1];
      10: return r[0] | r[1];
      11: return f[0] | f[1];
      default: return 1'b0;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 16; s++)
      for (int v = 0; v < 32; v++) begin
        src = 4'(s); sw_trig = v[0]; rise = v[2:1]; fall = v[4:3];
        #1;
        checks++;
        if (trig !== expect_trig(s, v[0], v[2:1], v[4:3])) begin
          failures++;
          $display("src=%0d sw=%0b rise=%b fall=%b: trig=%0b", s, v[0], v[2:1], v[4:3], trig);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
