// Self-checking test of the 64-lane MAC unit: every mode on random operands
// against a reference computed lane by lane modulo 2^32.
// How: 400 random operand sets, cycling through the five modes, are applied to the combinational unit; the
// result is compared after a 1 ns settle. A watchdog stops a hung run.
// The 64-lane width is the paper's; the modes and integer arithmetic are this
// design's choices.
module tb_mac_array;
  import ppim_pkg::*;
  localparam int L = MAC_LANES;
  mac_mode_e mode;
  word_t weight, scalar;
  logic [L-1:0][WORD_W-1:0] a, b, acc, res;
  int checks = 0, failures = 0;

  mac_array #(.LANES(L)) dut (.*);

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mac_mode_e modes [5] = '{MAC_PASS, MAC_MULACC, MAC_ACC, MAC_AXPY, MAC_AXPYW};
    for (int t = 0; t < 400; t++) begin
      mode   = modes[t % 5];
      weight = (t % 7 == 0) ? 32'd1 : $urandom;
      scalar = $urandom;
      for (int i = 0; i < L; i++) begin
        a[i] = $urandom; b[i] = $urandom; acc[i] = $urandom;
      end
      #1;
      for (int i = 0; i < L; i++) begin
        word_t e;
        unique case (mode)
          MAC_PASS:   e = b[i];
          MAC_MULACC: e = acc[i] + weight * (a[i] * b[i]);
          MAC_ACC:    e = acc[i] + weight * b[i];
          MAC_AXPY:   e = acc[i] + scalar * b[i];
          MAC_AXPYW:  e = acc[i] + weight * (scalar * b[i]);
          default:    e = '0;
        endcase
        checks++;
        if (res[i] !== e) begin
          failures++;
          if (failures < 10) $display("mode %0d lane %0d got %h expected %h", mode, i, res[i], e);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
