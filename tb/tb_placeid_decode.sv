// tb_placeid_decode: checks the place identifier arithmetic against a
// reference built by packing (first << 1) | size for every legal place of a
// 128-core chip, plus the two reserved identifiers.
module tb_placeid_decode;
  import mg_pkg::*;
  localparam int unsigned NC = 128;
  logic [CORE_W:0]   pid, dpid, size;
  logic [CORE_W-1:0] self_core, first;
  logic              valid;
  int checks = 0, failures = 0;

  placeid_decode #(.NCORES(NC)) dut (.pid(pid), .self_core(self_core), .default_pid(dpid),
                                    .first_core(first), .size(size), .valid(valid));

  task automatic check(input int exp_first, input int exp_size, input bit exp_valid);
    #1;
    checks++;
    if (valid !== exp_valid || (exp_valid && (int'(first) != exp_first || int'(size) != exp_size))) begin
      failures++;
      $display("FAIL pid=%0d first=%0d size=%0d valid=%0b exp %0d %0d %0b",
               pid, first, size, valid, exp_first, exp_size, exp_valid);
    end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    self_core = 8'd37; dpid = 9'd24;   // default place: cores 8..15
    // every aligned power-of-two place of the chip
    for (int sz = 1; sz <= NC; sz *= 2)
      for (int f = 0; f < NC; f += sz) begin
        if (f == 0 && sz == 1) continue;   // would be pid 1, reserved
        pid = 9'((f << 1) | sz);
        check(f, sz, 1'b1);
      end
    // place beyond the chip: 8 cores from core 128
    pid = 9'((128 << 1) | 8) ; check(0, 0, 1'b0);
    // local place
    pid = '0; check(37, 1, 1'b1);
    // default place
    pid = 9'd1; check(8, 8, 1'b1);
    // whole chip
    pid = 9'd128; check(0, 128, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
