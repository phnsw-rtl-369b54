// tb_min_h: checks Min.H (combinational) on random lists, with ties and empty or
// nearly empty lists, against a linear search that returns the lowest slot of the
// smallest occupied distance.
module tb_min_h;
  import phnsw_pkg::*;
  localparam int N = 64;
  dist_t dv [N];
  logic [N-1:0] valid;
  logic [5:0] slot;
  logic any;
  int checks = 0, failures = 0;

  min_h #(.N(N)) dut (.dval(dv), .valid, .min_slot(slot), .any);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int best;
      for (int i = 0; i < N; i++) dv[i] = (t % 2) ? dist_t'($urandom % 16) : {$urandom, $urandom, $urandom};
      case (t % 4)
        0: valid = '0;
        1: valid = 64'(1) << ($urandom % 64);
        default: valid = {$urandom, $urandom};
      endcase
      #1;
      best = -1;
      for (int i = 0; i < N; i++) if (valid[i] && (best < 0 || dv[i] < dv[best])) best = i;
      checks++;
      if (any !== (best >= 0)) begin failures++; $display("FAIL any t%0d", t); end
      if (best >= 0) begin
        checks++;
        if (int'(slot) != best) begin failures++; $display("FAIL t%0d slot %0d vs %0d", t, slot, best); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
