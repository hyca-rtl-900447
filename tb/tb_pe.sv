// tb_pe -- self-checking test of one processing element.
// Streams random operand sequences of random length into the PE and checks
// the accumulated dot product, the done pulse in cycle T+3 after the last
// operand is registered (accumulate at T+2, done at T+3), the weight
// forwarding register, and a stuck-at fault forced on one accumulator bit.
module tb_pe;
  import hyca_pkg::*;
  logic clk, rst_n;
  logic valid, first, last;
  logic signed [DW-1:0] w, x, w_o;
  logic signed [AW-1:0] acc;
  logic done;
  logic fi_en;
  logic [$clog2(AW)-1:0] fi_bit;
  logic fi_val;
  int checks, failures;

  pe dut (.clk, .rst_n, .valid_i(valid), .first_i(first), .last_i(last), .w_i(w), .x_i(x),
          .w_o, .acc_o(acc), .done_o(done), .fi_en_i(fi_en), .fi_bit_i(fi_bit), .fi_val_i(fi_val));

  initial begin clk = 0; forever #5 clk = ~clk; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    checks = 0; failures = 0;
    rst_n = 0; valid = 0; first = 0; last = 0; w = 0; x = 0;
    fi_en = 0; fi_bit = 0; fi_val = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      int n, t_last, t_done;
      logic signed [AW-1:0] ref_acc;
      n = 1 + int'($urandom % 20);
      ref_acc = 0;
      fi_en = (run >= 30);
      fi_bit = 5'($urandom % AW);
      fi_val = 1'($urandom);
      for (int t = 0; t < n; t++) begin
        @(negedge clk);
        valid = 1; first = (t == 0); last = (t == n - 1);
        w = DW'($urandom); x = DW'($urandom);
        ref_acc = (t == 0) ? AW'(w * x) : ref_acc + AW'(w * x);
        if (fi_en) ref_acc[fi_bit] = fi_val;
        @(posedge clk);
        #1 check(w_o == w, "weight forwarded after one cycle");
      end
      t_last = 0;
      @(negedge clk);
      valid = 0; first = 0; last = 0;
      t_done = -1;
      for (int k = 1; k <= 4; k++) begin
        if (done && t_done < 0) t_done = k;
        @(negedge clk);
      end
      check(t_done == 3, $sformatf("done in cycle T+%0d after the last tuple (exp T+3)", t_done));
      check(acc == ref_acc, $sformatf("run %0d acc %0d exp %0d", run, acc, ref_acc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
