// tb_redundant_ring -- self-checking test of the ring of N units plus one
// spare (multiplier and adder versions). For every bypass setting it breaks
// exactly the physical unit being bypassed and checks all results stay
// correct; without bypass it checks that breaking a regular unit shows up
// in exactly its slot while breaking the idle spare is harmless.
module tb_redundant_ring;
  import hyca_pkg::*;
  localparam int N = 4;
  logic signed [N-1:0][7:0]  a, b;
  logic signed [N-1:0][15:0] ym;
  logic signed [N-1:0][31:0] aa, ab, ya;
  logic fen, inj;
  logic [$clog2(N+1)-1:0] fidx, iu;
  int checks, failures;

  redundant_ring #(.N(N), .OP(OP_MUL), .IW(8), .OW(16)) u_mul (
    .a_i(a), .b_i(b), .fault_en_i(fen), .fault_idx_i(fidx), .inj_en_i(inj), .inj_unit_i(iu), .y_o(ym));
  redundant_ring #(.N(N), .OP(OP_ADD), .IW(32), .OW(32)) u_add (
    .a_i(aa), .b_i(ab), .fault_en_i(fen), .fault_idx_i(fidx), .inj_en_i(inj), .inj_unit_i(iu), .y_o(ya));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    checks = 0; failures = 0;
    for (int n = 0; n < 300; n++) begin
      int mode;
      mode = n % (2 * N + 1);
      for (int i = 0; i < N; i++) begin
        a[i] = 8'($urandom); b[i] = 8'($urandom);
        aa[i] = $urandom; ab[i] = $urandom;
      end
      if (mode < N) begin
        // bypass slot 'mode' (physical unit mode+1) and break that unit
        fen = 1; fidx = 3'(mode); inj = 1; iu = 3'(mode + 1);
      end else if (mode < 2 * N) begin
        // no bypass, regular unit broken
        fen = 0; fidx = '0; inj = 1; iu = 3'(mode - N + 1);
      end else begin
        // no bypass, spare broken
        fen = 0; fidx = '0; inj = 1; iu = '0;
      end
      #1;
      for (int i = 0; i < N; i++) begin
        bit bad;
        bad = (mode >= N && mode < 2 * N && i == mode - N);
        check((ym[i] == 16'($signed(a[i]) * $signed(b[i]))) != bad, $sformatf("mul mode %0d slot %0d", mode, i));
        check((ya[i] == $signed(aa[i]) + $signed(ab[i])) != bad, $sformatf("add mode %0d slot %0d", mode, i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
