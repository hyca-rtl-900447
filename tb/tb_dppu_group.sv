// tb_dppu_group -- self-checking test of one DPPU group (GS multipliers in
// a redundancy ring, adder tree of GS-1 adders in a ring). Feeds a new
// random operand set every cycle and checks each dot product and its tag
// come out exactly 2 + log2(GS) cycles later, with random multiplier and
// adder bypass settings where the bypassed physical unit is broken.
module tb_dppu_group;
  import hyca_pkg::*;
  localparam int GS = 4, LAT = 2 + $clog2(GS), TAGW = 8;
  logic clk, rst_n;
  logic signed [GS-1:0][DW-1:0] w, x;
  logic [TAGW-1:0] tag_in, tag_out;
  logic signed [AW-1:0] psum;
  logic mfen, afen, minj, ainj;
  logic [$clog2(GS+1)-1:0] mfidx, miu;
  logic [$clog2(GS)-1:0] afidx, aiu;
  logic signed [AW-1:0] exp_q [$];
  logic [TAGW-1:0] exp_t [$];
  int checks, failures;

  dppu_group #(.GS(GS), .TAGW(TAGW)) dut (
    .clk, .rst_n, .w_i(w), .x_i(x), .tag_i(tag_in),
    .mul_fault_en_i(mfen), .mul_fault_idx_i(mfidx), .add_fault_en_i(afen), .add_fault_idx_i(afidx),
    .mul_inj_en_i(minj), .mul_inj_unit_i(miu), .add_inj_en_i(ainj), .add_inj_unit_i(aiu),
    .psum_o(psum), .tag_o(tag_out));

  initial begin clk = 0; forever #5 clk = ~clk; end
  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    checks = 0; failures = 0;
    rst_n = 0; w = '0; x = '0; tag_in = '0;
    mfen = 0; afen = 0; minj = 0; ainj = 0; mfidx = '0; miu = '0; afidx = '0; aiu = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 20; blk++) begin
      // new redundancy setting; let the pipeline drain first
      mfen = 1'($urandom); mfidx = 3'($urandom % GS);
      afen = 1'($urandom); afidx = 2'($urandom % (GS - 1));
      minj = mfen; miu = mfidx + 1'b1;
      ainj = afen; aiu = afidx + 1'b1;
      for (int n = 0; n < 50 + LAT; n++) begin
        @(negedge clk);
        if (n >= LAT) begin
          logic signed [AW-1:0] e;
          e = exp_q.pop_front();
          checks++;
          if (psum !== e || tag_out !== exp_t.pop_front()) begin
            failures++;
            $display("FAIL: blk %0d n %0d got %0d exp %0d", blk, n, psum, e);
          end
        end
        if (n < 50) begin
          logic signed [AW-1:0] s;
          s = 0;
          for (int k = 0; k < GS; k++) begin
            w[k] = DW'($urandom); x[k] = DW'($urandom);
            s += AW'($signed(w[k]) * $signed(x[k]));
          end
          tag_in = TAGW'($urandom);
          exp_q.push_back(s);
          exp_t.push_back(tag_in);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
