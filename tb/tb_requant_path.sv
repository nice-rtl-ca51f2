// tb_requant_path: self-checking test of the per-channel requantization path.
// Random sums, biases, skip codes and per-lane modes enter on most cycles;
// each result must appear exactly two cycles later with the code and clip
// flags given by the reference formula, and with its tag.
module tb_requant_path;
  import nice_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned LANES = 4;
  localparam int unsigned TAG_W = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [LANES-1:0][ACC_W-1:0] acc;
  logic [LANES-1:0][B_B-1:0] bias;
  logic [LANES-1:0] m_sel, skip_en, clip_lo, clip_hi;
  scale_t m_act, m_img, s_skip;
  logic [LANES-1:0][B_IMG-1:0] skip, code;
  logic out_valid;
  int checks = 0, failures = 0;
  int n_lo = 0, n_hi = 0, n_mid = 0;

  requant_path #(.LANES(LANES), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    bit v;
    int tag;
    rq_t r [LANES];
  } exp_t;
  exp_t pipe [3];

  initial begin
    in_valid = 0; in_tag = 0; acc = '0; bias = '0; m_sel = '0; skip_en = '0; skip = '0;
    m_act = '{q: 9'd1, shr: 6'd0}; m_img = m_act; s_skip = m_act;
    for (int i = 0; i < 3; i++) pipe[i].v = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_tag   = 8'($urandom);
      m_act    = '{q: 9'($urandom_range(1, 256)), shr: 6'($urandom_range(8, 20))};
      m_img    = '{q: 9'($urandom_range(1, 256)), shr: 6'($urandom_range(4, 16))};
      s_skip   = '{q: 9'($urandom_range(1, 256)), shr: 6'($urandom_range(6, 10))};
      for (int l = 0; l < LANES; l++) begin
        acc[l]     = 32'($signed(int'($urandom_range(0, 200000)) - 80000));
        bias[l]    = 16'($urandom);
        m_sel[l]   = $urandom_range(0, 1);
        skip_en[l] = m_sel[l] & ($urandom_range(0, 3) != 0);
        skip[l]    = 16'($urandom);
      end
      // expected result of this input
      pipe[0].v   = in_valid;
      pipe[0].tag = in_tag;
      for (int l = 0; l < LANES; l++) begin
        scale_t m;
        m = m_sel[l] ? m_img : m_act;
        pipe[0].r[l] = requant(longint'($signed(acc[l])), int'(m.q), int'(m.shr),
                               int'($signed(bias[l])), skip_en[l], int'(skip[l]),
                               int'(s_skip.q), int'(s_skip.shr), m_sel[l]);
      end
      @(posedge clk);
      #1;
      // check the output of the input applied two cycles ago
      checks++;
      if (out_valid != pipe[1].v) begin
        failures++;
        $display("FAIL out_valid=%0b exp %0b", out_valid, pipe[1].v);
      end else if (pipe[1].v) begin
        checks++;
        if (int'(out_tag) != pipe[1].tag) begin failures++; $display("FAIL tag"); end
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (int'(code[l]) != int'(pipe[1].r[l].code) || clip_lo[l] != pipe[1].r[l].lo
              || clip_hi[l] != pipe[1].r[l].hi) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d code=%0d exp=%0d lo=%0b/%0b hi=%0b/%0b", l,
              code[l], pipe[1].r[l].code, clip_lo[l], pipe[1].r[l].lo, clip_hi[l], pipe[1].r[l].hi);
          end
          if (pipe[1].r[l].lo) n_lo++; else if (pipe[1].r[l].hi) n_hi++; else n_mid++;
        end
      end
      pipe[2] = pipe[1];
      pipe[1] = pipe[0];
    end
    $display("results: clamped low %0d, clamped high %0d, in range %0d", n_lo, n_hi, n_mid);
    if (n_lo == 0 || n_hi == 0 || n_mid == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
