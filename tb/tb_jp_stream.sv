// tb_jp_stream -- reusable stimulus/checker: one accumulator instance fed with
// back-to-back datasets of exactly representable values.
//
// Dataset lengths are random in MIN_LEN .. MIN_LEN+EXTRA, where MIN_LEN is LEN
// if given, else the minimum length rule evaluated with the loop latency P + 2. Every sum must equal
// the exact sum bit for bit and carry its dataset's label. Sums are matched per
// label, oldest first, so that a configuration in which results overtake each
// other (label width 3 and more) is still checked; overtaking is counted.
// Used by testbenches that run several configurations.
module tb_jp_stream
  import jp_pkg::*;
#(
  parameter int unsigned P     = 14,
  parameter int unsigned L     = 1,
  parameter int          NSETS = 40,
  parameter int          EXTRA = 20,
  parameter int          LEN   = 0      // minimum length used; 0: the rule
) (
  input  logic clk,
  input  logic rst,
  output logic done,
  output int   checks,
  output int   failures,
  output int   overtakes
);

  localparam int unsigned MIN_LEN = (LEN > 0) ? LEN : min_dataset_len(P + 2, L);

  fp_t  in;
  logic valid, start;
  fp_t  out;
  logic out_en;
  logic [L-1:0] out_label;
  logic fifo_overflow;

  jugglepac #(.P(P), .L(L)) dut (.*);

  real exp_q [1 << L][$];
  int  seq_q [1 << L][$];
  int  last_seq = -1;
  int  n_out = 0;

  initial begin
    checks = 0; failures = 0; overtakes = 0; done = 1'b0;
  end

  always @(posedge clk) if (!rst) begin
    if (fifo_overflow) failures++;
    if (out_en) begin
      checks++;
      n_out++;
      if (exp_q[out_label].size() == 0) begin
        failures++;
        $display("FAIL (L=%0d): unexpected sum, label %0d", L, out_label);
      end else begin
        real e;
        int  s;
        e = exp_q[out_label].pop_front();
        s = seq_q[out_label].pop_front();
        if (s < last_seq) overtakes++;
        if (s > last_seq) last_seq = s;
        if (out !== $realtobits(e)) begin
          failures++;
          $display("FAIL (L=%0d): label %0d got %g expected %g", L, out_label, $bitstoreal(out), e);
        end
      end
    end
  end

  initial begin
    int lab;
    in = '0; valid = 1'b0; start = 1'b0;
    lab = 0;
    @(negedge rst);
    repeat (2) @(negedge clk);
    for (int k = 0; k < NSETS; k++) begin
      real s;
      int  len;
      s   = 0.0;
      len = int'(MIN_LEN) + int'($urandom_range(EXTRA));
      for (int i = 0; i < len; i++) begin
        int  v;
        @(negedge clk);
        v     = int'($urandom_range(65534)) - 32767;
        start = (i == 0);
        valid = (i == 0) || ($urandom_range(9) != 0);
        in    = $realtobits(real'(v) / 8.0);
        if (valid) s = s + real'(v) / 8.0;
      end
      exp_q[lab].push_back(s);
      seq_q[lab].push_back(k);
      lab = (lab + 1) % (1 << L);
    end
    @(negedge clk);
    start = 1'b1; valid = 1'b1; in = '0;
    @(negedge clk);
    start = 1'b0; valid = 1'b0;
    repeat (300) @(negedge clk);
    checks++;
    if (n_out != NSETS) begin
      failures++;
      $display("FAIL (L=%0d): %0d of %0d sums came out", L, n_out, NSETS);
    end
    $display("L=%0d MIN_LEN=%0d sums=%0d overtakes=%0d", L, MIN_LEN, n_out, overtakes);
    done = 1'b1;
  end

endmodule
