// bpc_stream_harness -- drives one bpc_compressor instance with feature-map-like
// streams of a chosen number format and checks its output against bpc_ref_pkg.
//
// FMT selects how the values are formed from a ReLU-clipped random walk (zero
// bursts, correlated non-zero values): 0 = fixed point on M bits (the walk scaled
// to the full range), 1 = IEEE half precision bit patterns (M = 16), 2 = IEEE
// single precision bit patterns (M = 32). Input valid and output ready toggle at
// random. Each stream's output is compared bit for bit, padding must be zero and
// out_last must mark the last word. `done` rises after NSTREAMS streams; checks,
// failures and the total input and output bit counts are then final.
module bpc_stream_harness #(
  parameter int M        = 16,
  parameter int N        = 16,
  parameter int MAX_ZB   = 16,
  parameter int OUT_W    = 32,
  parameter int BUF_W    = 512,
  parameter int FMT      = 0,
  parameter int NSTREAMS = 10
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   done,
  output int     checks,
  output int     failures,
  output longint in_bits,
  output longint out_bits
);
  import bpc_ref_pkg::*;

  logic             in_valid = 0, in_ready, in_last = 0;
  logic [M-1:0]     in_data = '0;
  logic             out_valid, out_ready = 0, out_last;
  logic [OUT_W-1:0] out_data;

  bpc_compressor #(.M(M), .N(N), .MAX_ZB(MAX_ZB), .OUT_W(OUT_W), .BUF_W(BUF_W)) dut (.*);

  bit got[$];
  int lasts = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(99) < 85);
    if (rst_n && out_valid && out_ready) begin
      for (int i = OUT_W - 1; i >= 0; i--) got.push_back(out_data[i]);
      if (out_last) lasts++;
    end
  end

  // non-negative x to an IEEE float with EW exponent and FW fraction bits
  // (fraction truncated, values below the normal range flushed to zero)
  function automatic longint unsigned float_bits(real x, int ew, int fw);
    bit [63:0] d;
    int e, bias;
    longint unsigned f;
    d    = $realtobits(x);
    bias = (1 << (ew - 1)) - 1;
    e    = int'(d[62:52]) - 1023 + bias;
    if (x == 0.0 || e <= 0) return 0;
    if (e >= (1 << ew) - 1) e = (1 << ew) - 2;
    f = d[51:0] >> (52 - fw);
    return (longint'(e) << fw) | f;
  endfunction

  function automatic longint unsigned value(real x);
    if (x < 0.0) x = 0.0;                      // ReLU
    case (FMT)
      1:       return float_bits(x, 5, 10);
      2:       return float_bits(x, 8, 23);
      default: begin
        real s = x * ((M >= 32) ? 4294967295.0 : real'((64'd1 << M) - 1)) / 8.0;
        if (s > real'((64'd1 << M) - 1)) s = real'((64'd1 << M) - 1);
        return longint'(s);
      end
    endcase
  endfunction

  initial begin
    longint unsigned vals[$];
    bit exp[$];
    checks = 0; failures = 0; done = 0; in_bits = 0; out_bits = 0;
    @(posedge clk iff rst_n);
    for (int s = 0; s < NSTREAMS; s++) begin
      real w;
      int len;
      w = 0.5;
      len = $urandom_range(400, 30);
      vals.delete();
      for (int k = 0; k < len; k++) begin
        w += (real'($urandom_range(2000)) - 1000.0) / 4000.0;
        if (w < -1.0) w = -1.0;
        if (w > 8.0)  w = 8.0;
        vals.push_back(value(w));
      end
      exp.delete();
      compress(exp, M, N, MAX_ZB, vals);
      got.delete();
      lasts = 0;
      for (int k = 0; k < len; k++) begin
        in_valid <= ($urandom_range(9) != 0);
        in_data  <= vals[k][M-1:0];
        in_last  <= (k == len - 1);
        @(posedge clk);
        while (!(in_valid && in_ready)) begin
          in_valid <= 1;
          @(posedge clk);
        end
      end
      in_valid <= 0;
      in_last  <= 0;
      while (lasts == 0) @(posedge clk);
      in_bits  += len * M;
      out_bits += exp.size();
      checks++;
      begin
        bit ok;
        int bad;
        ok = (got.size() == ((exp.size() + OUT_W - 1) / OUT_W) * OUT_W) && lasts == 1;
        bad = -1;
        for (int i = 0; i < got.size(); i++)
          if (got[i] != ((i < exp.size()) ? exp[i] : 1'b0)) begin
            ok = 0;
            if (bad < 0) bad = i;
          end
        if (!ok) begin
          $display("first wrong bit %0d", bad);
          failures++;
          $display("FAIL: M=%0d N=%0d FMT=%0d stream %0d: %0d bits, expected %0d", M, N, FMT,
                   s, got.size(), exp.size());
        end
      end
    end
    done = 1;
  end
endmodule
