// tb_codebook_encoder: loads 512 random centroid values (with some repeated
// values, to exercise ties), encodes random pixels and centroid values
// themselves, and checks each symbol against a brute-force nearest-centroid
// search (ties to the lower index), the N_SYM+1 cycle latency and the
// decode port.
module tb_codebook_encoder;
  localparam int unsigned N = 512, VW = 16;
  localparam int unsigned SW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic cent_we = 0;
  logic [SW-1:0] cent_waddr = '0;
  logic signed [VW-1:0] cent_wdata = '0;
  logic [SW-1:0] dec_sym = '0;
  logic signed [VW-1:0] dec_val;
  logic pix_valid = 0, pix_ready;
  logic signed [VW-1:0] pix_val = '0;
  logic sym_valid;
  logic [SW-1:0] sym;
  int checks = 0, failures = 0;
  int cent [N];

  always #5 clk = ~clk;

  codebook_encoder #(.N_SYM(N), .VAL_W(VW)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned nearest(int x);
    int best, bi, d;
    best = 1 << 30; bi = 0;
    for (int i = 0; i < N; i++) begin
      d = (x > cent[i]) ? x - cent[i] : cent[i] - x;
      if (d < best) begin best = d; bi = i; end
    end
    return bi;
  endfunction

  task automatic encode(int x);
    int cycles;
    while (!pix_ready) @(posedge clk);
    @(posedge clk);
    pix_valid <= 1; pix_val <= VW'(x);
    @(posedge clk) pix_valid <= 0;
    cycles = 1;
    forever begin
      @(negedge clk);
      if (sym_valid) break;
      cycles++;
      if (cycles > 2 * N) break;
    end
    checks++;
    if (!sym_valid || sym != SW'(nearest(x))) begin
      failures++;
      $display("encode %0d: got %0d exp %0d", x, sym, nearest(x));
    end
    checks++;
    if (cycles != N + 1) begin
      failures++; $display("encode latency %0d, expected %0d", cycles, N + 1);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      cent[i] = (i % 50 == 49) ? cent[i-10] : $signed(16'($urandom));
      @(posedge clk);
      cent_we <= 1; cent_waddr <= SW'(i); cent_wdata <= VW'(cent[i]);
    end
    @(posedge clk) cent_we <= 0;
    for (int i = 0; i < 64; i++) begin
      dec_sym <= SW'(i * 7);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (int'(dec_val) != cent[i * 7 % N]) begin
        failures++; $display("decode %0d: got %0d exp %0d", i * 7 % N, dec_val, cent[i * 7 % N]);
      end
    end
    encode(-32768);
    encode(32767);
    encode(cent[49]);
    encode(cent[39]);
    for (int t = 0; t < 60; t++) encode($signed(16'($urandom)));
    for (int t = 0; t < 20; t++) encode(cent[$urandom % N]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
