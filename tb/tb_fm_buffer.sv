// tb_fm_buffer: fills both banks from the host port and reads them back;
// lets the engine read one bank while writing the other (both directions),
// checks the write priority engine > encoder > host on the same bank, and
// the one-cycle read latency of both read ports.
module tb_fm_buffer;
  localparam int unsigned DEPTH = 32768, SW = 9;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0;
  logic eng_bank = 0, eng_rd_en = 0, eng_wr_en = 0;
  logic [AW-1:0] eng_rd_addr = '0, eng_wr_addr = '0;
  logic [SW-1:0] eng_rd_data, eng_wr_data = '0;
  logic enc_wr_en = 0, enc_bank = 0;
  logic [AW-1:0] enc_wr_addr = '0;
  logic [SW-1:0] enc_wr_data = '0;
  logic host_wr_en = 0, host_wr_bank = 0, host_rd_bank = 0;
  logic [AW-1:0] host_wr_addr = '0, host_rd_addr = '0;
  logic [SW-1:0] host_wr_data = '0, host_rd_data;
  int checks = 0, failures = 0;
  logic [SW-1:0] model [2][int unsigned];

  always #5 clk = ~clk;

  fm_buffer #(.DEPTH(DEPTH), .SW(SW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_write(bit b, int unsigned a, logic [SW-1:0] d);
    @(posedge clk);
    host_wr_en <= 1; host_wr_bank <= b; host_wr_addr <= AW'(a); host_wr_data <= d;
    model[b][a] = d;
    @(posedge clk) host_wr_en <= 0;
  endtask

  task automatic host_check(bit b, int unsigned a);
    @(posedge clk);
    host_rd_bank <= b; host_rd_addr <= AW'(a);
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (host_rd_data != model[b][a]) begin
      failures++; $display("host read bank %0d addr %0d: got %0d exp %0d", b, a, host_rd_data, model[b][a]);
    end
  endtask

  task automatic engine_pass(bit src);
    // Read 200 words of bank src, write transformed words to bank !src.
    // In the same cycles the host and the encoder try to write the same
    // destination word: the engine must win.
    for (int i = 0; i < 200; i++) begin
      @(posedge clk);
      eng_bank <= src;
      eng_rd_en <= 1; eng_rd_addr <= AW'(i);
      eng_wr_en <= 1; eng_wr_addr <= AW'(1000 + i); eng_wr_data <= SW'(i * 5 + src);
      host_wr_en <= 1; host_wr_bank <= !src; host_wr_addr <= AW'(1000 + i); host_wr_data <= '1;
      enc_wr_en <= 1; enc_bank <= !src; enc_wr_addr <= AW'(1000 + i); enc_wr_data <= '0;
      model[!src][1000 + i] = SW'(i * 5 + src);
      @(negedge clk);
      if (i > 0) begin
        checks++;
        if (eng_rd_data != model[src][i - 1]) begin
          failures++; $display("engine read bank %0d addr %0d: got %0d exp %0d", src, i - 1, eng_rd_data, model[src][i - 1]);
        end
      end
    end
    @(posedge clk) begin eng_rd_en <= 0; eng_wr_en <= 0; host_wr_en <= 0; enc_wr_en <= 0; end
    for (int i = 0; i < 200; i += 7) host_check(!src, 1000 + i);
  endtask

  initial begin
    for (int i = 0; i < 600; i++) begin
      host_write(0, i, SW'($urandom));
      host_write(1, i, SW'($urandom));
    end
    host_write(0, DEPTH - 1, 9'h155);
    host_write(1, DEPTH - 1, 9'h0aa);
    for (int i = 0; i < 600; i += 3) begin
      host_check(0, i);
      host_check(1, i);
    end
    host_check(0, DEPTH - 1);
    host_check(1, DEPTH - 1);
    engine_pass(0);
    engine_pass(1);
    // Encoder beats host on the same bank.
    @(posedge clk);
    enc_wr_en <= 1; enc_bank <= 1; enc_wr_addr <= AW'(5); enc_wr_data <= 9'd77;
    host_wr_en <= 1; host_wr_bank <= 1; host_wr_addr <= AW'(5); host_wr_data <= 9'd99;
    model[1][5] = 9'd77;
    @(posedge clk) begin enc_wr_en <= 0; host_wr_en <= 0; end
    host_check(1, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
