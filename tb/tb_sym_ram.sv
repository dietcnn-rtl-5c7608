// tb_sym_ram: writes random words at random addresses of the full-size filter
// memory (2,359,296 x 8 bits), including the first and last word, reads them
// back with one-cycle latency, and checks read-during-write returns the old
// word and that a read with re low holds rdata.
module tb_sym_ram;
  localparam int unsigned DEPTH = 512 * 512 * 9, W = 8;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  int unsigned addrs[$];
  logic [W-1:0] model [int unsigned];

  always #5 clk = ~clk;

  sym_ram #(.DEPTH(DEPTH), .WIDTH(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addrs.push_back(0);
    addrs.push_back(DEPTH - 1);
    for (int i = 0; i < 2000; i++) addrs.push_back($urandom % DEPTH);
    foreach (addrs[i]) begin
      logic [W-1:0] d;
      d = W'($urandom);
      model[addrs[i]] = d;
      @(posedge clk);
      we <= 1; waddr <= AW'(addrs[i]); wdata <= d;
    end
    @(posedge clk) we <= 0;
    foreach (addrs[i]) begin
      @(posedge clk);
      re <= 1; raddr <= AW'(addrs[i]);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (rdata != model[addrs[i]]) begin
        failures++; $display("read %0d: got %0h exp %0h", addrs[i], rdata, model[addrs[i]]);
      end
    end
    // Read during write of the same address returns the old word.
    @(posedge clk);
    re <= 1; raddr <= AW'(addrs[5]); we <= 1; waddr <= AW'(addrs[5]); wdata <= ~model[addrs[5]];
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (rdata != model[addrs[5]]) begin
      failures++; $display("read-during-write returned new data");
    end
    model[addrs[5]] = ~model[addrs[5]];
    // The next edge still reads addrs[5] (now the new word); then re drops.
    @(posedge clk) begin we <= 0; re <= 0; raddr <= AW'(addrs[6]); end
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (rdata != model[addrs[5]]) begin
      failures++; $display("rdata changed with re low");
    end
    @(posedge clk) begin re <= 1; raddr <= AW'(addrs[5]); end
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (rdata != model[addrs[5]]) begin
      failures++; $display("written word not read back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
