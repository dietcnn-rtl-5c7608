// fm_buffer: the two feature-map banks ("ping-pong") that hold the symbolic
// input and output of a layer.  A layer reads every input symbol from one bank
// and writes its output symbols into the other; the next layer swaps them.
// Symbols are stored channel-major: addr = (channel*H + y)*W + x.
//
// Each bank is a one-write, one-read memory (sym_ram).  Write priority:
// layer engine, then the pixel encoder, then the host.  The engine reads the
// bank it was started on; while it is idle the host read port addresses either
// bank.  Reads return data one cycle after the request.
// The paper only says that feature maps are symbols; the double-buffered
// organisation, the layout and the arbitration are this design's choices.
module fm_buffer #(
  parameter int unsigned DEPTH = dietcnn_pkg::FM_DEPTH,
  parameter int unsigned SW    = dietcnn_pkg::SYM_W,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  // layer engine
  input  logic          eng_bank,      // bank the engine reads; it writes !eng_bank
  input  logic          eng_rd_en,
  input  logic [AW-1:0] eng_rd_addr,
  output logic [SW-1:0] eng_rd_data,
  input  logic          eng_wr_en,
  input  logic [AW-1:0] eng_wr_addr,
  input  logic [SW-1:0] eng_wr_data,
  // pixel encoder
  input  logic          enc_wr_en,
  input  logic          enc_bank,
  input  logic [AW-1:0] enc_wr_addr,
  input  logic [SW-1:0] enc_wr_data,
  // host
  input  logic          host_wr_en,
  input  logic          host_wr_bank,
  input  logic [AW-1:0] host_wr_addr,
  input  logic [SW-1:0] host_wr_data,
  input  logic          host_rd_bank,
  input  logic [AW-1:0] host_rd_addr,
  output logic [SW-1:0] host_rd_data
);
  logic          we    [2];
  logic [AW-1:0] waddr [2];
  logic [SW-1:0] wdata [2];
  logic          re    [2];
  logic [AW-1:0] raddr [2];
  logic [SW-1:0] rdata [2];
  logic          eng_bank_q, host_bank_q;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    always_comb begin
      if (eng_wr_en && (!eng_bank == 1'(b))) begin
        we[b] = 1'b1;  waddr[b] = eng_wr_addr;  wdata[b] = eng_wr_data;
      end else if (enc_wr_en && enc_bank == 1'(b)) begin
        we[b] = 1'b1;  waddr[b] = enc_wr_addr;  wdata[b] = enc_wr_data;
      end else begin
        we[b] = host_wr_en && host_wr_bank == 1'(b);
        waddr[b] = host_wr_addr;  wdata[b] = host_wr_data;
      end
      if (eng_rd_en && eng_bank == 1'(b)) begin
        re[b] = 1'b1;  raddr[b] = eng_rd_addr;
      end else begin
        re[b] = host_rd_bank == 1'(b);  raddr[b] = host_rd_addr;
      end
    end

    sym_ram #(.DEPTH(DEPTH), .WIDTH(SW)) u_bank (
      .clk, .we(we[b]), .waddr(waddr[b]), .wdata(wdata[b]),
      .re(re[b]), .raddr(raddr[b]), .rdata(rdata[b])
    );
  end

  always_ff @(posedge clk) begin
    eng_bank_q  <= eng_bank;
    host_bank_q <= host_rd_bank;
  end

  assign eng_rd_data  = rdata[eng_bank_q];
  assign host_rd_data = rdata[host_bank_q];
endmodule
