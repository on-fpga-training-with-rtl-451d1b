// Ping-pong buffer: two banks of DEPTH words of WIDTH bits.
//
// The producer writes into the bank it owns (wr_en/wr_addr/wr_data) and hands
// it over with wr_commit; the consumer then reads it (rd_addr, rd_data one
// clock later) and returns it with rd_release. Each bank has a full flag: the
// producer may fill while wr_free is high, the consumer may read while rd_full
// is high. With two banks the producer fills one while the consumer works on
// the other, which is how the paper overlaps loading, computing and storing.
// The full-flag handover is this design's choice.
module pingpong_buffer #(
  parameter int WIDTH = 2048,
  parameter int DEPTH = 64,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             wr_commit,
  output logic             wr_free,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_full,
  input  logic             rd_release
);
  logic [WIDTH-1:0] mem [2*DEPTH];
  logic [1:0] full;
  logic wsel, rsel;

  assign wr_free = !full[wsel];
  assign rd_full = full[rsel];

  always_ff @(posedge clk) begin
    if (wr_en) mem[int'(wsel)*DEPTH + int'(wr_addr)] <= wr_data;
    rd_data <= mem[int'(rsel)*DEPTH + int'(rd_addr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      wsel <= 1'b0;
      rsel <= 1'b0;
    end else begin
      if (wr_commit) begin
        full[wsel] <= 1'b1;
        wsel       <= ~wsel;
      end
      if (rd_release) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
    end
  end

  // A bank is handed over only when it is owned by that side.
  assert property (@(posedge clk) disable iff (!rst_n) wr_commit |-> wr_free)
    else $error("pingpong_buffer: commit into a full bank");
  assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> rd_full)
    else $error("pingpong_buffer: release of an empty bank");
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> wr_free)
    else $error("pingpong_buffer: write into a full bank");
endmodule
