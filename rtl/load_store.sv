// Load & store unit of one PE column (PE1 or PE2).
//
// Load channel: on ld_start it takes an xfer_t command, waits for a free bank
// of the input ping-pong buffer, reads cmd.words buffer words from DRAM, each
// assembled from cmd.beats 256-bit beats (beat p of word w at DRAM beat address
// base + w*wstride + p*pstride), writes them to buffer addresses 0.. and
// commits the bank. Read requests are issued back to back while the DRAM
// accepts them (rd_req/rd_ready); read data returns in order with rd_valid.
// Store channel: on st_start it waits for a filled output bank, reads its
// cmd.words words and writes their beats to DRAM at the same strided addresses
// (wr_req held with address and data until wr_ready), then releases the bank.
// ld_busy/st_busy are high from the start pulse until the channel is idle again.
// The two channels run independently, so a slice can be loaded while results
// are stored. The strided address pattern and the handshakes are this design's
// choices; the paper only names the unit and its three-step use.
module load_store
  import tt_pkg::*;
#(
  parameter int LD_P     = P_LANES,   // beats per input buffer word
  parameter int ST_P     = P_LANES,   // beats per output buffer word
  parameter int IN_DEPTH = 64,
  parameter int OUT_DEPTH = 1,
  localparam int IAW = (IN_DEPTH > 1) ? $clog2(IN_DEPTH) : 1,
  localparam int OAW = (OUT_DEPTH > 1) ? $clog2(OUT_DEPTH) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // commands
  input  logic                     ld_start,
  input  xfer_t                    ld_cmd,
  output logic                     ld_busy,
  input  logic                     st_start,
  input  xfer_t                    st_cmd,
  output logic                     st_busy,
  // DRAM read port
  output logic                     rd_req,
  output logic [ADDR_W-1:0]        rd_addr,
  input  logic                     rd_ready,
  input  logic                     rd_valid,
  input  beat_t                    rd_data,
  // DRAM write port
  output logic                     wr_req,
  output logic [ADDR_W-1:0]        wr_addr,
  output beat_t                    wr_data,
  input  logic                     wr_ready,
  // input ping-pong buffer, producer side
  output logic                     ib_wr_en,
  output logic [IAW-1:0]           ib_wr_addr,
  output logic [LD_P*BEAT_W-1:0]   ib_wr_data,
  output logic                     ib_wr_commit,
  input  logic                     ib_wr_free,
  // output ping-pong buffer, consumer side
  output logic [OAW-1:0]           ob_rd_addr,
  input  logic [ST_P*BEAT_W-1:0]   ob_rd_data,
  input  logic                     ob_rd_full,
  output logic                     ob_rd_release
);
  // ---------------- load channel ----------------
  typedef enum logic [1:0] {L_IDLE, L_WAIT, L_RUN, L_COMMIT} lstate_t;
  lstate_t lst;
  xfer_t   lc;
  logic [15:0] iw, rw;       // issue / receive word
  logic [3:0]  ip, rp;       // issue / receive beat
  logic        issued_all;
  logic [LD_P*BEAT_W-1:0] lstage;

  assign ld_busy = (lst != L_IDLE);
  assign rd_req  = (lst == L_RUN) && !issued_all;
  assign rd_addr = lc.base + ADDR_W'(iw) * lc.wstride + ADDR_W'(ip) * lc.pstride;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst <= L_IDLE; lc <= '0; iw <= '0; ip <= '0; rw <= '0; rp <= '0;
      issued_all <= 1'b0; lstage <= '0;
      ib_wr_en <= 1'b0; ib_wr_addr <= '0; ib_wr_data <= '0; ib_wr_commit <= 1'b0;
    end else begin
      ib_wr_en     <= 1'b0;
      ib_wr_commit <= 1'b0;
      unique case (lst)
        L_IDLE: if (ld_start) begin
          lc <= ld_cmd; iw <= '0; ip <= '0; rw <= '0; rp <= '0;
          issued_all <= (ld_cmd.words == 0);
          lst <= L_WAIT;
        end
        L_WAIT: if (ib_wr_free) lst <= (lc.words == 0) ? L_COMMIT : L_RUN;
        L_RUN: begin
          if (rd_req && rd_ready) begin
            if (ip == lc.beats - 1) begin
              ip <= '0;
              iw <= iw + 1;
              if (iw == lc.words - 1) issued_all <= 1'b1;
            end else ip <= ip + 1;
          end
          if (rd_valid) begin
            lstage[int'(rp)*BEAT_W +: BEAT_W] <= rd_data;
            if (rp == lc.beats - 1) begin
              rp <= '0;
              rw <= rw + 1;
              ib_wr_en   <= 1'b1;
              ib_wr_addr <= IAW'(rw);
              ib_wr_data <= lstage;
              ib_wr_data[int'(rp)*BEAT_W +: BEAT_W] <= rd_data;
              if (rw == lc.words - 1) lst <= L_COMMIT;
            end else rp <= rp + 1;
          end
        end
        L_COMMIT: begin
          ib_wr_commit <= 1'b1;
          lst <= L_IDLE;
        end
        default: lst <= L_IDLE;
      endcase
    end
  end

  // ---------------- store channel ----------------
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_READ, S_LATCH, S_WRITE, S_REL} sstate_t;
  sstate_t sst;
  xfer_t   sc;
  logic [15:0] sw;
  logic [3:0]  sp;
  logic [ST_P*BEAT_W-1:0] sstage;

  assign st_busy   = (sst != S_IDLE);
  assign wr_req    = (sst == S_WRITE);
  assign wr_addr   = sc.base + ADDR_W'(sw) * sc.wstride + ADDR_W'(sp) * sc.pstride;
  assign wr_data   = sstage[int'(sp)*BEAT_W +: BEAT_W];
  assign ob_rd_addr = OAW'(sw);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sst <= S_IDLE; sc <= '0; sw <= '0; sp <= '0; sstage <= '0; ob_rd_release <= 1'b0;
    end else begin
      ob_rd_release <= 1'b0;
      unique case (sst)
        S_IDLE: if (st_start) begin
          sc <= st_cmd; sw <= '0; sp <= '0;
          sst <= S_WAIT;
        end
        S_WAIT:  if (ob_rd_full) sst <= (sc.words == 0) ? S_REL : S_READ;
        S_READ:  sst <= S_LATCH;              // buffer read latency
        S_LATCH: begin sstage <= ob_rd_data; sst <= S_WRITE; end
        S_WRITE: if (wr_ready) begin
          if (sp == sc.beats - 1) begin
            sp <= '0;
            if (sw == sc.words - 1) sst <= S_REL;
            else begin sw <= sw + 1; sst <= S_READ; end
          end else sp <= sp + 1;
        end
        S_REL: begin ob_rd_release <= 1'b1; sst <= S_IDLE; end
        default: sst <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (rd_req && !rd_ready) |=> (rd_req && $stable(rd_addr)))
    else $error("load_store: read request dropped before it was accepted");
  assert property (@(posedge clk) disable iff (!rst_n) (wr_req && !wr_ready) |=> (wr_req && $stable(wr_addr) && $stable(wr_data)))
    else $error("load_store: write request changed before it was accepted");
endmodule
