// PE3: outer product for the full-weight gradient,
//   dW(j1,i1,j2,i2,...,jd,id) = X(i1,...,id) * dY(j1,...,jd).
//
// The output gradient dY (second operand) is first read from DRAM into an
// on-chip cache of CACHE_DEPTH elements. Then, for every element j of dY and
// every 16-element chunk of X (first operand, read straight from DRAM, never
// cached), 16 multipliers form the products of the chunk with dY(j); each
// product is shifted by cmd.shift, rounded and saturated to 16 bits and the
// beat is written straight to DRAM. The destination follows the interleaved
// index order (j1,i1,...,jd,id): the beat address is the mixed-radix number of
// the digits (j1,i1,...,j_{d-1},i_{d-1},j_d, chunk of i_d) with radices
// (J1,I1,...,I_d/16), plus cmd.w_base. With cmd.accumulate the old beat is read
// back and the products are added to it (saturating), which accumulates the
// gradient over a batch. Only one beat is in flight at a time.
// Interface: start/busy/done, one DRAM read and one DRAM write port with the
// same handshakes as the load & store unit. The paper gives the 16-way
// parallelism along I_d, the cached second operand and the uncached output;
// the address order follows its formula for dW; the cache size, the batch
// accumulation by read-modify-write and the one-beat-at-a-time schedule are
// this design's choices.
module pe3
  import tt_pkg::*;
#(
  parameter int LANES       = C_LANES,
  parameter int CACHE_DEPTH = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pe3_cmd_t          cmd,
  output logic              busy,
  output logic              done,
  output logic              rd_req,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_ready,
  input  logic              rd_valid,
  input  beat_t             rd_data,
  output logic              wr_req,
  output logic [ADDR_W-1:0] wr_addr,
  output beat_t             wr_data,
  input  logic              wr_ready,
  output logic              res_valid,
  output act_t              res [LANES]
);
  localparam int CAW = $clog2(CACHE_DEPTH);
  localparam int ND  = 2 * MAX_D;     // interleaved digits j1,i1,...,jd,ic

  typedef enum logic [2:0] {P_IDLE, P_CREQ, P_RREQ, P_WRITE, P_DONE} pstate_t;
  pstate_t st;
  pe3_cmd_t c;

  act_t cache [CACHE_DEPTH];
  logic [31:0] n_j, n_ib, n_cb;        // dY elements, X beats, dY beats
  logic [31:0] cissue, crecv;          // cache fill counters
  logic [31:0] jl, il;                 // linear j and X-beat index
  logic [15:0] jdig [MAX_D];
  logic [15:0] idig [MAX_D];
  logic [31:0] wgt  [ND];
  logic [ADDR_W-1:0] dst;
  logic        got_x, x_req_done, w_req_done;
  beat_t       xbeat, wbeat, obeat;
  act_t        dyv;

  // radices in interleaved order, most significant first
  always_comb begin
    logic [31:0] acc;
    acc = 1;
    for (int k = ND - 1; k >= 0; k--) begin
      wgt[k] = acc;
      acc = acc * 32'((k % 2 == 0) ? c.jdim[k/2] : c.idim[k/2]);
    end
  end

  always_comb begin
    dst = c.w_base;
    for (int k = 0; k < MAX_D; k++)
      dst += ADDR_W'(jdig[k]) * wgt[2*k] + ADDR_W'(idig[k]) * wgt[2*k+1];
  end

  assign dyv = cache[CAW'(jl)];

  always_comb begin
    obeat = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [47:0] p;
      p = 48'(act_t'(xbeat[l*ACT_W +: ACT_W])) * 48'(dyv);
      p = 48'(requant(p, c.shift, 1'b0));
      if (c.accumulate) p = p + 48'(act_t'(wbeat[l*ACT_W +: ACT_W]));
      obeat[l*ACT_W +: ACT_W] = requant(p, '0, 1'b0);
    end
  end

  always_comb begin
    rd_req  = 1'b0;
    rd_addr = '0;
    if (st == P_CREQ && cissue < n_cb) begin
      rd_req = 1'b1; rd_addr = c.dy_base + cissue;
    end else if (st == P_RREQ && !x_req_done) begin
      rd_req = 1'b1; rd_addr = c.x_base + il;
    end else if (st == P_RREQ && c.accumulate && !w_req_done) begin
      rd_req = 1'b1; rd_addr = dst;
    end
  end

  assign wr_req  = (st == P_WRITE);
  assign wr_addr = dst;
  assign wr_data = obeat;
  assign busy    = (st != P_IDLE);
  assign res_valid = wr_req && wr_ready;
  always_comb for (int l = 0; l < LANES; l++) res[l] = act_t'(obeat[l*ACT_W +: ACT_W]);

  always_ff @(posedge clk) begin
    if (st == P_CREQ && rd_valid)
      for (int l = 0; l < LANES; l++)
        cache[CAW'(crecv * LANES + 32'(l))] <= act_t'(rd_data[l*ACT_W +: ACT_W]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; c <= '0; n_j <= '0; n_ib <= '0; n_cb <= '0; cissue <= '0; crecv <= '0;
      jl <= '0; il <= '0; got_x <= 1'b0; x_req_done <= 1'b0; w_req_done <= 1'b0;
      xbeat <= '0; wbeat <= '0; done <= 1'b0;
      for (int k = 0; k < MAX_D; k++) begin jdig[k] <= '0; idig[k] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (st)
        P_IDLE: if (start) begin
          logic [31:0] pj, pi;
          pj = 1; pi = 1;
          for (int k = 0; k < MAX_D; k++) begin
            pj = pj * 32'(cmd.jdim[k]);
            pi = pi * 32'(cmd.idim[k]);
          end
          c <= cmd; n_j <= pj; n_ib <= pi; n_cb <= pj / LANES;
          cissue <= '0; crecv <= '0; jl <= '0; il <= '0;
          for (int k = 0; k < MAX_D; k++) begin jdig[k] <= '0; idig[k] <= '0; end
          st <= (pj == 0 || pi == 0) ? P_DONE : P_CREQ;
        end
        P_CREQ: begin
          if (rd_req && rd_ready) cissue <= cissue + 1;
          if (rd_valid) begin
            crecv <= crecv + 1;
            if (crecv == n_cb - 1) begin
              st <= P_RREQ; x_req_done <= 1'b0; w_req_done <= 1'b0; got_x <= 1'b0;
            end
          end
        end
        P_RREQ: begin
          if (rd_req && rd_ready) begin
            if (!x_req_done) x_req_done <= 1'b1;
            else             w_req_done <= 1'b1;
          end
          if (rd_valid) begin
            if (!got_x) begin
              xbeat <= rd_data; got_x <= 1'b1;
              if (!c.accumulate) st <= P_WRITE;
            end else begin
              wbeat <= rd_data; st <= P_WRITE;
            end
          end
        end
        P_WRITE: if (wr_ready) begin
          x_req_done <= 1'b0; w_req_done <= 1'b0; got_x <= 1'b0;
          st <= P_RREQ;
          // advance i (inner) then j (outer), both as mixed-radix digits
          if (il == n_ib - 1) begin
            il <= '0;
            for (int k = 0; k < MAX_D; k++) idig[k] <= '0;
            if (jl == n_j - 1) st <= P_DONE;
            jl <= jl + 1;
            begin
              logic carry;
              carry = 1'b1;
              for (int k = MAX_D - 1; k >= 0; k--)
                if (carry) begin
                  if (jdig[k] == c.jdim[k] - 1) jdig[k] <= '0;
                  else begin jdig[k] <= jdig[k] + 1; carry = 1'b0; end
                end
            end
          end else begin
            logic carry;
            carry = 1'b1;
            il <= il + 1;
            for (int k = MAX_D - 1; k >= 0; k--)
              if (carry) begin
                if (idig[k] == c.idim[k] - 1) idig[k] <= '0;
                else begin idig[k] <= idig[k] + 1; carry = 1'b0; end
              end
          end
        end
        P_DONE: begin done <= 1'b1; st <= P_IDLE; end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
