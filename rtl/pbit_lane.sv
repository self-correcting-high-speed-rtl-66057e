// Update lane of one physical p-bit.
//
// One physical p-bit is time-shared by N_LOCAL logical p-bits. The lane
// visits them in index order, one at a time, and for logical p-bit i
// (global index LANE_BASE+p):
//   1. accumulates I_i = h_i + sum_k W_ik * m(idx_ik) over its K_NBR
//      neighbour entries (unused entries carry weight 0),
//   2. scales by the inverse temperature: x = sat8((I_i * beta) >>> 4),
//   3. looks x up in the threshold table (bias_lut),
//   4. waits for the next certified sample j of its physical p-bit and
//      writes m_i = +1 if j <= c(x), else -1.
// The bias equation, the inverse temperature and the threshold decision
// follow the design. The sparse neighbour list, the index-ordered sweep,
// the Q4.4 beta, the saturation to 8 bits and the tables' organisation
// are this design's choices. Samples that arrive while the lane is
// computing are not used (the ADC stream cannot be stalled).
//
// Interface: start (pulse) runs 'sweeps' full passes over the N_LOCAL
// p-bits; busy is high meanwhile, done pulses at the end. flip pulses
// with each state write; clip pulses when x saturated. prog_* write the
// neighbour table (offset p*K_NBR+k, data {idx, w}), the bias table
// (offset p) and the threshold table (offset x, two's complement).
// Timing: K_NBR+4 clocks per p-bit update when a certified sample is
// waiting; more while the certifier rejects samples.
module pbit_lane
  import pbit_pkg::*;
#(
  parameter int N_LOCAL   = 16000,
  parameter int K_NBR     = K_NBR_DEF,
  parameter int IDX_BITS  = 16,
  parameter int LANE_BASE = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [31:0]          sweeps,
  input  logic [BETA_BITS-1:0] beta,
  output logic                 busy,
  output logic                 done,
  // certified sample stream
  input  sample_t              smp,
  input  logic                 smp_valid,
  // state memory port
  output logic [IDX_BITS-1:0]  st_raddr,
  input  logic                 st_rdata,
  output logic                 st_we,
  output logic [IDX_BITS-1:0]  st_waddr,
  output logic                 st_wdata,
  // events
  output logic                 flip,
  output logic                 clip,
  // table programming
  input  logic                 prog_nbr_we,
  input  logic                 prog_h_we,
  input  logic                 prog_lut_we,
  input  logic [23:0]          prog_addr,
  input  logic [31:0]          prog_data
);
  localparam int P_BITS = (N_LOCAL > 1) ? $clog2(N_LOCAL) : 1;
  localparam int A_BITS = (N_LOCAL * K_NBR > 1) ? $clog2(N_LOCAL * K_NBR) : 1;
  localparam int K_BITS = $clog2(K_NBR + 1);
  localparam int PROD_BITS = ACC_BITS + BETA_BITS + 1;

  typedef struct packed {
    logic [IDX_BITS-1:0] idx;
    weight_t             w;
  } nbr_t;

  typedef enum logic [2:0] {S_IDLE, S_ACC, S_SCALE, S_LUT, S_SAMPLE} state_e;
  state_e state;

  // Tables
  nbr_t   nbr_mem [N_LOCAL * K_NBR];
  hbias_t h_mem   [N_LOCAL];
  nbr_t   nbr_q;
  hbias_t h_q;

  logic [P_BITS-1:0] p;
  logic [K_BITS-1:0] k;
  logic              rd_valid;
  logic [31:0]       sweep_cnt;
  acc_t              acc;
  bi_t               bi_q;
  thr_t              thr;
  logic              m_pos;

  logic [A_BITS-1:0] nbr_raddr;
  always_comb nbr_raddr = A_BITS'(p * K_NBR + k);

  always_ff @(posedge clk) begin
    if (prog_nbr_we) nbr_mem[prog_addr[A_BITS-1:0]] <= nbr_t'(prog_data[IDX_BITS+W_BITS-1:0]);
    if (prog_h_we)   h_mem[prog_addr[P_BITS-1:0]]   <= hbias_t'(prog_data[H_BITS-1:0]);
    nbr_q <= nbr_mem[nbr_raddr];
    h_q   <= h_mem[p];
  end

  // beta*I with saturation to the table's input range
  acc_t                  total;
  logic signed [PROD_BITS-1:0] prod, scaled;
  bi_t                   bi_sat;
  logic                  sat;
  always_comb begin
    total  = acc + acc_t'(h_q);
    prod   = PROD_BITS'(total) * $signed({1'b0, beta});
    scaled = prod >>> BETA_FRAC;
    sat    = 1'b0;
    if (scaled > PROD_BITS'(2**(BI_BITS-1) - 1)) begin
      bi_sat = bi_t'(2**(BI_BITS-1) - 1);
      sat    = 1'b1;
    end else if (scaled < -PROD_BITS'(2**(BI_BITS-1))) begin
      bi_sat = bi_t'(-(2**(BI_BITS-1)));
      sat    = 1'b1;
    end else begin
      bi_sat = bi_t'(scaled);
    end
  end

  bias_lut #(.ADC_BITS(ADC_BITS), .IN_BITS(BI_BITS)) u_lut (
    .clk, .we(prog_lut_we), .waddr(prog_addr[BI_BITS-1:0]),
    .wdata(thr_t'(prog_data[THR_BITS-1:0])), .bi(bi_q), .thr
  );

  pbit_threshold #(.ADC_BITS(ADC_BITS)) u_thr (.sample(smp), .thr, .m_pos);

  always_comb begin
    st_raddr = nbr_q.idx;
    st_we    = (state == S_SAMPLE) && smp_valid;
    st_waddr = IDX_BITS'(LANE_BASE) + IDX_BITS'(p);
    st_wdata = m_pos;
    flip     = st_we;
    busy     = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      p         <= '0;
      k         <= '0;
      rd_valid  <= 1'b0;
      sweep_cnt <= '0;
      acc       <= '0;
      bi_q      <= '0;
      done      <= 1'b0;
      clip      <= 1'b0;
    end else begin
      done <= 1'b0;
      clip <= 1'b0;
      unique case (state)
        S_IDLE: if (start && sweeps != 0) begin
          p         <= '0;
          k         <= '0;
          acc       <= '0;
          rd_valid  <= 1'b0;
          sweep_cnt <= '0;
          state     <= S_ACC;
        end
        S_ACC: begin
          // read of entry k issued this cycle, entry k-1 arrives in nbr_q
          rd_valid <= (int'(k) < K_NBR);
          if (int'(k) < K_NBR) k <= k + 1'b1;
          if (rd_valid)
            acc <= st_rdata ? acc + acc_t'(nbr_q.w) : acc - acc_t'(nbr_q.w);
          if (int'(k) == K_NBR) state <= S_SCALE;
        end
        S_SCALE: begin
          bi_q  <= bi_sat;
          clip  <= sat;
          state <= S_LUT;
        end
        S_LUT: state <= S_SAMPLE;   // table read in flight
        S_SAMPLE: if (smp_valid) begin
          k        <= '0;
          acc      <= '0;
          rd_valid <= 1'b0;
          if (int'(p) == N_LOCAL - 1) begin
            p <= '0;
            if (sweep_cnt + 1 == sweeps) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              sweep_cnt <= sweep_cnt + 1;
              state     <= S_ACC;
            end
          end else begin
            p     <= p + 1'b1;
            state <= S_ACC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (LANE_BASE + N_LOCAL <= 2**IDX_BITS)
    else $error("IDX_BITS too small for LANE_BASE+N_LOCAL");
endmodule
