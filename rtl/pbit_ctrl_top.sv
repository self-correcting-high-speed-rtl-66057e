// Digital control unit of the opto-electronic probabilistic computer.
//
// LANES physical p-bits, each an optical difference measurement with a
// certification (sum) channel, arrive here as pairs of ADC samples. Per
// physical p-bit a certifier drops samples whose certification value is
// below n_min, and an update lane time-shares the certified samples over
// N_PBITS/LANES logical p-bits: for each it forms I = sum W m + h from a
// sparse neighbour list, scales it by the inverse temperature beta, maps
// beta*I to a digital threshold and compares the next sample with it.
// All logical states live in one shared state memory. The split into
// physical p-bits feeding many logical p-bits, the certification, the
// bias equation and the threshold decision follow the design; the host
// port, address map, tables and sweep control are this design's choices.
//
// Host port: host_req.we writes, host_req.re reads (host_rdata one clock
// later). addr[31:28] region (pbit_pkg::region_e), addr[27:24] lane,
// addr[23:0] offset. Writing CR_START runs 'sweeps' passes over all
// logical p-bits on every lane; busy is high until all lanes are done.
// Tables and states should only be written while not busy.
// Timing: K_NBR+4 clocks per logical p-bit update per lane when
// certified samples are available; LANES updates proceed in parallel.
module pbit_ctrl_top
  import pbit_pkg::*;
#(
  parameter int N_PBITS = N_PBITS_DEF,
  parameter int LANES   = LANES_DEF,
  parameter int K_NBR   = K_NBR_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  // ADC samples of each physical p-bit
  input  sample_t     adc_diff  [LANES],
  input  sample_t     adc_sum   [LANES],
  input  logic        adc_valid [LANES],
  // host access
  input  host_req_t   host_req,
  output logic [31:0] host_rdata,
  // status and monitors
  output logic        busy,
  output logic        done,
  output logic [31:0] flip_cnt,
  output logic        lane_flip [LANES],
  output sample_t     lane_smp  [LANES]
);
  localparam int N_LOCAL  = N_PBITS / LANES;
  localparam int IDX_BITS = (N_PBITS > 1) ? $clog2(N_PBITS) : 1;

  // ---------------- host decode ----------------
  logic [3:0]  h_region, h_lane;
  logic [23:0] h_off;
  always_comb begin
    h_region = host_req.addr[31:28];
    h_lane   = host_req.addr[27:24];
    h_off    = host_req.addr[23:0];
  end

  logic [BETA_BITS-1:0] beta;
  sample_t              n_min;
  logic [31:0]          sweeps;
  logic                 start;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beta   <= BETA_BITS'(1 << BETA_FRAC);  // beta = 1.0
      n_min  <= '0;
      sweeps <= 32'd1;
      start  <= 1'b0;
    end else begin
      start <= 1'b0;
      if (host_req.we && h_region == REG_CTRL) begin
        case (h_off)
          CR_START:  start  <= !busy;
          CR_BETA:   beta   <= host_req.wdata[BETA_BITS-1:0];
          CR_NMIN:   n_min  <= host_req.wdata[ADC_BITS-1:0];
          CR_SWEEPS: sweeps <= host_req.wdata;
          default: ;
        endcase
      end
    end
  end

  // ---------------- lanes ----------------
  logic                cert_valid [LANES];
  sample_t             cert_smp   [LANES];
  logic [31:0]         acc_cnt    [LANES];
  logic [31:0]         rej_cnt    [LANES];
  logic [IDX_BITS-1:0] st_raddr   [LANES];
  logic                st_rdata   [LANES];
  logic                st_we      [LANES];
  logic [IDX_BITS-1:0] st_waddr   [LANES];
  logic                st_wdata   [LANES];
  logic                l_busy     [LANES];
  logic                l_clip     [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic sel;
    always_comb sel = host_req.we && (int'(h_lane) == l);

    sdi_certifier #(.ADC_BITS(ADC_BITS), .CNT_BITS(32)) u_cert (
      .clk, .rst_n, .clr(start),
      .diff_sample(adc_diff[l]), .cert_sample(adc_sum[l]), .in_valid(adc_valid[l]),
      .n_min, .out_sample(cert_smp[l]), .out_valid(cert_valid[l]),
      .accept_cnt(acc_cnt[l]), .reject_cnt(rej_cnt[l])
    );

    pbit_lane #(.N_LOCAL(N_LOCAL), .K_NBR(K_NBR), .IDX_BITS(IDX_BITS),
                .LANE_BASE(l * N_LOCAL)) u_lane (
      .clk, .rst_n, .start, .sweeps, .beta,
      .busy(l_busy[l]), .done(),
      .smp(cert_smp[l]), .smp_valid(cert_valid[l]),
      .st_raddr(st_raddr[l]), .st_rdata(st_rdata[l]),
      .st_we(st_we[l]), .st_waddr(st_waddr[l]), .st_wdata(st_wdata[l]),
      .flip(lane_flip[l]), .clip(l_clip[l]),
      .prog_nbr_we(sel && h_region == REG_NBR),
      .prog_h_we  (sel && h_region == REG_BIAS),
      .prog_lut_we(sel && h_region == REG_LUT),
      .prog_addr(h_off), .prog_data(host_req.wdata)
    );

    always_comb lane_smp[l] = cert_smp[l];
  end

  // ---------------- state memory ----------------
  logic st_host_rdata;
  state_mem #(.N_PBITS(N_PBITS), .LANES(LANES), .IDX_BITS(IDX_BITS)) u_state (
    .clk,
    .rd_addr(st_raddr), .rd_data(st_rdata),
    .wr_en(st_we), .wr_addr(st_waddr), .wr_data(st_wdata),
    .host_we(host_req.we && h_region == REG_STATE),
    .host_re(host_req.re && h_region == REG_STATE),
    .host_addr(IDX_BITS'(h_off)), .host_wdata(host_req.wdata[0]),
    .host_rdata(st_host_rdata)
  );

  // ---------------- status, counters, read-back ----------------
  logic any_busy, started;
  always_comb begin
    any_busy = 1'b0;
    for (int l = 0; l < LANES; l++) any_busy |= l_busy[l];
    busy = any_busy || start;
  end

  logic [$clog2(LANES+1)-1:0] n_flips, n_clips;
  always_comb begin
    n_flips = '0;
    n_clips = '0;
    for (int l = 0; l < LANES; l++) begin
      n_flips += lane_flip[l];
      n_clips += l_clip[l];
    end
  end

  logic [31:0] clip_cnt;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      flip_cnt <= '0;
      clip_cnt <= '0;
      started  <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        flip_cnt <= '0;
        clip_cnt <= '0;
        started  <= 1'b1;
      end else begin
        flip_cnt <= flip_cnt + 32'(n_flips);
        clip_cnt <= clip_cnt + 32'(n_clips);
        if (started && !any_busy) begin
          started <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  // per-lane counters selected by addr[27:24]
  logic [31:0] lane_rej, lane_acc;
  always_comb begin
    lane_rej = '0;
    lane_acc = '0;
    for (int l = 0; l < LANES; l++)
      if (int'(h_lane) == l) begin
        lane_rej = rej_cnt[l];
        lane_acc = acc_cnt[l];
      end
  end

  logic        rd_state_q;
  logic [31:0] rd_reg_q;
  always_ff @(posedge clk) begin
    rd_state_q <= (h_region == REG_STATE);
    if (host_req.re) begin
      case (h_off)
        CR_STATUS: rd_reg_q <= {30'd0, done, busy};
        CR_FLIPS:  rd_reg_q <= flip_cnt;
        CR_REJ:    rd_reg_q <= lane_rej;
        CR_ACC:    rd_reg_q <= lane_acc;
        CR_BETA:   rd_reg_q <= 32'(beta);
        CR_NMIN:   rd_reg_q <= 32'(n_min);
        CR_SWEEPS: rd_reg_q <= sweeps;
        CR_CLIPS:  rd_reg_q <= clip_cnt;
        default:   rd_reg_q <= '0;
      endcase
    end
  end
  always_comb host_rdata = rd_state_q ? {31'd0, st_host_rdata} : rd_reg_q;

  initial assert (N_PBITS % LANES == 0) else $error("N_PBITS must be a multiple of LANES");
endmodule
