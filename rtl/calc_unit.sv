// calc_unit -- calculation unit of the CGI reconstruction circuit.
//
// Reconstructs an IMG_W x IMG_H image from N_PAT object light intensities S_i
// with the divider-free differential ghost imaging formula
//   <O(x,y)> = <R_i> <S_i I_i(x,y)> - <S_i> <R_i I_i(x,y)>.
// A frame has four phases:
//   LOAD   S_i arrive on the s_* stream.  Each is written to the S memory and
//          added into the <S_i> register (mean_acc).  The N_PAT-th sample
//          reloads the pattern generator and starts CORR.
//   CORR   PASSES = IMG_W*IMG_H/NMOD passes.  Pass p covers pixels
//          p*NMOD .. p*NMOD+NMOD-1 (two image lines for 32x32 and 64 modules).
//          Each clock reads one S_i from the S memory and one NMOD-bit word
//          from the M-sequence generator and accumulates pattern i into the
//          NMOD calculation modules.  The generator steps once per clock, so
//          word p*N_PAT + i is pattern i's part for pass p; a host that drives
//          the projector must build its patterns in the same order.
//          Duration PASSES*N_PAT clocks (+1 pipeline clock).
//   DRAIN  The multiplexer copies every module's word of every pass into the
//          image RAM, one word per clock (IMG_W*IMG_H clocks).
//   OUT    For each pixel in raster order: read the image RAM and the host's
//          <R_i I(x,y)> table, combine with <R_i> and <S_i> (dgi_combine),
//          and offer the (1,19,12) result on o_* until o_ready.
// Then the unit returns to LOAD.  `calc_cycles` holds the length of the last
// CORR+DRAIN phase.  <R_i> and the table are written by the host at any time
// and keep their values across frames.
//
// The phase order, the parallel calculator, the RAM, table, registers and
// widths follow the published design; the pass order of patterns, the
// drain-after-all-passes copy, the valid/ready handshakes and reset values
// are this design's choices.  N_PAT must be a power of two (the averages
// divide by shifting) and NMOD must divide IMG_W*IMG_H.
// Lint reports rst_n as used both asynchronously and synchronously: the
// synchronous use is only the `disable iff` of the handshake assertion.
module calc_unit #(
  parameter int N_PAT = 16384,
  parameter int IMG_W = 32,
  parameter int IMG_H = 32,
  parameter int NMOD  = 64,
  parameter logic [cgi_pkg::LFSR_LEN-1:0] SEED = 71'h2A_5AC3_C30F_0F12_34AB,
  localparam int NPIX   = IMG_W * IMG_H,
  localparam int PXW    = $clog2(NPIX)
) (
  input  logic             clk,
  input  logic             rst_n,
  // <R_i> register
  input  logic             r_avg_we,
  input  cgi_pkg::ravg_t   r_avg_wdata,
  // <R_i I(x,y)> table write port
  input  logic             tab_we,
  input  logic [PXW-1:0]   tab_waddr,
  input  cgi_pkg::avg_t    tab_wdata,
  // object light intensities
  input  logic             s_valid,
  input  cgi_pkg::sample_t s_data,
  output logic             s_ready,
  // reconstructed pixels
  output logic             o_valid,
  output cgi_pkg::pix_t    o_data,
  output logic [PXW-1:0]   o_pix,
  input  logic             o_ready,
  output logic             busy,
  output logic [31:0]      calc_cycles
);
  import cgi_pkg::*;

  localparam int LOG2_N = $clog2(N_PAT);
  localparam int PASSES = NPIX / NMOD;
  localparam int NA     = (N_PAT > 1) ? $clog2(N_PAT) : 1;
  localparam int PW     = (PASSES > 1) ? $clog2(PASSES) : 1;
  localparam int MW     = (NMOD > 1) ? $clog2(NMOD) : 1;

  initial begin
    assert (N_PAT == (1 << LOG2_N)) else $error("calc_unit: N_PAT must be a power of two");
    assert (PASSES * NMOD == NPIX)  else $error("calc_unit: NMOD must divide IMG_W*IMG_H");
  end

  typedef enum logic [2:0] {ST_LOAD, ST_CORR, ST_DRAIN, ST_OUT_RD, ST_OUT_CALC, ST_OUT_SEND} state_e;
  state_e state;

  // ---------------------------------------------------------------- registers
  ravg_t          r_avg;
  logic [NA-1:0]  s_cnt;        // LOAD: samples received
  logic [NA-1:0]  i_cnt;        // CORR: pattern index being issued
  logic [PW-1:0]  p_cnt;        // CORR: pass being issued
  logic           issue_done;
  logic           v1;           // CORR stage 1: S_i read data valid
  logic           clr1, last1;
  logic [PW-1:0]  p1;
  logic [PW-1:0]  dp;           // DRAIN: pass
  logic [MW-1:0]  dm;           // DRAIN: module
  logic [PXW-1:0] pix;          // OUT: pixel

  // ---------------------------------------------------------------- datapath
  logic           s_fire;
  logic           lfsr_load;
  logic [NMOD-1:0] pattern;
  sample_t        s_q;
  avg_t           s_avg, sia, img_q, tab_q;
  logic [PW-1:0]  pc_addr;
  logic           img_we;
  logic [PXW-1:0] img_waddr;
  pix_t           o_comb;

  assign s_ready   = (state == ST_LOAD);
  assign s_fire    = s_valid && s_ready;
  assign lfsr_load = s_fire && (s_cnt == NA'(N_PAT - 1));
  assign busy      = (state != ST_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        r_avg <= '0;
    else if (r_avg_we) r_avg <= r_avg_wdata;
  end

  sdp_ram #(.DEPTH(N_PAT), .WIDTH(S_W)) u_smem (
    .clk(clk), .we(s_fire), .waddr(s_cnt), .wdata(s_data),
    .raddr(i_cnt), .rdata(s_q)
  );

  mean_acc #(.LOG2_N(LOG2_N)) u_smean (
    .clk(clk), .rst_n(rst_n),
    .clr(state == ST_OUT_SEND && o_ready && pix == PXW'(NPIX - 1)),
    .en(s_fire), .s(s_data), .avg(s_avg)
  );

  mseq_lfsr #(.STEP(NMOD), .SEED(SEED)) u_rng (
    .clk(clk), .rst_n(rst_n), .load(lfsr_load), .step(v1), .pattern(pattern)
  );

  assign pc_addr = (state == ST_DRAIN) ? dp : p1;

  parallel_calc #(.NMOD(NMOD), .PASSES(PASSES), .LOG2_N(LOG2_N)) u_pc (
    .clk(clk), .en(v1), .clr(clr1), .addr(pc_addr), .s(s_q),
    .pattern(pattern), .sel(dm), .sia(sia)
  );

  assign img_we    = (state == ST_DRAIN);
  assign img_waddr = PXW'({dp, dm});

  sdp_ram #(.DEPTH(NPIX), .WIDTH(AVG_W)) u_img (
    .clk(clk), .we(img_we), .waddr(img_waddr), .wdata(sia),
    .raddr(pix), .rdata(img_q)
  );

  sdp_ram #(.DEPTH(NPIX), .WIDTH(AVG_W)) u_tab (
    .clk(clk), .we(tab_we), .waddr(tab_waddr), .wdata(tab_wdata),
    .raddr(pix), .rdata(tab_q)
  );

  dgi_combine u_out (
    .r_avg(r_avg), .sia(img_q), .s_avg(s_avg), .ria(tab_q), .o(o_comb)
  );

  assign o_pix = pix;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ST_LOAD;
      s_cnt       <= '0;
      i_cnt       <= '0;
      p_cnt       <= '0;
      issue_done  <= 1'b0;
      v1          <= 1'b0;
      clr1        <= 1'b0;
      last1       <= 1'b0;
      p1          <= '0;
      dp          <= '0;
      dm          <= '0;
      pix         <= '0;
      o_valid     <= 1'b0;
      o_data      <= '0;
      calc_cycles <= '0;
    end else begin
      v1 <= 1'b0;
      unique case (state)
        ST_LOAD: begin
          if (s_fire) begin
            s_cnt <= s_cnt + 1'b1;
            if (lfsr_load) begin
              state       <= ST_CORR;
              s_cnt       <= '0;
              i_cnt       <= '0;
              p_cnt       <= '0;
              issue_done  <= 1'b0;
              calc_cycles <= '0;
            end
          end
        end

        ST_CORR: begin
          calc_cycles <= calc_cycles + 1'b1;
          // stage 0: S memory read address i_cnt is issued this clock
          if (!issue_done) begin
            v1    <= 1'b1;
            clr1  <= (i_cnt == '0);
            p1    <= p_cnt;
            last1 <= (i_cnt == NA'(N_PAT - 1)) && (p_cnt == PW'(PASSES - 1));
            i_cnt <= i_cnt + 1'b1;
            if (i_cnt == NA'(N_PAT - 1)) begin
              i_cnt <= '0;
              p_cnt <= p_cnt + 1'b1;
              if (p_cnt == PW'(PASSES - 1)) issue_done <= 1'b1;
            end
          end
          // stage 1 accumulates (parallel_calc.en = v1); finish after the last
          if (v1 && last1) begin
            state <= ST_DRAIN;
            dp    <= '0;
            dm    <= '0;
          end
        end

        ST_DRAIN: begin
          calc_cycles <= calc_cycles + 1'b1;
          dm <= dm + 1'b1;
          if (dm == MW'(NMOD - 1)) begin
            dm <= '0;
            dp <= dp + 1'b1;
            if (dp == PW'(PASSES - 1)) begin
              state <= ST_OUT_RD;
              pix   <= '0;
            end
          end
        end

        ST_OUT_RD: state <= ST_OUT_CALC;

        ST_OUT_CALC: begin
          o_data  <= o_comb;
          o_valid <= 1'b1;
          state   <= ST_OUT_SEND;
        end

        ST_OUT_SEND: begin
          if (o_ready) begin
            o_valid <= 1'b0;
            if (pix == PXW'(NPIX - 1)) begin
              state <= ST_LOAD;
            end else begin
              pix   <= pix + 1'b1;
              state <= ST_OUT_RD;
            end
          end
        end

        default: state <= ST_LOAD;
      endcase
    end
  end

  // An offered pixel stays put until it is taken.
  a_o_stable: assert property (@(posedge clk) disable iff (!rst_n)
    o_valid && !o_ready |=> o_valid && $stable(o_data) && $stable(o_pix));

endmodule
