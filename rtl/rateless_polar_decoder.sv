// rateless_polar_decoder: CRC-aided list decoder for rateless (nested) polar
// codes with a channel-aware decoding schedule.
//
// One codeword of length NMAX is decoded from whatever part of it has been
// received so far. Received LLRs stream into the circular IR-HARQ buffer
// (llr_harq_buffer), which leaves unsent positions at 0. The code and its
// schedule are loaded as tables: info_mask (all information positions of
// the nested code, copies included), msg_mask (the positions whose bits form
// the K-bit message, read in ascending index, CRC last), copy_next (copy
// sets as rings), the decoding schedule and its length. The copy rings can
// also be generated on chip from the I_p / I_q masks by the reverse mapping
// (copy_map_gen, started by map_start), and the schedule by the greedy
// channel-aware scheduler (sched_gen, started by sched_start): it treats the
// positions received so far (from rx_count, in the buffer's order) as
// erasure channels with probability sched_eps and the rest as punctured,
// writes the schedule table entry by entry and sets its length at
// sched_done. After a wrap every position counts as received once.
// start runs scl_core over the schedule; afterwards the L surviving paths are
// CRC-checked in parallel, one code position per cycle (NMAX cycles), and
// the first path in metric order that passes is output (dec_u, dec_pm,
// crc_ok = 1). If none passes, the best-metric path is output with
// crc_ok = 0. done pulses for one cycle with the result.
//
// Configuration port: cfg_we writes cfg_data into the table chosen by
// cfg_sel (polar_pkg::cfg_sel_e) at cfg_addr; masks take cfg_data[0].
// Tables should not be written while busy. Everything the tables hold is
// not generated on chip (nested construction, msg/info masks) is computed
// offline by the user.
// List size 8 and N_max = 1024 are the design's numbers; table layout, port
// protocol and the output selection order are this implementation's.
module rateless_polar_decoder
  import polar_pkg::*;
#(
  parameter int unsigned NMAX  = NMAX_DEF,
  parameter int unsigned NMIN  = NMIN_DEF,
  parameter int unsigned L     = LIST_DEF,
  parameter int unsigned W     = LLR_W_DEF,
  parameter int unsigned PM_W  = PM_W_DEF,
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned ZW    = Z_W_DEF,
  localparam int unsigned LOGN = $clog2(NMAX)
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration tables
  input  logic                cfg_we,
  input  logic [2:0]          cfg_sel,
  input  logic [LOGN-1:0]     cfg_addr,
  input  logic [LOGN:0]       cfg_data,
  input  logic                map_start,
  output logic                map_busy,
  output logic                map_done,
  input  logic                sched_start,
  input  logic [ZW-1:0]       sched_eps,
  output logic                sched_busy,
  output logic                sched_done,
  // received LLRs
  input  logic                llr_clear,
  input  logic                llr_valid,
  input  logic signed [W-1:0] llr_in,
  output logic [LOGN:0]       rx_count,
  output logic                llr_wrapped,
  // decoding
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic                crc_ok,
  output logic [NMAX-1:0]     dec_u,
  output logic [PM_W-1:0]     dec_pm
);

  // ---------------------------------------------------------------- tables
  logic [NMAX-1:0] info_mask, msg_mask, ip_mask, iq_mask;
  logic [LOGN-1:0] copy_tab  [NMAX];
  logic [LOGN-1:0] sched_tab [NMAX];
  logic [LOGN:0]   sched_len;

  logic            pair_valid;
  logic [LOGN-1:0] pair_p, pair_q;
  logic            g_valid;
  logic [LOGN-1:0] g_idx;
  logic [LOGN:0]   g_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      info_mask <= '0;
      msg_mask  <= '0;
      ip_mask   <= '0;
      iq_mask   <= '0;
      sched_len <= '0;
      g_cnt     <= '0;
      for (int i = 0; i < NMAX; i++) begin
        copy_tab[i]  <= LOGN'(i);
        sched_tab[i] <= '0;
      end
    end else begin
      if (cfg_we) begin
        unique case (cfg_sel_e'(cfg_sel))
          CFG_INFO:  info_mask[cfg_addr] <= cfg_data[0];
          CFG_MSG:   msg_mask[cfg_addr]  <= cfg_data[0];
          CFG_COPY:  copy_tab[cfg_addr]  <= cfg_data[LOGN-1:0];
          CFG_SCHED: sched_tab[cfg_addr] <= cfg_data[LOGN-1:0];
          CFG_LEN:   sched_len           <= cfg_data;
          CFG_IP:    ip_mask[cfg_addr]   <= cfg_data[0];
          CFG_IQ:    iq_mask[cfg_addr]   <= cfg_data[0];
          default: ;
        endcase
      end
      if (pair_valid) begin
        copy_tab[pair_p] <= pair_q;
        copy_tab[pair_q] <= pair_p;
      end
      if (sched_start && !sched_busy) g_cnt <= '0;
      if (g_valid) begin
        sched_tab[g_cnt[LOGN-1:0]] <= g_idx;
        g_cnt                      <= g_cnt + 1'b1;
      end
      if (sched_done) sched_len <= g_cnt;
    end
  end

  copy_map_gen #(.N(NMAX)) u_map (
    .clk, .rst_n, .start(map_start), .ip_mask, .iq_mask, .busy(map_busy),
    .pair_valid, .pair_p, .pair_q, .done(map_done)
  );

  // ---------------------------------------------------------------- scheduler
  // position p is received once the buffer's read-out counter has passed it
  logic [NMAX-1:0] rx_mask;
  logic [LOGN-1:0] g_copy_addr;
  always_comb begin
    for (int p = 0; p < NMAX; p++) begin
      automatic int unsigned k = (p >= NMAX - NMIN) ? p - (NMAX - NMIN) : NMAX - 1 - p;
      rx_mask[p] = (LOGN+1)'(k) < rx_count;
    end
  end

  sched_gen #(.N(NMAX), .ZW(ZW), .LANES(LANES)) u_sched (
    .clk, .rst_n, .start(sched_start), .info_mask, .rx_mask, .eps(sched_eps),
    .copy_addr(g_copy_addr), .copy_next(copy_tab[g_copy_addr]), .busy(sched_busy),
    .out_valid(g_valid), .out_idx(g_idx), .done(sched_done)
  );

  // ---------------------------------------------------------------- LLR buffer
  logic [LOGN-1:0]     ch_addr [2*LANES];
  logic signed [W-1:0] ch_llr  [2*LANES];

  llr_harq_buffer #(.NMAX(NMAX), .NMIN(NMIN), .W(W), .RP(2*LANES)) u_buf (
    .clk, .rst_n, .clear(llr_clear), .in_valid(llr_valid), .in_llr(llr_in),
    .rd_addr(ch_addr), .rd_data(ch_llr), .rx_count, .wrapped(llr_wrapped)
  );

  // ---------------------------------------------------------------- SCL core
  logic [LOGN-1:0] sched_addr, copy_addr;
  logic            core_start, core_done;
  logic [NMAX-1:0] u_hat [L];
  logic [PM_W-1:0] pm    [L];
  logic            path_active [L];
  scl_core #(.N(NMAX), .L(L), .W(W), .PM_W(PM_W), .LANES(LANES)) u_core (
    .clk, .rst_n, .start(core_start), .info_mask, .sched_len,
    .sched_addr, .sched_t(sched_tab[sched_addr]),
    .copy_addr, .copy_next(copy_tab[copy_addr]),
    .ch_addr, .ch_llr, .busy(), .done(core_done),
    .u_hat, .pm, .path_active, .known()
  );

  // ---------------------------------------------------------------- CRC + output
  typedef enum logic [1:0] {T_IDLE, T_DEC, T_CRC, T_SEL} top_state_e;
  top_state_e      tstate;
  logic [LOGN:0]   idx;
  logic            crc_clear, crc_en;
  logic            path_ok [L];

  assign core_start = (tstate == T_IDLE) && start;
  assign busy       = (tstate != T_IDLE);
  assign crc_clear  = core_start;
  assign crc_en     = (tstate == T_CRC) && msg_mask[idx[LOGN-1:0]];

  for (genvar q = 0; q < L; q++) begin : g_crc
    crc16_serial u_crc (
      .clk, .rst_n, .clear(crc_clear), .en(crc_en), .din(u_hat[q][idx[LOGN-1:0]]),
      .ok(path_ok[q]), .rem()
    );
  end

  logic [$clog2(L)-1:0] pick;
  logic        pick_ok;
  always_comb begin
    pick    = 0;
    pick_ok = 1'b0;
    for (int q = L - 1; q >= 0; q--)
      if (path_active[q] && path_ok[q]) begin
        pick    = ($clog2(L))'(q);
        pick_ok = 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate <= T_IDLE;
      idx    <= '0;
      done   <= 1'b0;
      crc_ok <= 1'b0;
      dec_u  <= '0;
      dec_pm <= '0;
    end else begin
      done <= 1'b0;
      unique case (tstate)
        T_IDLE: if (start) tstate <= T_DEC;
        T_DEC: if (core_done) begin
          idx    <= '0;
          tstate <= T_CRC;
        end
        T_CRC: begin
          if (idx == (LOGN+1)'(NMAX - 1)) tstate <= T_SEL;
          idx <= idx + 1'b1;
        end
        T_SEL: begin
          dec_u  <= u_hat[pick];
          dec_pm <= pm[pick];
          crc_ok <= pick_ok;
          done   <= 1'b1;
          tstate <= T_IDLE;
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end

endmodule
