// ahcq_controller: configuration registers and sequencer of the accelerator.
//
// The paper names a controller block but does not describe it; this one is
// the simplest sequencer that runs one "tile": LANES output channels of one
// token of a linear layer (or of a score x Value product for LNQ).
//   COMPUTE  reads one IA word and one weight word per cycle for n_beats
//            beats. A beat counter and a group counter track the CAG groups
//            along the reduction (input channels are stored group by group,
//            grp_beats[g] beats each); the group counter selects the zero point
//            fed to the PE array and ends each group's partial reduction, which
//            the reorder buffer captures as one row. This is the paper's
//            "counter-based logic for parameter switching". HLUQ and LNQ use a
//            single group.
//   WAIT     lets the last capture land.
//   DRAIN    walks the reorder buffer lane by lane (and group by group within
//            a lane), reading the channel's weight scale alongside.
//   FLUSH    waits until all LANES results are written to the output buffer.
// Register map (cfg_we/cfg_addr/cfg_wdata, written at the clock edge):
//   0x00 mm_mode   0x01 n_beats  0x02 n_groups  0x03 label_bits
//   0x04 ia_base   0x05 w_base   0x06 tile_base 0x07 act_mode
//   0x08 q_mode    0x09 lut_page 0x0A s1 (Q8.24) 0x0B s2 (Q8.24)
//   0x0C 1/s1 (Q16.16) 0x0D 1/s2 (Q16.16), both of the output quantizer
//   0x10..0x13 grp_beats[0..3]   0x14..0x16 output group boundaries[0..2]
//   0x17 output group count      0x18 output HLUQ n  0x19 output HLUQ s1 (Q8.24)
//   0x1A Softmax pass (0 whole row, 1 first statistics tile, 2 next, 3 normalise)
//   0x20..0x2E LNQ thresholds for codes 1..15
// (0x40..0x4F belong to the parameter banks in the quantization processor.)
// start is taken in IDLE only; done pulses for one cycle at the end; busy is
// high from start to done.
module ahcq_controller
  import ahcq_pkg::*;
#(
  parameter int unsigned LANES = 128,
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          cfg_we,
  input  logic [7:0]                    cfg_addr,
  input  logic [31:0]                   cfg_wdata,
  output cfg_t                          cfg,
  output logic [2:0][CH_W-1:0]          out_bound,
  output logic [NCODES-2:0][FX_W-1:0]   thr,
  // run control
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // operand buffers
  output logic                          ia_re,
  output logic [15:0]                   ia_raddr,
  output logic                          w_re,
  output logic [15:0]                   w_raddr,
  // PE array beat tags (aligned with the buffers' read data)
  output logic                          core_valid,
  output logic                          core_first,
  output logic                          core_last,
  output logic [1:0]                    core_g,
  input  logic                          core_done,
  // reorder buffer
  output logic                          cap_valid,
  output logic [1:0]                    cap_g,
  output logic                          rd_en,
  output logic [LW-1:0]                 rd_lane,
  output logic [1:0]                    rd_g,
  output logic                          rd_first,
  output logic                          rd_last,
  output logic                          ws_re,
  output logic [CH_W-1:0]               ws_raddr,
  // results written to the output buffer
  input  logic                          res_valid,
  // statistics
  output logic                          grp_switch     // a beat that ends a non-final CAG group
);

  typedef enum logic [2:0] {S_IDLE, S_COMPUTE, S_WAIT, S_DRAIN, S_FLUSH} state_e;
  state_e state;

  logic [15:0]      grp_beats [NGROUPS];

  // ---------------- configuration registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg         <= '0;
      cfg.n_groups     <= 3'd1;
      cfg.label_bits   <= 2'd1;
      cfg.out_n_groups <= 3'd1;
      cfg.out_label_bits <= 2'd1;
      cfg.out_s1  <= SCALE_W'(1) << SC_FRAC;
      cfg.s1      <= SCALE_W'(1) << SC_FRAC;
      cfg.s2      <= SCALE_W'(1) << SC_FRAC;
      cfg.inv_s1  <= SCALE_W'(1) << INV_FRAC;
      cfg.inv_s2  <= SCALE_W'(1) << INV_FRAC;
      for (int g = 0; g < NGROUPS; g++) grp_beats[g] <= '0;
      out_bound   <= '0;
      thr         <= '0;
    end else if (cfg_we) begin
      unique casez (cfg_addr)
        8'h00: cfg.mm_mode    <= mm_mode_e'(cfg_wdata[1:0]);
        8'h01: cfg.n_beats    <= cfg_wdata[15:0];
        8'h02: cfg.n_groups   <= cfg_wdata[2:0];
        8'h03: cfg.label_bits <= cfg_wdata[1:0];
        8'h04: cfg.ia_base    <= cfg_wdata[15:0];
        8'h05: cfg.w_base     <= cfg_wdata[15:0];
        8'h06: cfg.tile_base  <= cfg_wdata[CH_W-1:0];
        8'h07: cfg.act_mode   <= act_mode_e'(cfg_wdata[1:0]);
        8'h08: cfg.q_mode     <= q_mode_e'(cfg_wdata[1:0]);
        8'h09: cfg.lut_page   <= cfg_wdata[7:0];
        8'h0A: cfg.s1         <= cfg_wdata;
        8'h0B: cfg.s2         <= cfg_wdata;
        8'h0C: cfg.inv_s1     <= cfg_wdata;
        8'h0D: cfg.inv_s2     <= cfg_wdata;
        8'b0001_00??: grp_beats[cfg_addr[1:0]] <= cfg_wdata[15:0];
        8'h14, 8'h15, 8'h16: out_bound[cfg_addr[1:0]] <= cfg_wdata[CH_W-1:0];
        8'h17: cfg.out_n_groups <= cfg_wdata[2:0];
        8'h18: cfg.out_label_bits <= cfg_wdata[1:0];
        8'h19: cfg.out_s1     <= cfg_wdata;
        8'h1A: cfg.sm_pass    <= sm_pass_e'(cfg_wdata[1:0]);
        8'b0010_????: if (cfg_addr[3:0] != 4'hF) thr[cfg_addr[3:0]] <= cfg_wdata;
        default: ;
      endcase
    end
  end


  // ---------------- sequencer ----------------
  logic [15:0]     beat, gbeat;
  logic [1:0]      g;
  logic [LW-1:0]   lane;
  logic [1:0]      dg;
  logic [15:0]     n_out;
  logic [2:0]      wait_cnt;
  logic [2:0]      n_used;
  logic            beat_last, beat_final;

  assign n_used     = (cfg.mm_mode == MM_UNIFORM) ? cfg.n_groups : 3'd1;
  assign beat_final = (beat == cfg.n_beats - 16'd1);
  assign beat_last  = beat_final ||
                      ((n_used > 3'd1) && (gbeat == grp_beats[g] - 16'd1));
  assign grp_switch = (state == S_COMPUTE) && beat_last && !beat_final;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      beat     <= '0;
      gbeat    <= '0;
      g        <= '0;
      lane     <= '0;
      dg       <= '0;
      n_out    <= '0;
      wait_cnt <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_COMPUTE;
          beat  <= '0;
          gbeat <= '0;
          g     <= '0;
          n_out <= '0;
        end
        S_COMPUTE: begin
          beat <= beat + 16'd1;
          if (beat_last) begin
            gbeat <= '0;
            g     <= g + 2'd1;
          end else begin
            gbeat <= gbeat + 16'd1;
          end
          if (beat_final) begin
            state    <= S_WAIT;
            wait_cnt <= '0;
          end
        end
        S_WAIT: begin
          wait_cnt <= wait_cnt + 3'd1;
          if (wait_cnt == 3'd3) begin
            state <= S_DRAIN;
            lane  <= '0;
            dg    <= '0;
          end
        end
        S_DRAIN: begin
          if (3'(dg) == n_used - 3'd1) begin
            dg <= '0;
            if (lane == LW'(LANES - 1)) state <= S_FLUSH;
            else                        lane  <= lane + LW'(1);
          end else begin
            dg <= dg + 2'd1;
          end
        end
        S_FLUSH: if (n_out == 16'(LANES)) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
      if (res_valid) n_out <= n_out + 16'd1;
    end
  end

  assign busy = (state != S_IDLE);

  // operand reads
  assign ia_re    = (state == S_COMPUTE);
  assign w_re     = (state == S_COMPUTE);
  assign ia_raddr = cfg.ia_base + beat;
  assign w_raddr  = cfg.w_base + beat;

  // beat tags, one cycle later to meet the buffers' read data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      core_valid <= 1'b0;
      core_first <= 1'b0;
      core_last  <= 1'b0;
      core_g     <= '0;
    end else begin
      core_valid <= (state == S_COMPUTE);
      core_first <= (gbeat == 16'd0);
      core_last  <= beat_last;
      core_g     <= g;
    end
  end

  // the PE result of a group appears one cycle after its last beat
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cap_g <= '0;
    else if (core_valid && core_last) cap_g <= core_g;
  end
  assign cap_valid = core_done;

  // reorder-buffer drain
  assign rd_en    = (state == S_DRAIN);
  assign rd_lane  = lane;
  assign rd_g     = dg;
  assign rd_first = (dg == 2'd0);
  assign rd_last  = (3'(dg) == n_used - 3'd1);
  assign ws_re    = (state == S_DRAIN);
  assign ws_raddr = cfg.tile_base + CH_W'(lane);

endmodule
