// vesta_sys_ctrl: system controller. Sets the operation mode of the PE
// module and sequences the SRAM reads of one layer job.
//
// A job is described by a layer_cfg_t latched on start. The loop order is
// that of the WSSL figures: for every output column j (weight column, or
// output channel for convolutions), sweep all pairs of output pixels r
// (tokens), and for each pair run n_seg accumulation passes s (the four
// 512-row segments of MLP2, or input-channel groups of a convolution):
//     weight word = w_base + j*n_seg + s     (SW or LW SRAM)
//     input word  = in_base + r*n_seg + s    (LI or SI SRAM)
// One pass is issued per cycle with no bubbles, so a job takes
// n_col*n_row*n_seg cycles plus PIPE_LAT cycles of drain; done pulses for one
// cycle when the last result has left the pipeline. In IAND output mode the
// LW port reads the residual word res_base + r in the same cycle, so weights
// must then come from SW. Addresses are computed with running pointers, not
// multipliers. The descriptor, the loop nest and the timing are this
// design's own reading of the paper's description of ZSC, SSSC, WSSL and STDP.
module vesta_sys_ctrl
  import vesta_pkg::*;
#(
  parameter int AW       = 8,
  parameter int PIPE_LAT = 2     // cycles from issue to the result write
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  layer_cfg_t     cfg,
  output layer_cfg_t     cfg_q,      // descriptor of the running job
  output logic           busy,
  output logic           done,
  // issue of one pass
  output logic           iss_valid,
  output logic           iss_first,
  output logic           iss_last,
  output logic [7:0]     iss_row,
  output logic [11:0]    iss_col,
  output logic           rd_li, rd_si, rd_lw, rd_sw,
  output logic [AW-1:0]  in_addr,    // to LI or SI
  output logic [AW-1:0]  w_addr,     // to LW or SW
  output logic [AW-1:0]  res_addr    // to LW in IAND mode
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [3:0]    s;
  logic [7:0]    r;
  logic [11:0]   j;
  logic [AW-1:0] w_ptr, w_col, in_ptr;
  logic [3:0]    drain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cfg_q  <= '0;
      s      <= '0;
      r      <= '0;
      j      <= '0;
      w_ptr  <= '0;
      w_col  <= '0;
      in_ptr <= '0;
      drain  <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q  <= cfg;
          s      <= '0;
          r      <= '0;
          j      <= '0;
          w_ptr  <= AW'(cfg.w_base);
          w_col  <= AW'(cfg.w_base);
          in_ptr <= AW'(cfg.in_base);
          state  <= S_RUN;
        end
        S_RUN: begin
          if (s + 4'd1 < cfg_q.n_seg) begin
            s      <= s + 4'd1;
            w_ptr  <= w_ptr + AW'(1);
            in_ptr <= in_ptr + AW'(1);
          end else begin
            s <= '0;
            if (r + 8'd1 < cfg_q.n_row) begin
              r      <= r + 8'd1;
              w_ptr  <= w_col;
              in_ptr <= in_ptr + AW'(1);
            end else begin
              r      <= '0;
              in_ptr <= AW'(cfg_q.in_base);
              w_col  <= w_col + AW'(cfg_q.n_seg);
              w_ptr  <= w_col + AW'(cfg_q.n_seg);
              if (j + 12'd1 < cfg_q.n_col) begin
                j <= j + 12'd1;
              end else begin
                state <= S_DRAIN;
                drain <= 4'(PIPE_LAT - 1);
              end
            end
          end
        end
        S_DRAIN: begin
          if (drain == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            drain <= drain - 4'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    iss_valid = (state == S_RUN);
    iss_first = (s == '0);
    iss_last  = (s + 4'd1 >= cfg_q.n_seg);
    iss_row   = r;
    iss_col   = j;
    in_addr   = in_ptr;
    w_addr    = w_ptr;
    res_addr  = AW'(cfg_q.res_base) + AW'(r);
    rd_li     = iss_valid &&  cfg_q.in_from_li;
    rd_si     = iss_valid && !cfg_q.in_from_li;
    rd_sw     = iss_valid && !cfg_q.w_from_lw;
    rd_lw     = iss_valid && (cfg_q.w_from_lw || cfg_q.osel == OSEL_IAND);
  end

  // Job descriptors must describe at least one pass; IAND needs LW free.
  a_cfg_sizes: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (cfg.n_seg != 0 && cfg.n_row != 0 && cfg.n_col != 0));
  a_iand_port: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start && cfg.osel == OSEL_IAND) |-> !cfg.w_from_lw);
endmodule
