// data_dispatcher -- moves data between the three SRAMs and the PE array.
//
// The paper gives the dispatcher's job (broadcast activations, weights and
// biases to the 64-PE array, double buffering with 16-entry FIFOs that hide
// the 8-cycle SRAM read latency, prefetch of the next data while the array
// computes, write-back of the activation core's 128-bit results) but not its
// insides; the address generation, command set and flow control below are
// this design's own.
//
// Commands (cmd_valid pulse with cmd, cfg and og; cmd_done pulses when
// finished):
//   CMD_BIAS   read the bias word of output group og into the bias register
//              that feeds the eight adder trees (B0..B7).
//   CMD_WLOAD  read the S = n_ig*k*k weight words of group og and write word s
//              into entry s of every PE's weight register (WS layers).
//   CMD_PASS   compute every output pixel of output group og: for each pixel
//              (in 8x8 block order) and each step s (input group g, tap ky,kx)
//              fetch the activation word of input pixel (oy*stride+ky-pad,
//              ox*stride+kx-pad), group g -- zero outside the map, without an
//              SRAM access -- and, in OS mode, weight word w_base+og*S+s.
//              Results returning from the activation core are written to
//              out_base + (oy*out_w+ox)*n_og + og.
//   CMD_READ   read one activation word at rd_word_addr into rd_word.
//
// Memory layouts: activation word (pixel p, group g) at base + p*n_groups + g,
// channel 8g+k in lane k; weight word (og, s) at w_base + og*S + s with the
// weight of output channel 8og+t / input channel 8g+k in bits 64t+8k.
//
// Flow control: reads are issued ahead of the array as long as fewer than
// FIFO_DEPTH steps are in flight or buffered, so after the first SRAM_LAT
// cycles of a pass the FIFOs deliver one step per cycle and the next pixel's
// data is fetched while the current one is computed. A cycle in which the
// array waits for data during a pass is reported on ev_stall.
//
// Write-back: the activation core's result word goes to the SRAM write port
// unchanged (act_wr_data is res_word); the dispatcher only supplies the write
// enable and address, taken from a second 8x8-block scanner that advances on
// every result. Those 128 data outputs are therefore plain wires through
// this block.
module data_dispatcher
  import janeeye_pkg::*;
#(
  parameter int LAT = SRAM_LAT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command
  input  logic                    cmd_valid,
  input  logic [2:0]              cmd,
  input  layer_cfg_t              cfg,
  input  logic [3:0]              og,
  input  df_mode_e                mode,
  input  logic [ACT_AW-1:0]       rd_word_addr,
  output logic                    cmd_done,
  output logic [ACT_WORD_W-1:0]   rd_word,
  // activation SRAM
  output logic                    act_rd_en,
  output logic [ACT_AW-1:0]       act_rd_addr,
  input  logic                    act_rd_valid,
  input  logic [ACT_WORD_W-1:0]   act_rd_data,
  output logic                    act_wr_en,
  output logic [ACT_AW-1:0]       act_wr_addr,
  output logic [ACT_WORD_W-1:0]   act_wr_data,
  // weight SRAM
  output logic                    w_rd_en,
  output logic [W_AW-1:0]         w_rd_addr,
  input  logic                    w_rd_valid,
  input  logic [W_WORD_W-1:0]     w_rd_data,
  // bias SRAM
  output logic                    b_rd_en,
  output logic [B_AW-1:0]         b_rd_addr,
  input  logic                    b_rd_valid,
  input  logic [B_WORD_W-1:0]     b_rd_data,
  // PE array
  output logic                    wreg_we,
  output logic [3:0]              wreg_idx,
  output logic [W_WORD_W-1:0]     w_word,
  output logic                    mac_en,
  output logic                    first,
  output logic                    last,
  output logic [3:0]              w_idx,
  output logic [ACT_WORD_W-1:0]   act_word,
  output logic [B_WORD_W-1:0]     bias_word,
  // results from the activation core
  input  logic                    res_valid,
  input  logic [ACT_WORD_W-1:0]   res_word,
  // events
  output logic                    ev_stall
);

  localparam logic [2:0] CMD_BIAS  = 3'd1;
  localparam logic [2:0] CMD_WLOAD = 3'd2;
  localparam logic [2:0] CMD_PASS  = 3'd3;
  localparam logic [2:0] CMD_READ  = 3'd4;

  typedef enum logic [2:0] {D_IDLE, D_BIAS, D_WLOAD, D_PASS, D_READ} dstate_e;

  typedef struct packed {
    logic [ACT_WORD_W-1:0] data;
    logic                  first;
    logic                  last;
    logic [3:0]            w_idx;
  } act_entry_t;

  typedef struct packed {
    logic       valid;
    logic       pad;
    logic       first;
    logic       last;
    logic [3:0] w_idx;
  } tag_t;

  dstate_e    st;
  layer_cfg_t c;
  logic [3:0] og_q;
  df_mode_e   mode_q;
  logic [9:0] steps;

  // ---------------------------------------------------------------- issue
  logic       issuing, iss_active, iss_go;
  logic [9:0] s_cnt;
  logic [3:0] g_cnt;
  logic [2:0] ky, kx;
  logic [DIM_W-1:0] oy, ox;
  logic       pix_last, pix_adv;
  logic [5:0] credits;      // steps issued and not yet consumed
  logic signed [DIM_W+3:0] iy, ix;
  logic       pad_now;
  logic [23:0] in_lin;
  tag_t       tag_pipe [LAT];
  tag_t       tag_new;

  // loads (bias / weight register / single read)
  logic [9:0] ld_iss, ld_ret;

  // ---------------------------------------------------------------- consume
  act_entry_t af_din, af_dout;
  logic       af_push, af_pop, af_empty, af_full;
  logic [4:0] af_count;
  logic       wf_push, wf_pop, wf_empty, wf_full;
  logic [4:0] wf_count;
  logic [W_WORD_W-1:0] wf_dout;
  logic       can_pop;

  // ---------------------------------------------------------------- write-back
  logic [DIM_W-1:0] wy, wx;
  logic       wb_last_pix;
  logic [15:0] wb_cnt, n_pix;
  logic [23:0] out_lin;

  assign steps = layer_steps(c);
  assign n_pix = 16'(c.out_h) * 16'(c.out_w);

  tile_scan u_iss_scan (
    .clk, .rst_n, .clear (cmd_valid), .adv (pix_adv),
    .h (c.out_h), .w (c.out_w), .y (oy), .x (ox), .is_last (pix_last)
  );

  tile_scan u_wb_scan (
    .clk, .rst_n, .clear (cmd_valid), .adv (res_valid && st == D_PASS),
    .h (c.out_h), .w (c.out_w), .y (wy), .x (wx), .is_last (wb_last_pix)
  );

  // input coordinate of the current step
  always_comb begin
    iy      = (DIM_W+4)'(oy) * (DIM_W+4)'(c.stride) + (DIM_W+4)'(ky) - (DIM_W+4)'(c.pad);
    ix      = (DIM_W+4)'(ox) * (DIM_W+4)'(c.stride) + (DIM_W+4)'(kx) - (DIM_W+4)'(c.pad);
    pad_now = (iy < 0) || (ix < 0) || (iy >= (DIM_W+4)'(c.in_h)) || (ix >= (DIM_W+4)'(c.in_w));
    in_lin  = (24'(iy[DIM_W-1:0]) * 24'(c.in_w) + 24'(ix[DIM_W-1:0])) * 24'(c.n_ig) + 24'(g_cnt);
    out_lin = (24'(wy) * 24'(c.out_w) + 24'(wx)) * 24'(c.n_og) + 24'(og_q);
  end

  assign iss_go  = (st == D_PASS) && iss_active && (credits < 6'(FIFO_DEPTH));
  assign issuing = iss_go;
  assign pix_adv = iss_go && (s_cnt == steps - 1'b1);

  always_comb begin
    tag_new.valid = iss_go;
    tag_new.pad   = pad_now;
    tag_new.first = (s_cnt == '0);
    tag_new.last  = (s_cnt == steps - 1'b1);
    tag_new.w_idx = s_cnt[3:0];
  end

  // SRAM read ports
  always_comb begin
    act_rd_en   = 1'b0;
    act_rd_addr = c.in_base + ACT_AW'(in_lin);
    w_rd_en     = 1'b0;
    w_rd_addr   = c.w_base + W_AW'(10'(og_q) * steps) + W_AW'(ld_iss);
    b_rd_en     = 1'b0;
    b_rd_addr   = c.b_base + B_AW'(og_q);
    unique case (st)
      D_PASS: begin
        act_rd_en = iss_go && !pad_now;
        w_rd_en   = iss_go && (mode_q == DF_OS);
        w_rd_addr = c.w_base + W_AW'(10'(og_q) * steps) + W_AW'(s_cnt);
      end
      D_WLOAD: w_rd_en = (ld_iss < steps);
      D_BIAS:  b_rd_en = (ld_iss == '0);
      D_READ: begin
        act_rd_en   = (ld_iss == '0);
        act_rd_addr = rd_word_addr;
      end
      default: ;
    endcase
  end

  // tag pipeline aligned with the SRAM read latency
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) tag_pipe[i] <= '0;
    end else begin
      tag_pipe[0] <= tag_new;
      for (int i = 1; i < LAT; i++) tag_pipe[i] <= tag_pipe[i-1];
    end
  end

  // FIFOs
  assign af_push      = tag_pipe[LAT-1].valid;
  assign af_din.data  = tag_pipe[LAT-1].pad ? '0 : act_rd_data;
  assign af_din.first = tag_pipe[LAT-1].first;
  assign af_din.last  = tag_pipe[LAT-1].last;
  assign af_din.w_idx = tag_pipe[LAT-1].w_idx;
  assign wf_push      = (st == D_PASS) && w_rd_valid;

  sync_fifo #(.WIDTH($bits(act_entry_t)), .DEPTH(FIFO_DEPTH)) u_act_fifo (
    .clk, .rst_n, .clear (cmd_valid),
    .push (af_push), .din (af_din), .pop (af_pop),
    .dout (af_dout), .empty (af_empty), .full (af_full), .count (af_count)
  );

  sync_fifo #(.WIDTH(W_WORD_W), .DEPTH(FIFO_DEPTH)) u_w_fifo (
    .clk, .rst_n, .clear (cmd_valid),
    .push (wf_push), .din (w_rd_data), .pop (wf_pop),
    .dout (wf_dout), .empty (wf_empty), .full (wf_full), .count (wf_count)
  );

  assign can_pop = (st == D_PASS) && !af_empty && (mode_q == DF_WS || !wf_empty);
  assign af_pop  = can_pop;
  assign wf_pop  = can_pop && (mode_q == DF_OS);

  // PE array drive
  assign mac_en   = can_pop;
  assign first    = af_dout.first;
  assign last     = af_dout.last;
  assign w_idx    = af_dout.w_idx;
  assign act_word = af_dout.data;
  assign wreg_we  = (st == D_WLOAD) && w_rd_valid;
  assign wreg_idx = ld_ret[3:0];
  assign w_word   = (st == D_WLOAD) ? w_rd_data : wf_dout;

  // write-back
  assign act_wr_en   = (st == D_PASS) && res_valid;
  assign act_wr_addr = c.out_base + ACT_AW'(out_lin);
  assign act_wr_data = res_word;

  // stall: the array has work left but no data to consume
  assign ev_stall = (st == D_PASS) && !can_pop && (iss_active || credits != '0);

  // control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= D_IDLE;
      c          <= '0;
      og_q       <= '0;
      mode_q     <= DF_WS;
      iss_active <= 1'b0;
      s_cnt      <= '0;
      g_cnt      <= '0;
      ky         <= '0;
      kx         <= '0;
      credits    <= '0;
      ld_iss     <= '0;
      ld_ret     <= '0;
      wb_cnt     <= '0;
      cmd_done   <= 1'b0;
      bias_word  <= '0;
      rd_word    <= '0;
    end else begin
      cmd_done <= 1'b0;
      credits  <= credits + 6'(issuing) - 6'(can_pop);
      if (cmd_valid && st == D_IDLE) begin
        c      <= cfg;
        og_q   <= og;
        mode_q <= mode;
        ld_iss <= '0;
        ld_ret <= '0;
        s_cnt  <= '0;
        g_cnt  <= '0;
        ky     <= '0;
        kx     <= '0;
        wb_cnt <= '0;
        iss_active <= (cmd == CMD_PASS);
        unique case (cmd)
          CMD_BIAS:  st <= D_BIAS;
          CMD_WLOAD: st <= D_WLOAD;
          CMD_PASS:  st <= D_PASS;
          CMD_READ:  st <= D_READ;
          default:   st <= D_IDLE;
        endcase
      end else begin
        unique case (st)
          D_BIAS: begin
            if (ld_iss == '0) ld_iss <= 10'd1;
            if (b_rd_valid) begin
              bias_word <= b_rd_data;
              st        <= D_IDLE;
              cmd_done  <= 1'b1;
            end
          end
          D_READ: begin
            if (ld_iss == '0) ld_iss <= 10'd1;
            if (act_rd_valid) begin
              rd_word  <= act_rd_data;
              st       <= D_IDLE;
              cmd_done <= 1'b1;
            end
          end
          D_WLOAD: begin
            if (ld_iss < steps) ld_iss <= ld_iss + 1'b1;
            if (w_rd_valid) begin
              ld_ret <= ld_ret + 1'b1;
              if (ld_ret == steps - 1'b1) begin
                st       <= D_IDLE;
                cmd_done <= 1'b1;
              end
            end
          end
          D_PASS: begin
            if (iss_go) begin
              if (s_cnt == steps - 1'b1) begin
                s_cnt <= '0; g_cnt <= '0; ky <= '0; kx <= '0;
                if (pix_last) iss_active <= 1'b0;
              end else begin
                s_cnt <= s_cnt + 1'b1;
                if (kx != c.k - 1'b1) begin
                  kx <= kx + 1'b1;
                end else begin
                  kx <= '0;
                  if (ky != c.k - 1'b1) begin
                    ky <= ky + 1'b1;
                  end else begin
                    ky    <= '0;
                    g_cnt <= g_cnt + 1'b1;
                  end
                end
              end
            end
            if (res_valid) begin
              wb_cnt <= wb_cnt + 1'b1;
              if (wb_cnt == n_pix - 1'b1) begin
                st       <= D_IDLE;
                cmd_done <= 1'b1;
              end
            end
          end
          default: ;
        endcase
      end
    end
  end

  a_ws_fits: assert property (@(posedge clk) disable iff (!rst_n)
                              (st == D_PASS && mode_q == DF_WS) |-> steps <= 10'(WREG_DEPTH));
  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) credits <= 6'(FIFO_DEPTH));

endmodule
