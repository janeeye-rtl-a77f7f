// top_controller -- 12-state FSM that runs a network program layer by layer.
//
// The paper specifies a 12-state FSM that manages layer execution and
// dataflow reconfiguration, and a 2-cycle pipeline flush on a change of
// dataflow mode; the states and their order are this design's own:
//
//   IDLE        wait for start
//   CFG         fetch descriptor 'layer' from the layer table, pick the
//               dataflow (WS if n_ig*k*k <= 9 taps fit the PE weight
//               register, else OS) and check the descriptor
//   FLUSH       two idle cycles when the dataflow mode changes (the paper's
//               2-cycle pipeline flush; the array is already drained here)
//   BIAS        dispatcher loads the bias word of output group og
//   WLOAD       (WS only) dispatcher fills the PE weight registers
//   PASS        dispatcher streams all output pixels of group og
//   NEXT_OG     next output group, or
//   NEXT_LAYER  next layer, or
//   READOUT     read the first word of the last layer's output
//   XY_OUT      present lanes 0 and 1 of that word as the (x, y) result
//   DONE        raise done for one cycle, back to IDLE
//   ERROR       descriptor not executable (a zero size, stride, kernel or
//               group count); stays until the next start
//
// The layer table (MAX_LAYERS descriptors) is written through cfg_we while
// the controller is idle. The activation-SRAM write port belongs to the host
// while idle and to the dispatcher while busy (see janeeye_top).
module top_controller
  import janeeye_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // layer table
  input  logic                  cfg_we,
  input  logic [3:0]            cfg_addr,
  input  layer_cfg_t            cfg_data,
  input  logic [4:0]            n_layers,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  error,
  // dispatcher
  output logic                  cmd_valid,
  output logic [2:0]            cmd,
  output layer_cfg_t            cfg,
  output logic [3:0]            og,
  output df_mode_e              mode,
  output logic [ACT_AW-1:0]     rd_word_addr,
  input  logic                  cmd_done,
  input  logic [ACT_WORD_W-1:0] rd_word,
  // activation core
  output act_func_e             func,
  // result
  output logic                  xy_valid,
  output logic signed [ACT_W-1:0] pupil_x,
  output logic signed [ACT_W-1:0] pupil_y,
  // events
  output logic                  ev_mode_switch,
  output logic                  ev_layer_ws,
  output logic                  ev_layer_os
);

  localparam logic [2:0] CMD_BIAS  = 3'd1;
  localparam logic [2:0] CMD_WLOAD = 3'd2;
  localparam logic [2:0] CMD_PASS  = 3'd3;
  localparam logic [2:0] CMD_READ  = 3'd4;

  typedef enum logic [3:0] {
    S_IDLE, S_CFG, S_FLUSH, S_BIAS, S_WLOAD, S_PASS,
    S_NEXT_OG, S_NEXT_LAYER, S_READOUT, S_XY_OUT, S_DONE, S_ERROR
  } state_e;

  state_e     st;
  layer_cfg_t table_q [MAX_LAYERS];
  logic [4:0] layer, n_layers_q;
  logic       waiting;       // command issued, waiting for cmd_done
  logic [1:0] flush_cnt;
  df_mode_e   prev_mode;
  logic       have_prev;
  layer_cfg_t cur;
  logic       bad;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_LAYERS; i++) table_q[i] <= '0;
    end else if (cfg_we && !busy) begin
      table_q[cfg_addr] <= cfg_data;
    end
  end

  assign cur  = table_q[layer[3:0]];
  assign bad  = (cur.k == '0) || (cur.stride == '0) || (cur.n_ig == '0) || (cur.n_og == '0) ||
                (cur.out_h == '0) || (cur.out_w == '0) || (cur.in_h == '0) || (cur.in_w == '0);
  assign cfg  = cur;
  assign func = cur.func;
  assign busy = (st != S_IDLE) && (st != S_ERROR);
  assign error = (st == S_ERROR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st             <= S_IDLE;
      layer          <= '0;
      n_layers_q     <= '0;
      og             <= '0;
      mode           <= DF_WS;
      prev_mode      <= DF_WS;
      have_prev      <= 1'b0;
      waiting        <= 1'b0;
      flush_cnt      <= '0;
      cmd_valid      <= 1'b0;
      cmd            <= '0;
      rd_word_addr   <= '0;
      done           <= 1'b0;
      xy_valid       <= 1'b0;
      pupil_x        <= '0;
      pupil_y        <= '0;
      ev_mode_switch <= 1'b0;
      ev_layer_ws    <= 1'b0;
      ev_layer_os    <= 1'b0;
    end else begin
      cmd_valid      <= 1'b0;
      done           <= 1'b0;
      xy_valid       <= 1'b0;
      ev_mode_switch <= 1'b0;
      ev_layer_ws    <= 1'b0;
      ev_layer_os    <= 1'b0;
      unique case (st)
        S_IDLE, S_ERROR: begin
          if (start) begin
            layer      <= '0;
            n_layers_q <= n_layers;
            have_prev  <= 1'b0;
            st         <= (n_layers == '0) ? S_ERROR : S_CFG;
          end
        end
        S_CFG: begin
          og   <= '0;
          mode <= layer_mode(cur);
          if (bad) begin
            st <= S_ERROR;
          end else begin
            ev_layer_ws <= (layer_mode(cur) == DF_WS);
            ev_layer_os <= (layer_mode(cur) == DF_OS);
            if (have_prev && prev_mode != layer_mode(cur)) begin
              ev_mode_switch <= 1'b1;
              flush_cnt      <= 2'(FLUSH_CYCLES - 1);
              st             <= S_FLUSH;
            end else begin
              st <= S_BIAS;
            end
          end
        end
        S_FLUSH: begin
          if (flush_cnt == '0) st <= S_BIAS;
          else                 flush_cnt <= flush_cnt - 1'b1;
        end
        S_BIAS, S_WLOAD, S_PASS, S_READOUT: begin
          if (!waiting) begin
            cmd_valid <= 1'b1;
            waiting   <= 1'b1;
            unique case (st)
              S_BIAS:  cmd <= CMD_BIAS;
              S_WLOAD: cmd <= CMD_WLOAD;
              S_PASS:  cmd <= CMD_PASS;
              default: cmd <= CMD_READ;
            endcase
          end else if (cmd_done) begin
            waiting <= 1'b0;
            unique case (st)
              S_BIAS:  st <= (mode == DF_WS) ? S_WLOAD : S_PASS;
              S_WLOAD: st <= S_PASS;
              S_PASS:  st <= S_NEXT_OG;
              default: st <= S_XY_OUT;
            endcase
          end
        end
        S_NEXT_OG: begin
          if (og == cur.n_og - 1'b1) begin
            st <= S_NEXT_LAYER;
          end else begin
            og <= og + 1'b1;
            st <= S_BIAS;
          end
        end
        S_NEXT_LAYER: begin
          prev_mode <= mode;
          have_prev <= 1'b1;
          if (layer == n_layers_q - 1'b1) begin
            rd_word_addr <= cur.out_base;
            st           <= S_READOUT;
          end else begin
            layer <= layer + 1'b1;
            st    <= S_CFG;
          end
        end
        S_XY_OUT: begin
          pupil_x  <= rd_word[0 +: ACT_W];
          pupil_y  <= rd_word[ACT_W +: ACT_W];
          xy_valid <= 1'b1;
          st       <= S_DONE;
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_cmd_once: assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |=> !cmd_valid);

endmodule
