// janeeye_top -- JaneEye eye-tracking accelerator core.
//
// Structure as in the paper's block diagram: a top controller, activation
// (32 KB), weight (64 KB) and bias (4 KB) SRAMs, a data dispatcher, a 64-PE
// array of eight output tiles with adder trees, and an activation core whose
// 128-bit results return through the dispatcher to the activation SRAM.
//
// Use: while idle, the host writes the input event frame into the activation
// SRAM (host_act_*), the quantised weights and biases into their SRAMs and
// the layer descriptors into the controller's table, then pulses start. The
// controller runs the layers in order; at the end lanes 0 and 1 of the first
// output word of the last layer (the FC layer's two outputs) appear on
// pupil_x / pupil_y with xy_valid, and done pulses. The host ports stand in
// for the chip's input-fmap and (x, y) pads, which are not modelled.
//
// perf collects event counters of the run: MAC cycles of the array, PE
// operations removed by zero skipping, array stall cycles, mode switches and
// the number of WS / OS layers. The counters and the host write ports are
// this design's additions.
module janeeye_top
  import janeeye_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // host: memories and layer table
  input  logic                    host_act_we,
  input  logic [ACT_AW-1:0]       host_act_addr,
  input  logic [ACT_WORD_W-1:0]   host_act_data,
  input  logic                    host_w_we,
  input  logic [W_AW-1:0]         host_w_addr,
  input  logic [W_WORD_W-1:0]     host_w_data,
  input  logic                    host_b_we,
  input  logic [B_AW-1:0]         host_b_addr,
  input  logic [B_WORD_W-1:0]     host_b_data,
  input  logic                    cfg_we,
  input  logic [3:0]              cfg_addr,
  input  layer_cfg_t              cfg_data,
  input  logic [4:0]              n_layers,
  input  logic                    start,
  // status and result
  output logic                    busy,
  output logic                    done,
  output logic                    error,
  output logic                    xy_valid,
  output logic signed [ACT_W-1:0] pupil_x,
  output logic signed [ACT_W-1:0] pupil_y,
  output logic [31:0]             perf_cycles,
  output logic [31:0]             perf_mac_cycles,
  output logic [31:0]             perf_zero_skips,
  output logic [31:0]             perf_stall_cycles,
  output logic [15:0]             perf_mode_switches,
  output logic [15:0]             perf_ws_layers,
  output logic [15:0]             perf_os_layers
);

  // controller <-> dispatcher
  logic                  cmd_valid, cmd_done;
  logic [2:0]            cmd;
  layer_cfg_t            cfg;
  logic [3:0]            og;
  df_mode_e              mode;
  logic [ACT_AW-1:0]     rd_word_addr;
  logic [ACT_WORD_W-1:0] rd_word;
  act_func_e             func;
  logic                  ev_mode_switch, ev_layer_ws, ev_layer_os, ev_stall;

  // SRAM ports
  logic                  act_rd_en, act_rd_valid, act_wr_en, d_act_wr_en;
  logic [ACT_AW-1:0]     act_rd_addr, act_wr_addr, d_act_wr_addr;
  logic [ACT_WORD_W-1:0] act_rd_data, act_wr_data, d_act_wr_data;
  logic                  w_rd_en, w_rd_valid;
  logic [W_AW-1:0]       w_rd_addr;
  logic [W_WORD_W-1:0]   w_rd_data;
  logic                  b_rd_en, b_rd_valid;
  logic [B_AW-1:0]       b_rd_addr;
  logic [B_WORD_W-1:0]   b_rd_data;

  // array
  logic                  wreg_we, mac_en, first, last;
  logic [3:0]            wreg_idx, w_idx;
  logic [W_WORD_W-1:0]   w_word;
  logic [ACT_WORD_W-1:0] act_word, arr_word, res_word;
  logic [B_WORD_W-1:0]   bias_word;
  logic                  arr_valid, res_valid;
  logic [6:0]            n_skip;

  top_controller u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_data, .n_layers, .start,
    .busy, .done, .error,
    .cmd_valid, .cmd, .cfg, .og, .mode, .rd_word_addr, .cmd_done, .rd_word,
    .func,
    .xy_valid, .pupil_x, .pupil_y,
    .ev_mode_switch, .ev_layer_ws, .ev_layer_os
  );

  // host owns the activation write port while the core is idle
  assign act_wr_en   = busy ? d_act_wr_en   : host_act_we;
  assign act_wr_addr = busy ? d_act_wr_addr : host_act_addr;
  assign act_wr_data = busy ? d_act_wr_data : host_act_data;

  sram_1r1w #(.WIDTH(ACT_WORD_W), .DEPTH(ACT_DEPTH), .LAT(SRAM_LAT)) u_act_sram (
    .clk, .rst_n,
    .wr_en (act_wr_en), .wr_addr (act_wr_addr), .wr_data (act_wr_data),
    .rd_en (act_rd_en), .rd_addr (act_rd_addr),
    .rd_valid (act_rd_valid), .rd_data (act_rd_data)
  );

  sram_1r1w #(.WIDTH(W_WORD_W), .DEPTH(W_DEPTH), .LAT(SRAM_LAT)) u_w_sram (
    .clk, .rst_n,
    .wr_en (host_w_we && !busy), .wr_addr (host_w_addr), .wr_data (host_w_data),
    .rd_en (w_rd_en), .rd_addr (w_rd_addr),
    .rd_valid (w_rd_valid), .rd_data (w_rd_data)
  );

  sram_1r1w #(.WIDTH(B_WORD_W), .DEPTH(B_DEPTH), .LAT(SRAM_LAT)) u_b_sram (
    .clk, .rst_n,
    .wr_en (host_b_we && !busy), .wr_addr (host_b_addr), .wr_data (host_b_data),
    .rd_en (b_rd_en), .rd_addr (b_rd_addr),
    .rd_valid (b_rd_valid), .rd_data (b_rd_data)
  );

  data_dispatcher u_disp (
    .clk, .rst_n,
    .cmd_valid, .cmd, .cfg, .og, .mode, .rd_word_addr, .cmd_done, .rd_word,
    .act_rd_en, .act_rd_addr, .act_rd_valid, .act_rd_data,
    .act_wr_en (d_act_wr_en), .act_wr_addr (d_act_wr_addr), .act_wr_data (d_act_wr_data),
    .w_rd_en, .w_rd_addr, .w_rd_valid, .w_rd_data,
    .b_rd_en, .b_rd_addr, .b_rd_valid, .b_rd_data,
    .wreg_we, .wreg_idx, .w_word, .mac_en, .first, .last, .w_idx, .act_word, .bias_word,
    .res_valid, .res_word,
    .ev_stall
  );

  pe_array u_array (
    .clk, .rst_n, .mode, .wreg_we, .wreg_idx, .w_word,
    .mac_en, .first, .last, .w_idx, .act_word, .bias_word,
    .out_valid (arr_valid), .out_word (arr_word), .n_skip
  );

  activation_core u_act (
    .clk, .rst_n, .func,
    .in_valid (arr_valid), .in_word (arr_word),
    .out_valid (res_valid), .out_word (res_word)
  );

  // event counters, cleared on start
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf_cycles        <= '0;
      perf_mac_cycles    <= '0;
      perf_zero_skips    <= '0;
      perf_stall_cycles  <= '0;
      perf_mode_switches <= '0;
      perf_ws_layers     <= '0;
      perf_os_layers     <= '0;
    end else if (start && !busy) begin
      perf_cycles        <= '0;
      perf_mac_cycles    <= '0;
      perf_zero_skips    <= '0;
      perf_stall_cycles  <= '0;
      perf_mode_switches <= '0;
      perf_ws_layers     <= '0;
      perf_os_layers     <= '0;
    end else begin
      if (busy)           perf_cycles        <= perf_cycles + 1'b1;
      if (mac_en)         perf_mac_cycles    <= perf_mac_cycles + 1'b1;
      perf_zero_skips <= perf_zero_skips + 32'(n_skip);
      if (ev_stall)       perf_stall_cycles  <= perf_stall_cycles + 1'b1;
      if (ev_mode_switch) perf_mode_switches <= perf_mode_switches + 1'b1;
      if (ev_layer_ws)    perf_ws_layers     <= perf_ws_layers + 1'b1;
      if (ev_layer_os)    perf_os_layers     <= perf_os_layers + 1'b1;
    end
  end

endmodule
