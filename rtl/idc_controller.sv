// idc_controller: integration windows of the IDC processor.
//
// Windows begin and end on time-bin boundaries (TB Start). In orbit mode a
// window spans n_orbits orbits: it closes at the time-bin whose trigger
// word carries the orbit bit, every n_orbits-th time. In trigger mode it
// closes at every time-bin whose trigger word has a bit of trig_mask set.
// At a window boundary the integrating bank toggles, init is raised for
// the first time-bin of the new window, and (if a complete window was
// integrated before) `done` pulses together with the window number, the
// bunch-crossing at its start and its length in time-bins, which start the
// packetizers. Outputs are registered: bank/init/valid apply to the time
// info and link data delayed by one cycle. `overrun` pulses when a window
// ends while the packetizers are still busy: that window is dropped and the next one
// restarts (init) in the same bank.
//
// From the paper: windows from external timing signals (orbit,
// bunch-crossing, trigger), configuration of the link cores, start of the
// packet transmission. This design's choices: the two modes, their encoding
// and the overrun rule.
module idc_controller
  import tpc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  input  logic        trig_mode,      // 0: orbit windows, 1: trigger windows
  input  logic [7:0]  n_orbits,       // orbit mode, >= 1
  input  logic [31:0] trig_mask,      // trigger mode
  input  time_info_t  tinfo,
  input  logic        pk_busy,
  output logic        int_valid,
  output logic        bank,
  output logic        init,
  output logic        done,
  output logic [31:0] win_id,
  output logic [11:0] win_bc,
  output logic [15:0] win_ntb,
  output logic        overrun
);
  logic        active;       // inside a window
  logic [7:0]  orb_cnt;
  logic [15:0] ntb;
  logic [11:0] bc_start;
  logic        boundary;

  always_comb begin
    if (!tinfo.tb_start)  boundary = 1'b0;
    else if (trig_mode)   boundary = (tinfo.trigger_type & trig_mask) != 0;
    else                  boundary = tinfo.trigger_type[TRG_ORBIT] &&
                                     (!active || orb_cnt + 8'd1 >= n_orbits);
  end

  always_ff @(posedge clk) begin
    if (rst || !enable) begin
      active    <= 1'b0;
      orb_cnt   <= '0;
      ntb       <= '0;
      bc_start  <= '0;
      bank      <= 1'b0;
      init      <= 1'b0;
      int_valid <= 1'b0;
      done      <= 1'b0;
      overrun   <= 1'b0;
      win_id    <= '0;
      win_bc    <= '0;
      win_ntb   <= '0;
    end else begin
      done    <= 1'b0;
      overrun <= 1'b0;
      if (boundary) begin
        if (active) begin
          if (pk_busy) overrun <= 1'b1;
          else begin
            done    <= 1'b1;
            win_id  <= win_id + 1;
            win_bc  <= bc_start;
            win_ntb <= ntb;
            bank    <= ~bank;
          end
        end
        active   <= 1'b1;
        init     <= 1'b1;
        orb_cnt  <= '0;
        ntb      <= 16'd1;
        bc_start <= tinfo.bunch_crossing;
      end else if (tinfo.tb_start) begin
        init <= 1'b0;
        if (active) ntb <= ntb + 16'd1;
        if (active && tinfo.trigger_type[TRG_ORBIT]) orb_cnt <= orb_cnt + 8'd1;
      end
      int_valid <= tinfo.adc_valid && (active || boundary);
    end
  end
endmodule
