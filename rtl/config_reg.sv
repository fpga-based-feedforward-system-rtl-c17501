// config_reg: AXI4-Lite register file holding every user setting.
//
// The processor (reached by the experimenter over Telnet) writes the settings
// here; the fabric reads them as one packed cfg_t struct. 32-bit registers,
// byte address map (this design's own; the paper lists the settings only):
//   0x00 CTRL             [0] Mux X/P (0 = stream to Ax buffer, 1 = Ap buffer)
//   0x04 O_TRIG_DELAY     [4:0] cycles O_trig_o leads O_trig_i (1..24)
//   0x08 MEAS_LOCK_PERIOD [25:0] optical pulses per sample/hold period
//   0x0C MEAS_LOCK_DUTY   [25:0] optical pulses of the sample (lock) phase
//   0x10 TRIG             [4:0] Trig_Start, [12:8] Trig_Window (cycles)
//   0x14 SCALE_SELECT     [4:0] right shift of the inner product
//   0x18 PM_COMP          [10:0] signed 0.10
//   0x1C PM_GAIN          [10:0] signed 2.9
//   0x20 WAIT_CONFIG      [9:0] ring buffer delay, cycles
//   0x24 CFG_CLK_DLY      [2:0] DAC clock delay, cycles
//   0x28 STATUS           read-only, the status input
//   0x40 + 4*i            WEIGHTS, i = 0..24: weight 4i+b in bits [8b+7:8b]
// Reset values: period 100000 (10 ms), duty 20000, Trig_Window 25,
// Scale Select 11, PM Gain 1.0 (512), O_trig_Delay 1, weights
// 64,64,64,64,0,... (average of the first four samples), all else 0.
// Handshake: a write takes address and data in any order, performs the write
// once both are held, then answers OKAY on B. A read answers in the cycle
// after the address is accepted. Unmapped addresses read 0; writes to them
// are ignored. All on the fabric clock; any clock crossing is left to the
// AXI interconnect.
module config_reg
  import ff_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // fabric side
  input  logic [31:0] status,
  output cfg_t        cfg
);
  localparam int unsigned NREG  = 64;      // 256-byte window
  localparam int unsigned WBASE = 16;      // word index of WEIGHTS
  localparam int unsigned NWW   = N_WEIGHTS / 4;

  logic [31:0] regs [NREG];
  logic        aw_full, w_full;
  logic [5:0]  aw_idx;
  logic [31:0] w_data;
  logic [3:0]  w_strb;

  function automatic logic [31:0] reset_value(input int unsigned i);
    case (i)
      1:       return 32'd1;
      2:       return 32'd100000;
      3:       return 32'd20000;
      4:       return 32'd25 << 8;
      5:       return 32'd11;
      7:       return 32'd512;
      WBASE:   return 32'h40404040;
      default: return 32'd0;
    endcase
  endfunction

  function automatic logic mapped(input logic [5:0] i);
    return (i <= 6'd10) || (i >= 6'(WBASE) && i < 6'(WBASE + NWW));
  endfunction

  assign s_awready = !aw_full;
  assign s_wready  = !w_full;
  assign s_arready = !s_rvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) regs[i] <= reset_value(i);
      aw_full  <= 1'b0;
      w_full   <= 1'b0;
      aw_idx   <= '0;
      w_data   <= '0;
      w_strb   <= '0;
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_awvalid && s_awready) begin
        aw_full <= 1'b1;
        aw_idx  <= s_awaddr[7:2];
      end
      if (s_wvalid && s_wready) begin
        w_full <= 1'b1;
        w_data <= s_wdata;
        w_strb <= s_wstrb;
      end
      if (aw_full && w_full && !s_bvalid) begin
        if (mapped(aw_idx) && aw_idx != 6'd10) begin
          for (int b = 0; b < 4; b++)
            if (w_strb[b]) regs[aw_idx][8*b +: 8] <= w_data[8*b +: 8];
        end
        aw_full  <= 1'b0;
        w_full   <= 1'b0;
        s_bvalid <= 1'b1;
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end

      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        if (s_araddr[7:2] == 6'd10)      s_rdata <= status;
        else if (mapped(s_araddr[7:2]))  s_rdata <= regs[s_araddr[7:2]];
        else                             s_rdata <= '0;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  always_comb begin
    cfg.mux_xp           = regs[0][0];
    cfg.o_trig_delay     = regs[1][4:0];
    cfg.meas_lock_period = regs[2][ML_W-1:0];
    cfg.meas_lock_duty   = regs[3][ML_W-1:0];
    cfg.trig_start       = regs[4][4:0];
    cfg.trig_window      = regs[4][12:8];
    cfg.scale_select     = regs[5][4:0];
    cfg.pm_comp          = regs[6][10:0];
    cfg.pm_gain          = regs[7][10:0];
    cfg.wait_config      = regs[8][9:0];
    cfg.cfg_clk_dly      = regs[9][2:0];
    for (int i = 0; i < NWW; i++) cfg.weights[32*i +: 32] = regs[WBASE + i];
  end

  // AXI rules for the slave's own outputs: a response stays until taken
  a_bhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_bvalid && !s_bready |=> s_bvalid);
  a_rhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
