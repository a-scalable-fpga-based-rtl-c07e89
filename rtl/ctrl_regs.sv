// ctrl_regs: the host CPU's view of the accelerator. A register file on a
// simple slave bus (one-cycle write strobe; read data registered one cycle
// after the read strobe) holds the operating parameters and the buffer
// addresses, and a sequencer runs one map update when CTRL.start is
// written:
//   1. if CTRL.load_kf: burst-load the keyframe image into the keyframe
//      pixel cache (IMG_W*IMG_H/8 words);
//   2. if CTRL.load_frame: burst-load the camera frame into the frame cache;
//   3. start the output writer for IMG_W*IMG_H points, then stream the
//      keyframe map (3 words per point) into the pipeline;
//   4. when the writer reports done, set STATUS.done and pulse irq.
// CYCLES holds the length of the last update in clock cycles.
//
// Register map (32-bit word addresses): 0 CTRL {load_frame, load_kf,
// start}, 1 STATUS {done, busy}, 2 KF image address, 3 frame image
// address, 4 map input address, 5 map output address, 6 CYCLES (ro),
// 16..24 M (Q16.16, row major), 25..27 t (Q16.16), 28..30 epi_x/y/z,
// 31 id_min, 32 id_max (Q8.24), 33 grad_create, 34 grad_update, 35 bl_min,
// 36 max_err, 37 sigma2, 38 var_init, 39 fill_thresh.
// The bus, the map and the sequencing are this design's choice; the
// reference design states only that the CPU controls the accelerator and
// its parameters through a slave port.
module ctrl_regs
  import slam_pkg::*;
#(
  parameter int IMG_W = 640,
  parameter int IMG_H = 480
) (
  input  logic        clk,
  input  logic        rst_n,
  // host slave bus
  input  logic        host_we,
  input  logic        host_re,
  input  logic [7:0]  host_addr,
  input  logic [31:0] host_wdata,
  output logic [31:0] host_rdata,
  output logic        irq,
  // parameters to the pipeline
  output params_t     prm,
  // input memory controller
  output logic        rd_start,
  output logic [31:0] rd_base,
  output logic [31:0] rd_nwords,
  input  logic        rd_done,
  output logic [1:0]  rd_dest,       // 0 map stream, 1 keyframe cache, 2 frame cache
  output logic        frame_start,   // restart point coordinates
  // output writer
  output logic        wr_start,
  output logic [31:0] wr_base,
  output logic [31:0] wr_npoints,
  input  logic        wr_done,
  output logic        busy
);
  typedef enum logic [2:0] {C_IDLE, C_KF, C_FR, C_MAP, C_WAIT} cst_e;
  cst_e        cs;
  logic [31:0] regs [64];
  logic        done_flag, fr_pend;
  logic [31:0] cycles;

  localparam int NPIX = IMG_W * IMG_H;

  always_comb begin
    for (int i = 0; i < 9; i++) prm.m[i] = regs[16 + i];
    for (int i = 0; i < 3; i++) prm.t[i] = regs[25 + i];
    prm.epi_x       = regs[28];
    prm.epi_y       = regs[29];
    prm.epi_z       = regs[30];
    prm.id_min      = regs[31];
    prm.id_max      = regs[32];
    prm.grad_create = regs[33][15:0];
    prm.grad_update = regs[34][15:0];
    prm.bl_min      = regs[35][15:0];
    prm.max_err     = regs[36];
    prm.sigma2      = regs[37];
    prm.var_init    = regs[38];
    prm.fill_thresh = regs[39][15:0];
  end

  assign busy       = (cs != C_IDLE);
  assign rd_base    = (cs == C_KF) ? regs[2] : (cs == C_FR) ? regs[3] : regs[4];
  assign rd_nwords  = (cs == C_KF || cs == C_FR) ? 32'(NPIX / 8) : 32'(NPIX * 3);
  assign rd_dest    = (cs == C_KF) ? 2'd1 : (cs == C_FR) ? 2'd2 : 2'd0;
  assign wr_base    = regs[5];
  assign wr_npoints = 32'(NPIX);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < 64; i++) regs[i] <= '0;
      host_rdata <= '0;
    end else begin
      if (host_we && host_addr >= 8'd2 && host_addr < 8'd64 && host_addr != 8'd6)
        regs[host_addr[5:0]] <= host_wdata;
      if (host_re)
        case (host_addr)
          8'd0:    host_rdata <= '0;
          8'd1:    host_rdata <= {30'd0, done_flag, busy};
          8'd6:    host_rdata <= cycles;
          default: host_rdata <= (host_addr < 8'd64) ? regs[host_addr[5:0]] : 32'd0;
        endcase
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cs <= C_IDLE; done_flag <= 1'b0; fr_pend <= 1'b0;
      rd_start <= 1'b0; wr_start <= 1'b0; frame_start <= 1'b0; irq <= 1'b0;
      cycles <= '0;
    end else begin
      rd_start <= 1'b0; wr_start <= 1'b0; frame_start <= 1'b0; irq <= 1'b0;
      if (cs != C_IDLE) cycles <= cycles + 1;
      case (cs)
        C_IDLE: if (host_we && host_addr == 8'd0 && host_wdata[0]) begin
          done_flag <= 1'b0;
          cycles    <= '0;
          fr_pend   <= host_wdata[2];
          rd_start  <= 1'b1;     // issued with the state it enters
          if (host_wdata[1])      cs <= C_KF;
          else if (host_wdata[2]) cs <= C_FR;
          else begin
            cs <= C_MAP; wr_start <= 1'b1; frame_start <= 1'b1;
          end
        end
        C_KF: if (rd_done) begin
          rd_start <= 1'b1;
          if (fr_pend) cs <= C_FR;
          else begin cs <= C_MAP; wr_start <= 1'b1; frame_start <= 1'b1; end
        end
        C_FR: if (rd_done) begin
          rd_start <= 1'b1; cs <= C_MAP; wr_start <= 1'b1; frame_start <= 1'b1;
        end
        C_MAP: if (rd_done) cs <= C_WAIT;
        default: if (wr_done) begin
          cs <= C_IDLE; done_flag <= 1'b1; irq <= 1'b1;
        end
      endcase
    end
endmodule
