// vsa_sys_ctrl: the system controller. One start runs one layer pass over
// one input tile (8 rows x n_col columns x n_grp*32 channels) for one time
// step, in the order
//   for oc in 0..n_oc-1            output channel
//     for g in 0..n_grp-1          32-channel input group (one weight word each)
//       for x in 0..n_col-1        input column: one spike word read per cycle
// issuing one spike read and one weight read every cycle without stalls.
// Columns x >= 2 produce output column X = x-2 (three columns are in the PE
// blocks), so each sweep yields n_col-2 output columns; the first two reads
// of each sweep only fill the column registers. With every read it emits a
// tag_t that travels down the pipeline and says which local-buffer,
// boundary and membrane entries the column uses:
//   spike/temp word   in_base + g*n_col + x
//   weight word       w_base + oc*n_grp + g
//   local buffer      X
//   boundary, membrane  base + oc*(n_col-2) + X
// After the last read it waits DRAIN cycles for the pipeline to empty, then
// pulses done for one cycle (DRAIN+1 clocks after the last read is issued).
// cfg is sampled at start and held in cfg_q.
// The paper names the controller and implies the loop nest (channel groups
// accumulated in the last accumulator stage, the same weights reused over
// the whole tile); the loop order, addressing and start/done handshake are
// this design's.
module vsa_sys_ctrl
  import vsa_pkg::*;
#(
  parameter int DRAIN = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  cfg_t               cfg,
  output cfg_t               cfg_q,
  output logic               busy,
  output logic               done,
  output logic               rd_en,
  output logic [SPK_AW-1:0]  in_addr,
  output logic [WGT_AW-1:0]  w_addr,
  output tag_t               tag
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [OC_W-1:0]  oc;
  logic [GRP_W-1:0] g;
  logic [COL_W-1:0] x;
  logic [4:0]       drain_cnt;

  wire last_x  = (x  == cfg_q.n_col - 1);
  wire last_g  = (g  == cfg_q.n_grp - 1);
  wire last_oc = (oc == cfg_q.n_oc - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cfg_q     <= '0;
      oc        <= '0;
      g         <= '0;
      x         <= '0;
      drain_cnt <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cfg_q <= cfg;
          oc    <= '0;
          g     <= '0;
          x     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (!last_x) x <= x + 1'b1;
          else begin
            x <= '0;
            if (!last_g) g <= g + 1'b1;
            else begin
              g <= '0;
              if (!last_oc) oc <= oc + 1'b1;
              else begin
                state     <= S_DRAIN;
                drain_cnt <= 5'(DRAIN);
              end
            end
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt - 1'b1;
          if (drain_cnt == 5'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic [COL_W-1:0] ocol;      // output column X
  logic [COL_W-1:0] n_ocol;    // output columns per sweep
  logic [MEM_AW-1:0] lin;      // oc*(n_col-2) + X

  always_comb begin
    busy    = (state != S_IDLE);
    rd_en   = (state == S_RUN);
    ocol    = x - COL_W'(2);
    n_ocol  = cfg_q.n_col - COL_W'(2);
    lin     = MEM_AW'(oc * n_ocol + ocol);
    in_addr = cfg_q.in_base + SPK_AW'(g * cfg_q.n_col) + SPK_AW'(x);
    w_addr  = cfg_q.w_base  + WGT_AW'(oc * cfg_q.n_grp) + WGT_AW'(g);

    tag           = '0;
    tag.valid     = rd_en && (x >= COL_W'(2));
    tag.first_grp = (g == '0);
    tag.last_grp  = last_g;
    tag.use_bnd   = cfg_q.use_bnd;
    tag.lbuf_addr = LBUF_AW'(ocol);
    tag.bnd_addr  = cfg_q.bnd_base + BND_AW'(lin);
    tag.mem_addr  = cfg_q.mem_base + MEM_AW'(lin);
    tag.oc        = oc[OC_W-2:0];
    tag.col       = ocol;
  end

  // a pass must have at least one output column and fit the local buffer
  property p_cfg_ok;
    @(posedge clk) disable iff (!rst_n)
      (state == S_IDLE && start) |-> (cfg.n_col >= 3 && cfg.n_col <= COL_W'(LBUF_DEPTH + 2)
                                      && cfg.n_grp != 0 && cfg.n_oc != 0);
  endproperty
  a_cfg_ok: assert property (p_cfg_ok) else $error("vsa_sys_ctrl: invalid configuration");
endmodule
