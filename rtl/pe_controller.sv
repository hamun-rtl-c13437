// pe_controller: the PE controller. It executes one PE command at a time
// (cmd_valid/cmd_ready; cmd_ready is low while a command runs or while the
// chip is halted after a fault) and drives the buffers, the APUs and the
// ADD array:
//  * OP_SET_MASK  - loads the 128-bit column mask into APU(pe_row, pe_col)
//                   (1 cycle). The paper fetches the mask with the first row.
//  * OP_WRITE_ROW - reads 2 buffer lines per APU (32 weights) from the
//                   buffer of PE row pe_row starting at buf_addr, loads the
//                   writing registers of the 4 APUs of that row, then starts
//                   the row write of logical crossbar row xb_row in all of
//                   them at once and waits for it (6000 cycles by default;
//                   the command takes 2*4+3 cycles more).
//  * OP_COMPUTE   - for bit b = 0..7 reads line buf_addr + b (bit plane b)
//                   of the buffer of every PE row in row_en and hands it to
//                   those rows' APUs as soon as they accept a plane, so the
//                   planes run back to back (12 cycles each); when the APUs
//                   finish, the ADD array sums the rows and the result goes
//                   to output buffer entry out_addr. The command ends
//                   (cmd_ready) once that entry is written, 101 cycles
//                   after it was taken.
// It also keeps the inference counter of the crossbar wear leveling
// (inf_tick advances it): bit-pair rotation = counter mod 4, starting row
// = counter mod 128, as in the paper's Fig. 10. The command set and its
// encoding are this design's own; the paper says only that the controller
// sequences writing and computation, selects the mux and skips masked
// columns.
module pe_controller
  import hamun_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               halt,
  input  logic               inf_tick,
  input  logic               cmd_valid,
  input  pe_cmd_t            cmd,
  output logic               cmd_ready,
  // wear leveling
  output logic [1:0]         bit_rot,
  output logic [6:0]         row_start,
  // buffers (same read address to every PE row)
  output logic               buf_re,
  output logic [6:0]         buf_raddr,
  input  logic [LINE_W-1:0]  buf_rdata [PE_M],
  // APU control
  output logic [W_PER_ROW*W_BITS-1:0] wreg_data,
  output logic               wreg_load [PE_M][PE_N],
  output logic               mask_load [PE_M][PE_N],
  output logic [XB_COLS-1:0] mask_data,
  output logic [PE_M-1:0]    wr_start,
  output logic [6:0]         wr_row,
  input  logic [PE_M-1:0]    wr_done,
  output logic [PE_M-1:0]    plane_valid,
  output logic [2:0]         plane_idx,
  input  logic [PE_M-1:0]    plane_ready,
  input  logic [PE_M-1:0]    res_valid,
  // ADD array / output buffer
  output logic               add_valid,
  output logic [PE_M-1:0]    row_en,
  output logic [3:0]         out_addr
);
  typedef enum logic [2:0] {S_IDLE, S_WR_LOAD, S_WR_WAIT, S_CMP_RD, S_CMP_PV, S_CMP_RES,
                            S_CMP_ADD, S_CMP_WB} st_e;
  st_e        st;
  pe_cmd_t    c;
  logic [3:0] t;
  logic [2:0] b;
  logic [LINE_W-1:0] low_q;
  logic [15:0] inf_cnt;

  assign cmd_ready = (st == S_IDLE) && !halt;
  assign bit_rot   = inf_cnt[1:0];
  assign row_start = inf_cnt[6:0];
  assign wr_row    = c.xb_row;
  assign mask_data = cmd.mask;
  assign row_en    = c.row_en;
  assign out_addr  = c.out_addr;
  assign plane_idx = b;
  assign wreg_data = {buf_rdata[c.pe_row], low_q};

  always_comb begin
    buf_re    = 1'b0;
    buf_raddr = c.buf_addr;
    for (int i = 0; i < PE_M; i++)
      for (int j = 0; j < PE_N; j++) begin
        wreg_load[i][j] = 1'b0;
        mask_load[i][j] = 1'b0;
      end
    plane_valid = '0;
    case (st)
      S_IDLE:
        if (cmd_valid && !halt && cmd.op == OP_SET_MASK)
          mask_load[cmd.pe_row][cmd.pe_col] = 1'b1;
      S_WR_LOAD: begin
        buf_re    = (int'(t) < 2 * PE_N);
        buf_raddr = c.buf_addr + 7'(t);
        if (t >= 4'd2 && !t[0]) wreg_load[c.pe_row][2'((t - 4'd2) >> 1)] = 1'b1;
      end
      S_CMP_RD: begin
        buf_re    = 1'b1;
        buf_raddr = c.buf_addr + 7'(b);
      end
      S_CMP_PV:
        if ((plane_ready & c.row_en) == c.row_en) plane_valid = c.row_en;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; t <= '0; b <= '0; low_q <= '0; inf_cnt <= '0;
      wr_start <= '0; add_valid <= 1'b0;
    end else begin
      wr_start  <= '0;
      add_valid <= 1'b0;
      if (inf_tick) inf_cnt <= inf_cnt + 1'b1;
      case (st)
        S_IDLE:
          if (cmd_valid && !halt) begin
            c <= cmd;
            t <= '0;
            b <= '0;
            case (cmd.op)
              OP_WRITE_ROW: st <= S_WR_LOAD;
              OP_COMPUTE:   st <= S_CMP_RD;
              default:      st <= S_IDLE;
            endcase
          end
        S_WR_LOAD: begin
          t <= t + 1'b1;
          if (t[0]) low_q <= buf_rdata[c.pe_row];
          if (int'(t) == 2 * PE_N) begin
            st <= S_WR_WAIT;
            wr_start[c.pe_row] <= 1'b1;
          end
        end
        S_WR_WAIT:
          if (wr_done[c.pe_row]) st <= S_IDLE;
        S_CMP_RD: st <= S_CMP_PV;
        S_CMP_PV:
          if ((plane_ready & c.row_en) == c.row_en) begin
            if (b == 3'(ACT_BITS - 1)) st <= S_CMP_RES;
            else begin b <= b + 1'b1; st <= S_CMP_RD; end
          end
        S_CMP_RES:
          if (|(res_valid & c.row_en)) begin
            add_valid <= 1'b1;
            st <= S_CMP_ADD;
          end
        // wait for the ADD array and the output buffer write
        S_CMP_ADD: st <= S_CMP_WB;
        S_CMP_WB:  st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
endmodule
