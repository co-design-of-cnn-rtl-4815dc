// wmd_controller: layer sequencer of the WMD accelerator.
//
// Maps one convolution layer onto the array with the weight-stationary
// schedule of the accelerator: the F-matrix codes of one array pass are
// loaded into the PE registers, then the whole output feature map is
// streamed through the array, and the results are accumulated in the output
// buffer.  A layer needs ceil(C_out/(M*PE_Y)) * K*K * ceil(C_in/(S_W*PE_X))
// such passes (the folding of large layers over several passes).  Loop
// order, outermost first: output-channel tile, kernel row, kernel column,
// input-channel tile, then output pixel row and column.
//
// Per pass:
//   LOAD   PE_Y cycles, one weight-buffer word (one PE row) per cycle.
//   STREAM one output pixel every Lat_F = P-1 cycles.  For pixel (oy,ox) and
//          kernel offset (ky,kx) the input pixel iy = oy*stride+ky-pad,
//          ix = ox*stride+kx-pad is read from the input buffer; outside the
//          map the vector is replaced by zeros (padding).
//   DRAIN  wait until the array and the accumulator are empty, so the next
//          load cannot disturb vectors in flight.
// The streaming part costs K*K*O_x*O_y*Lat_F*ceil(..)*ceil(..) cycles, the
// paper's latency model; the LOAD and DRAIN cycles come on top.  Doing the
// loads between passes, with the array idle, is this design's choice.
//
// Interface: start (one cycle, cfg sampled) -> busy ... done (one cycle).
// Towards the datapath: weight-buffer read (wb_*), array row load (sa_w_*,
// one cycle after the read), input-buffer read (ib_*), and one cycle later
// sa_in_valid/sa_zero together with the pixel tag (tag_addr, tag_first).
// array_empty tells the controller that no pixel is left in the array or the
// accumulator.
module wmd_controller #(
  parameter int unsigned PE_Y     = wmd_pkg::PE_Y_D,
  parameter int unsigned P_MAX    = wmd_pkg::P_MAX_D,
  parameter int unsigned IN_AW    = 10,
  parameter int unsigned OUT_AW   = 10,
  parameter int unsigned W_AW     = 8,
  localparam int unsigned NPASS_W = $clog2(P_MAX + 1),
  localparam int unsigned ROW_W   = (PE_Y < 2) ? 1 : $clog2(PE_Y)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  wmd_pkg::layer_cfg_t  cfg,
  output logic                 busy,
  output logic                 done,
  output logic [NPASS_W-1:0]   n_fgen,
  // weight buffer and array coefficient registers
  output logic                 wb_rd_en,
  output logic [W_AW-1:0]      wb_rd_addr,
  output logic                 sa_w_load,
  output logic [ROW_W-1:0]     sa_w_row,
  // input buffer and array input
  output logic                 ib_rd_en,
  output logic [IN_AW-1:0]     ib_rd_addr,
  output logic                 sa_in_valid,
  output logic                 sa_zero,
  output logic [OUT_AW-1:0]    tag_addr,
  output logic                 tag_first,
  input  logic                 array_empty
);

  import wmd_pkg::*;

  ctrl_state_t state;
  layer_cfg_t  c;

  logic [7:0]         cout_t, cin_t;
  logic [3:0]         ky, kx;
  logic [9:0]         oy, ox;
  logic [ROW_W-1:0]   row;
  logic [W_AW-1:0]    wset;
  logic [NPASS_W-1:0] gap;

  logic last_row, last_px, last_pass;
  assign last_row  = (int'(row) == PE_Y - 1);
  assign last_px   = (oy == c.out_h - 1) && (ox == c.out_w - 1);
  assign last_pass = (cin_t == c.cin_tiles - 1) && (kx == c.k - 1) && (ky == c.k - 1) &&
                     (cout_t == c.cout_tiles - 1);

  // ---------------- input address generation ----------------
  logic signed [12:0] iy, ix;
  logic               in_map, issue;
  logic [31:0]        in_addr_full, out_addr_full;
  always_comb begin
    iy = $signed({3'b0, oy}) * $signed({11'b0, c.stride}) + $signed({9'b0, ky})
         - $signed({11'b0, c.pad});
    ix = $signed({3'b0, ox}) * $signed({11'b0, c.stride}) + $signed({9'b0, kx})
         - $signed({11'b0, c.pad});
    in_map = (iy >= 0) && (ix >= 0) && (iy < $signed({3'b0, c.in_h})) &&
             (ix < $signed({3'b0, c.in_w}));
    in_addr_full  = 32'(cin_t) * 32'(c.in_h) * 32'(c.in_w) + 32'(iy[9:0]) * 32'(c.in_w)
                    + 32'(ix[9:0]);
    out_addr_full = 32'(cout_t) * 32'(c.out_h) * 32'(c.out_w) + 32'(oy) * 32'(c.out_w)
                    + 32'(ox);
    issue = (state == ST_STREAM) && (gap == '0);
  end

  assign n_fgen     = NPASS_W'(c.p - 4'd1);
  assign busy       = (state != ST_IDLE);
  assign wb_rd_en   = (state == ST_LOAD);
  assign wb_rd_addr = wset + W_AW'(row);
  assign ib_rd_en   = issue && in_map;
  assign ib_rd_addr = IN_AW'(in_addr_full);

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ST_IDLE;
      c      <= '0;
      cout_t <= '0; cin_t <= '0; ky <= '0; kx <= '0; oy <= '0; ox <= '0;
      row    <= '0;
      wset   <= '0;
      gap    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          c      <= cfg;
          cout_t <= '0; cin_t <= '0; ky <= '0; kx <= '0; oy <= '0; ox <= '0;
          row    <= '0;
          wset   <= W_AW'(cfg.w_base);
          state  <= ST_LOAD;
        end
        ST_LOAD: begin
          row <= row + 1'b1;
          if (last_row) begin
            row   <= '0;
            gap   <= '0;
            state <= ST_STREAM;
          end
        end
        ST_STREAM: begin
          if (issue) begin
            gap <= n_fgen - 1'b1;
            ox  <= ox + 1'b1;
            if (ox == c.out_w - 1) begin
              ox <= '0;
              oy <= oy + 1'b1;
            end
            if (last_px) begin
              oy    <= '0;
              state <= ST_DRAIN;
            end
          end else begin
            gap <= gap - 1'b1;
          end
        end
        ST_DRAIN: if (!sa_in_valid && array_empty) begin
          wset  <= wset + W_AW'(PE_Y);
          state <= ST_LOAD;
          // advance the pass loops: cin_t, kx, ky, cout_t
          cin_t <= cin_t + 1'b1;
          if (cin_t == c.cin_tiles - 1) begin
            cin_t <= '0;
            kx    <= kx + 1'b1;
            if (kx == c.k - 1) begin
              kx <= '0;
              ky <= ky + 1'b1;
              if (ky == c.k - 1) begin
                ky     <= '0;
                cout_t <= cout_t + 1'b1;
              end
            end
          end
          if (last_pass) begin
            state <= ST_DONE;
          end
        end
        ST_DONE: begin
          done  <= 1'b1;
          state <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // ---------------- one-cycle alignment with the buffer reads ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_w_load   <= 1'b0;
      sa_w_row    <= '0;
      sa_in_valid <= 1'b0;
      sa_zero     <= 1'b0;
      tag_addr    <= '0;
      tag_first   <= 1'b0;
    end else begin
      sa_w_load   <= wb_rd_en;
      sa_w_row    <= row;
      sa_in_valid <= issue;
      sa_zero     <= issue && !in_map;
      if (issue) begin
        tag_addr  <= OUT_AW'(out_addr_full);
        tag_first <= (cin_t == '0) && (kx == '0) && (ky == '0);
      end
    end
  end

  a_cfg_p: assert property (@(posedge clk) disable iff (!rst_n)
      (state == ST_IDLE && start) |-> (cfg.p >= 4'd2 && int'(cfg.p) <= P_MAX && cfg.k >= 4'd1
                                       && cfg.stride >= 2'd1 && cfg.cin_tiles != 0
                                       && cfg.cout_tiles != 0 && cfg.out_h != 0 && cfg.out_w != 0));

endmodule
