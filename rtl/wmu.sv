// wmu -- weight management unit.
//
// The WMU keeps the W-FIFO of the PE array supplied. A layer is processed in
// output-channel groups of OC_PAR channels; for every group the array needs,
// for every output tile, the weight words of all input channels followed by
// the group's bias word. The WMU fetches a group's words once from off-chip
// memory into one of two on-chip buffers (ping and pong) and replays them for
// every tile, while the next group is fetched into the other buffer. The
// weight manager therefore decides from the state of the computation (which
// group is being replayed, which buffer is free) what to fetch next.
//
// Off-chip layout: group g occupies words w_base + g*(n_ic+1) ..
// w_base + g*(n_ic+1) + n_ic; word n_ic of a group is its bias word. A word
// is a wword_t.
//
// Interface: start (with w_base, n_groups, n_ic, n_tiles) while idle.
// Off-chip reads are valid/ready requests (mem_req, mem_req_ready, mem_addr)
// with in-order responses (mem_rsp_valid, mem_rsp_data); any latency is
// allowed. The output is valid/ready towards the W-FIFO, registered.
// fetch_overlap is high while a fetch runs during the replay of another group.
//
// From the paper: the WMU with ping buffer, weight manager and pong buffer,
// scheduling weights from off-chip memory by computation status into the
// W-FIFO. This implementation's own: the replay per tile, the off-chip
// layout, the request/response interface and the buffer depth.
module wmu
  import neural_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,  // words per ping/pong buffer
  parameter int unsigned MAW   = 24     // off-chip word address width
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              idle,
  input  logic [MAW-1:0]    w_base,
  input  logic [7:0]        n_groups,
  input  logic [10:0]       n_ic,
  input  logic [7:0]        n_tiles,
  // off-chip memory
  output logic              mem_req,
  input  logic              mem_req_ready,
  output logic [MAW-1:0]    mem_addr,
  input  logic              mem_rsp_valid,
  input  wword_t            mem_rsp_data,
  // to the W-FIFO
  output logic              out_valid,
  input  logic              out_ready,
  output wword_t            out_data,
  output logic              fetch_overlap
);

  localparam int unsigned BAW = $clog2(DEPTH);

  wword_t buf_mem [2*DEPTH];    // ping = lower half, pong = upper half
  logic   [1:0] full;
  logic         running;

  // configuration
  logic [7:0]     ng_q, nt_q;
  logic [10:0]    nic_q;

  // fetcher
  logic [7:0]     f_grp;
  logic [10:0]    f_req, f_rsp;
  logic [MAW-1:0] f_addr;
  logic           f_active;
  logic           f_buf;

  // streamer
  logic [7:0]     s_grp;
  logic [7:0]     s_tile;
  logic [10:0]    s_word;
  logic           s_buf;
  logic           advance, s_have, s_last_word;

  assign idle = !running;

  // ---------------- fetcher ----------------
  assign f_buf    = f_grp[0];
  assign f_active = running && (f_grp < ng_q) && !full[f_buf];
  assign mem_req  = f_active && (f_req <= nic_q);
  assign mem_addr = f_addr;

  // ---------------- streamer ----------------
  assign s_buf       = s_grp[0];
  assign s_have      = running && (s_grp < ng_q) && full[s_buf];
  assign advance     = !out_valid || out_ready;
  assign s_last_word = (s_word == nic_q);
  assign fetch_overlap = f_active && s_have;

  always_ff @(posedge clk) begin
    if (mem_rsp_valid && f_active) buf_mem[{f_buf, f_rsp[BAW-1:0]}] <= mem_rsp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      full      <= '0;
      ng_q <= '0; nt_q <= '0; nic_q <= '0;
      f_grp     <= '0; f_req <= '0; f_rsp <= '0; f_addr <= '0;
      s_grp     <= '0; s_tile <= '0; s_word <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (!running) begin
        if (start) begin
          running <= 1'b1;
          ng_q <= n_groups; nt_q <= n_tiles; nic_q <= n_ic;
          full    <= '0;
          f_grp   <= '0; f_req <= '0; f_rsp <= '0; f_addr <= w_base;
          s_grp   <= '0; s_tile <= '0; s_word <= '0;
        end
      end else begin
        // fetch side: issue requests, collect responses
        if (mem_req && mem_req_ready) begin
          f_req  <= f_req + 1'b1;
          f_addr <= f_addr + 1'b1;
        end
        if (mem_rsp_valid && f_active) begin
          if (f_rsp == nic_q) begin
            full[f_buf] <= 1'b1;
            f_grp       <= f_grp + 1'b1;
            f_req       <= '0;
            f_rsp       <= '0;
          end else begin
            f_rsp <= f_rsp + 1'b1;
          end
        end
        // replay side
        if (advance) begin
          if (s_have) begin
            out_valid <= 1'b1;
            out_data  <= buf_mem[{s_buf, s_word[BAW-1:0]}];
            if (!s_last_word) begin
              s_word <= s_word + 1'b1;
            end else begin
              s_word <= '0;
              if (s_tile == nt_q - 1'b1) begin
                s_tile      <= '0;
                full[s_buf] <= 1'b0;
                s_grp       <= s_grp + 1'b1;
              end else begin
                s_tile <= s_tile + 1'b1;
              end
            end
          end else begin
            out_valid <= 1'b0;
            if (s_grp == ng_q) running <= 1'b0;
          end
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
