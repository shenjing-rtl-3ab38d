// shenjing_top: a Shenjing chip, a 2-D mesh of tiles.
//
// What it does: ROWS x COLS tile positions, each (where TILE_EN has a 1)
// holding a tile. Neuron n's PS router and spike router of every tile are
// linked to neuron n's routers in the four neighbouring tiles, giving 256
// independent PS meshes and 256 independent spike meshes. The default is
// the 10-core example chip of the paper: a 4 x 3 grid where column 2 holds
// only rows 0 and 1 (positions (2,2) and (3,2) are empty).
//
// Coordinates: tile (r,c) has index r*COLS+c; row 0 is the north edge,
// column 0 the west edge. A link into an empty position, or out of it,
// carries 0. Links that leave the grid are brought out as ports
// (edge_*), where a chip-to-chip link would attach; the inter-chip
// serial link itself is not part of this design.
//
// Host interface: all tiles share clk, rst_n, run (all programs step in
// lock-step), clr_pot, the configuration write bus (cfg_tile selects the
// tile) and the weight-row bus wt_row (a tile takes rows while it runs an
// LD_WT). ext_valid/ext_spk inject input spikes per tile; fired reports per
// tile which neurons fired in the previous cycle's SPIKE.
//
// From the paper: the mesh of tiles with per-neuron PS and spike NoCs, and
// the 10-core, 4 x 3 example. Host ports and the edge ports are this
// design's choices.
module shenjing_top
  import shenjing_pkg::*;
#(
  parameter int unsigned ROWS    = 4,
  parameter int unsigned COLS    = 3,
  parameter logic [ROWS*COLS-1:0] TILE_EN = 12'b0110_1111_1111,
  parameter int unsigned NN      = NUM_NEURONS,
  parameter int unsigned DEPTH   = CFG_DEPTH,
  localparam int unsigned NT     = ROWS * COLS,
  localparam int unsigned AW     = $clog2(DEPTH),
  localparam int unsigned BW     = (NN / 2) * WEIGHT_W,
  localparam int unsigned W      = PS_W
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             run,
  input  logic                             clr_pot,
  input  logic                             cfg_we,
  input  logic [$clog2(NT)-1:0]            cfg_tile,
  input  cfg_slot_e                        cfg_slot,
  input  logic [AW-1:0]                    cfg_addr,
  input  logic [NN-1:0]                    cfg_mask,
  input  logic [15:0]                      cfg_data,
  input  logic [3:0][BW-1:0]               wt_row,
  input  logic [NT-1:0]                    ext_valid,
  input  logic [NT-1:0][NN-1:0]            ext_spk,
  output logic [NT-1:0][NN-1:0]            fired,
  output logic [NT-1:0]                    busy,
  // grid edges: PS links
  input  logic [COLS-1:0][NN-1:0][W-1:0]   edge_ps_n_in,
  input  logic [COLS-1:0][NN-1:0][W-1:0]   edge_ps_s_in,
  input  logic [ROWS-1:0][NN-1:0][W-1:0]   edge_ps_e_in,
  input  logic [ROWS-1:0][NN-1:0][W-1:0]   edge_ps_w_in,
  output logic [COLS-1:0][NN-1:0][W-1:0]   edge_ps_n_out,
  output logic [COLS-1:0][NN-1:0][W-1:0]   edge_ps_s_out,
  output logic [ROWS-1:0][NN-1:0][W-1:0]   edge_ps_e_out,
  output logic [ROWS-1:0][NN-1:0][W-1:0]   edge_ps_w_out,
  // grid edges: spike links
  input  logic [COLS-1:0][NN-1:0]          edge_spk_n_in,
  input  logic [COLS-1:0][NN-1:0]          edge_spk_s_in,
  input  logic [ROWS-1:0][NN-1:0]          edge_spk_e_in,
  input  logic [ROWS-1:0][NN-1:0]          edge_spk_w_in,
  output logic [COLS-1:0][NN-1:0]          edge_spk_n_out,
  output logic [COLS-1:0][NN-1:0]          edge_spk_s_out,
  output logic [ROWS-1:0][NN-1:0]          edge_spk_e_out,
  output logic [ROWS-1:0][NN-1:0]          edge_spk_w_out
);

  // Outputs of every position, [tile][direction][neuron].
  logic [NT-1:0][3:0][NN-1:0][W-1:0] ps_o;
  logic [NT-1:0][3:0][NN-1:0]        spk_o;

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    for (genvar c = 0; c < int'(COLS); c++) begin : g_col
      localparam int unsigned T = r * COLS + c;
      logic [3:0][NN-1:0][W-1:0] ps_i;
      logic [3:0][NN-1:0]        spk_i;

      // A tile's input from direction d is its neighbour's output towards
      // the opposite direction.
      if (r == 0) begin : g_n_edge
        assign ps_i[DIR_N]  = edge_ps_n_in[c];
        assign spk_i[DIR_N] = edge_spk_n_in[c];
        assign edge_ps_n_out[c]  = ps_o[T][DIR_N];
        assign edge_spk_n_out[c] = spk_o[T][DIR_N];
      end else begin : g_n_link
        assign ps_i[DIR_N]  = ps_o[T-COLS][DIR_S];
        assign spk_i[DIR_N] = spk_o[T-COLS][DIR_S];
      end
      if (r == int'(ROWS) - 1) begin : g_s_edge
        assign ps_i[DIR_S]  = edge_ps_s_in[c];
        assign spk_i[DIR_S] = edge_spk_s_in[c];
        assign edge_ps_s_out[c]  = ps_o[T][DIR_S];
        assign edge_spk_s_out[c] = spk_o[T][DIR_S];
      end else begin : g_s_link
        assign ps_i[DIR_S]  = ps_o[T+COLS][DIR_N];
        assign spk_i[DIR_S] = spk_o[T+COLS][DIR_N];
      end
      if (c == int'(COLS) - 1) begin : g_e_edge
        assign ps_i[DIR_E]  = edge_ps_e_in[r];
        assign spk_i[DIR_E] = edge_spk_e_in[r];
        assign edge_ps_e_out[r]  = ps_o[T][DIR_E];
        assign edge_spk_e_out[r] = spk_o[T][DIR_E];
      end else begin : g_e_link
        assign ps_i[DIR_E]  = ps_o[T+1][DIR_W];
        assign spk_i[DIR_E] = spk_o[T+1][DIR_W];
      end
      if (c == 0) begin : g_w_edge
        assign ps_i[DIR_W]  = edge_ps_w_in[r];
        assign spk_i[DIR_W] = edge_spk_w_in[r];
        assign edge_ps_w_out[r]  = ps_o[T][DIR_W];
        assign edge_spk_w_out[r] = spk_o[T][DIR_W];
      end else begin : g_w_link
        assign ps_i[DIR_W]  = ps_o[T-1][DIR_E];
        assign spk_i[DIR_W] = spk_o[T-1][DIR_E];
      end

      if (TILE_EN[T]) begin : g_tile
        tile #(.NN(NN), .NA(NN), .DEPTH(DEPTH)) u_tile (
          .clk       (clk),
          .rst_n     (rst_n),
          .run       (run),
          .clr_pot   (clr_pot),
          .cfg_we    (cfg_we && cfg_tile == $clog2(NT)'(T)),
          .cfg_slot  (cfg_slot),
          .cfg_addr  (cfg_addr),
          .cfg_mask  (cfg_mask),
          .cfg_data  (cfg_data),
          .wt_row    (wt_row),
          .ext_valid (ext_valid[T]),
          .ext_spk   (ext_spk[T]),
          .ps_in     (ps_i),
          .ps_out    (ps_o[T]),
          .spk_in    (spk_i),
          .spk_out   (spk_o[T]),
          .fired     (fired[T]),
          .busy      (busy[T]),
          .pc        ()
        );
      end else begin : g_empty
        assign ps_o[T]  = '0;
        assign spk_o[T] = '0;
        assign fired[T] = '0;
        assign busy[T]  = 1'b0;
      end
    end
  end

endmodule
