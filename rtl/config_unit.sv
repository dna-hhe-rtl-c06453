// config_unit: parameter registers of the accelerator.
//
// Configuration instructions write one register per instruction: the RNS
// moduli q_i with their bnd_i and Delta'_i (for the DSP-efficient reduction),
// the Rubato modulus t with its Barrett constant and shift, the Rubato
// dimension v and the first column m0 of the circulant matrix M_v, the 128-bit
// nonce, the packet header size and ciphertext segment length for the NIC
// path, and log2 N. All registers drive the cfg structure continuously; a write
// is visible the cycle after wr_en. Which registers exist follows the paper's
// description; the register map (CR_* in dna_pkg) and the reset values are
// this design's choices.
module config_unit
  import dna_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [4:0]  wr_idx,
  input  logic [63:0] wr_data,
  output cfg_t        cfg
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg       <= '0;
      cfg.v     <= 4'd4;
      cfg.log_n <= 4'(LOGN_DEF);
    end else if (wr_en) begin
      if (wr_idx < CR_BND)             cfg.q[wr_idx[1:0]]      <= wr_data[55:0];
      else if (wr_idx < CR_DP)         cfg.bnd[wr_idx[1:0]]    <= wr_data[9:0];
      else if (wr_idx < CR_T)          cfg.dprime[wr_idx[1:0]] <= wr_data[11:0];
      else if (wr_idx >= CR_M0 && wr_idx < CR_NONCE_LO)
                                       cfg.m0[wr_idx[2:0]]     <= wr_data[27:0];
      else begin
        case (wr_idx)
          CR_T:        cfg.t          <= wr_data[27:0];
          CR_MUT:      cfg.mu_t       <= wr_data[29:0];
          CR_KT:       cfg.k_t        <= wr_data[4:0];
          CR_V:        cfg.v          <= wr_data[3:0];
          CR_NONCE_LO: cfg.nonce[63:0]   <= wr_data;
          CR_NONCE_HI: cfg.nonce[127:64] <= wr_data;
          CR_HDR:      cfg.hdr_words  <= wr_data[15:0];
          CR_SEG:      cfg.seg_words  <= wr_data[15:0];
          CR_LOGN:     cfg.log_n      <= wr_data[3:0];
          default: ;
        endcase
      end
    end
  end
endmodule
