// tb_vectors_pkg: known-answer values for the ECC and pairing testbenches.
//
// Produced by an independent software model of the same curve: P and Q are
// random points of the order-r subgroup, K a random scalar below r, and
// E = e(P, Q) the reduced Tate pairing computed with the textbook Miller loop
// (vertical lines kept) and the full exponent (q^2 - 1)/r.
package tb_vectors_pkg;
  import agencid_pkg::*;
  localparam fq_t P_X = 512'hcdbe19b59b8d60f4814de5f455d78b1281d368497a8c2549aad83fc9ca51f67c815e40e75b6292d55440e63ea4bb1e6151683c4cdf225476aacd3636f9b8b45;
  localparam fq_t P_Y = 512'h87de178483527c5818210fff44b0659b33a16efd89aabb6f45eee457a54c98b4d62cf55d742ba0e0b74f3e0c19ef9d8a51300a3d4cb76571a3458d6ce18f1a3a;
  localparam fq_t Q_X = 512'ha8e55b219e3ea075f8e5daa1b79a63bff677ff6cf871c376372c2733b35adec7075ef6eef34fb58e700c06401e29108ff00c9244e1a2534645d92c37b829b9a7;
  localparam fq_t Q_Y = 512'h3cea567ad22862486a4b67c42d46f0d57a77f1bcc54ae6a4b6d7b1cea83d0f014636b7206b55389829376271063fce7b08ab9c96cdc9a443e829ebcb8160a2e6;
  localparam fq_t SUM_X = 512'haa7f315e823b5b8c1d6ef07e61f52ad36869b162692dfc10d0337ab6dce77b62fed6affd2b28f3cf59b0ab43e199fcc1c66b7b8e35fd85b3a65d06f10145cdb5;
  localparam fq_t SUM_Y = 512'h1a92917324327ca23df74f4c569f622c57fbf72ad7d64eb96886a319d7bf6206e4fde3725de67bc8f68cc8e5bef9c112c9e768af840d16dd69e661b02610eccc;
  localparam fq_t DBL_X = 512'h9e8b51e568405532630f3c03df42a05f97e49745440452747c4755f8ee18be80ebab682252368c9af3825fc6d1c44a43793821f943409be1826969bf13f85bb;
  localparam fq_t DBL_Y = 512'h728d16ad0d582438bbab1fb39a64134c44e85db235ec174498b14d67ec8323fa39fb5a7d65d71a592a3cd7fca5cde42f735c092ae741fffe3a8bbcfb6140a87;
  localparam fq_t KP_X = 512'h20b86849143f5986cac1fca71f3b84aa6f1c016a0ae8ac54585bed56346bb8b7d274378c7233e66a9aaa43ee427e404202d8c9eb0b1aa1f659c19856e87ffe49;
  localparam fq_t KP_Y = 512'hb9fcec9ecf7aafcf369ebecc47ec05c061b28ae927bd7dab5550d4a86335afefc99a81edec7d1ed26fa0a2c9ce79361786a1cf5233ded8c6415938b42f65876c;
  localparam fq_t E_RE = 512'h55d4f17d1c1338932b61e48e0ad88183cbf0ecf257440f2ce6d86b30a45ce9a28b610fbd6a21b5990d63885cb7704010ceff6d8a58f1ddc4048fde952faf1aad;
  localparam fq_t E_IM = 512'h917732542811d9a59d630ab78e1d308ba7ada34fc6668b5ba815f4366dc8caf0da93203129623f421bba530b6fcf635420dbae249370005a6892a5987640bbf1;
  localparam logic [RW-1:0] K_SCALAR = 160'h3898d190f9ebdacc0cb1e29c658cda1495e60af5;
endpackage
