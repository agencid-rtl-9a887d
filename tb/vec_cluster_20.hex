14
7
fffff
87aa5d68551a5a26d8892d8971872f28f7d734f960be291c26c45d570336bb8460167bfea07c2147e6eff3f854d94f195d8c8caa5652d94ee8578d2b40381a5d
3dd78258c86f393f52a0e64a8e66b3cebad1bcea556b19bf1a9d5e12b55248223d4a399800567e902e697054e1554e06e596045d0d332d3ab51a06f6b43d2eab
506f328b247d1dc48d047a043714584d53e39be30c85000821dc4dffe745798db94e8c754e9e4a5399b4900749ff61f50bb1a120a135f32df263a3b309103f63
5f4407f81fda8211b5a4d64fdee8a8fdc4522f16538104f2330baf33faf4aa098d904f4779ee5789a70f45af3e1d8185a550c06afd359ca91a070bd701f7d465
8003afa4fa2d882ea9992be5b70da773e33d2c537f94aad19f2921637681223dd4ce8432c5fb6b15c54f284b23394a708ce7a81b49ee6c929621155a3a8eaed7
2ec4964f7e9fe6eeb1d1740be798811784d0f09b57639c0f502338462e85dea711e187751a583ac05fa74579dc76f319c28f9ec81f1fe6f96dac7c9b2120a096
133d2220490094f5e2e19d01227de75987adc8f8903fa3bb16e37bb4986c7f2c5d6be143553211a14de586162f69c085a59372eb34818e7ef23c5a2f8a8d22a5
4ce7c57faf84c8f2abf6ca85bc668d8e8aad97f5701a51054503beff88c890ded321f640b534f927050e191b26b0f26adb3fe2f1a5b1b5022d7d36632a2d7cf2
556caeb22465ebd83887397f35a69391365f2d6b8c8feb1a89f9fb1d5a035aaba9438d3235a51475ae346d76a180e0e5f51c5369390110e94b39c196c085f2c9
c458415d93ebedce032c3bda03d2d73e4c478306b43b62ab00c1070682d6e313c69f3aaef1608e3068573ff308e984afcf562e11f16b66c5999ca9b0c7cefacd
14
7
9718f138e4f8fef532d5b6fb8ba5183df91f5399dd1f38d587e36c2beb5e89d3a5863cde7c512891eb4672bbf6cbf1eb59202a7d248e30325517ae564745ce4e
90317bd3e772da147efd9c3d20e2a144392305843451acd474aa86818110ee4c8734c0517c8dd99df803268fc3c5a134b7a6183cadd8de42c74b0e1c44639c3e
8
b94b5af93738e6e543b07c1b91b8e2ef39dbcba86ea841a23bf73eac29e0dee12916809bc58ae96e494c166612e3c681789933cc4db092b4a161c81079df6194
5f106db3bfd8caaf673380dd67ce896c16e70f5ff059d05ca80f748ade05f9d0a1dd5136af06d26cd3febe3c5b230923f9db90e2baaa2aad0f789faa4ca5aa82
9
aa4cdde33a67c71bb094f282ee74b4d8330ad4d1ee362c17941eece0ea31c197a91b35c398584f54a9c8a75f812f09a8ad98d7b881b629527cdc73098088e8d1
2caedc5b2bcdcf205bcce5d04bc591519838867c258d6cce1b41354746a6032c4b3f61b0a49d1010eaed550ff0ba74a502b0884f9d4e242674007f62ada30779
a
a117b096704e07712b1e7760b3d60c7d9c49bc8f3618c1a436cb552dacc70678b86ae714f7614c968385ccfde3ff4f5a083fe38504c53ea29058c9412ae05dca
34c63e1da7ff2b5df0a2f95ab7de59616130872cdeafc38cf9b30a9aa0a330471c0f8bb472955ddc3a6debce6287c37457ba166789be3ec64ff0abe9edbcbdde
b
1b7d5aff2f27c3f53e24456e9842c659e0f72b0b7dcb6c64fb5f1b790f17546525df6ed6cb6e5a0d5bc3574a4efc6341997545122ffd8e91a389ba689e71c3d7
17bf62dbff4bb8c63aa43473493e2fa82c6c510cc1793ba8903cfda4cdd0cfa1fad944d2a1b2b979dc5667160566e46cff51ab7a62eeef8f1506ed3b052a5e05
c
757df4277493107c6020857eca0ba105b58ec5ecd1f7ac0c838fa2bd366313d9746287f7c06c45276e73139402f6b36933fede0d512b9f2a1b41af9b4e8723c4
740cedc1f795b448dc00f60ecc303a02de57f67a6401b4b91a67af3c43e4b971354301474f97fe058983c2ddbdc282dbae02b245fc75537b43d37f88f18e0a3a
d
75e2ef1a47f428b74a27765238fd2f2def708e0cb837058087272701e3434b565346aca377e786fcfa1e034f0e4210aa6edb422617408a22f1ed6c7613884e37
3289772a4a0ed2e16ff66341bf5d9a780eb5624ce88ca03852160711925d2b309b3b0ef334826281387115387c107ed552a0a37d0bf5e19ed41501abbe193564
e
773e6013da2d7069f19182b0cf5b3b2d75b345aa1bad87840f6b731f80aef1a51966f121e6266f84672d7cef6dfcc7da8ea8494fd88c000dc3642cc78862a6ae
aa73e44f879dd97d8eff73e02d09939a8176d9a0855fbb4dab20eede4b7dcc8813405be2c969831a6287b071b6909ca63d77b8e792c06882ece32354f5ea2d16
f
c979507415ca9c4850c4ebcfa96d0073a045f6bac388d2a6423456cbc9b2b8da366bad208920635f5093d7889f03e1ba6d7ec0a7c8aceaa2298ee6e70e8d25a3
7a5590d4d9548f84eb807adcc3d4180c765546ad0b1b5daa4a65e2f71d76034340e894204e464d54e1ab346c72c55729c919f6bc4a34b48ea4ef1fb294349326
10
8729ece9caffb7c1c326238d3ea2088ad8b44f1ded27f726de3bf499ab2a8b6c3c24d3b6d9bcda3a6d81c3b2c6961dad536049673c842e475e22bd7b244bc9a7
2236a43abb2dda917e9ae3bbd57c2cbf0c6ce1adefc5f331af8b4046f749d6c3c8d98b57afc59930f79be2bb050e897287c4455276e7de128513904b93babc21
11
7061394e7c32a21eaaa203211571868664ab0d432730eb527834c5e6ad23d0183ba2418cee558ae8e674a40c2cecde6f3ee475766b1eb921ebae20a5d6a49e88
c4c88ac30c6c3b05d0d73b5b319f78873a82b74280e6e12e36490c050b2a2637003f0995e2a4ca36bdb1322d7a29dd6ed96b520b9a299ea6694caa20ea09f760
12
6688c21cefe6b38e0870ce3ea55a8bea29eda37a33a4edb1c898ed60f97ff8ae8ea08edf99303effbd44f07492bd5c572faca48d71dd547800d618cb31b49082
292d9fe4e909381b6ff915dfde5e62cb6a5b70aa9927418960a8e87fc7e6315a0d1b22cc3ab71cd8109ed7146138ac1a883a029336f80444d3117f1649a8ca10
13
7ed3e8980e49382211f30e597ecf51fc3299007b6ec0097e1aad49379f9bcad0084e940d6744c90a3052ac732d18607a9ede065d0c709f0f8656168869e15651
7a535f4eaca68df88ac9bc513db51b760c647dc21a1e3e3457ef74160c526fa472c3f4654c79c7f5d5af6280afe62fb2172e028f4a1877c7b2cd55280318b692
14
aba7417d07a09282cde4cc2d880f3710b63dbfdaf78aab26c7ae54156dcc9c94b68c19e9fe2c35c7aec6a64f61448437532fe297867e97d4ca7229edc655d367
4ca58dcbc146cba71b5d40bfcff3db0190ab0beb3eee0cfe86d8e749e496c1bba1388b5f7b7d6fbc49b884bd8f8f44778f576506943b6d54313ddabef7b793c3
16
54b3f4c207bb36674cac856637b0ca64261a15436487422eafe032bf5a9cef9fd83c5502152bf2e6fff9daf6969762493ea2ceb6f3ca8094d6099ea780c79a9a
3fa050274bb51d73d9fb9aa7dc83b25bff5b91ac8908bb996e4a59c4df4d458589bbb020063670365720436b17b6adbdce11de83b010c77868f5377f81136076
17
226b1d99adc9c4f1173d4c1d0169b31fba8ea6a842f16b2c1cc7148780acfc4567142fbaf40e496dc1f9e8b483e360ac275e998e48e541e9ed3dae578ae49720
64168ced8dc2de9fac2b053583e1ee4aa99bc9099b3eb6a52ab972e6d1833d4c15775c61f2fb965f773e374f268b9481872f2e8f40f8ac63b77f791c052e7f32
18
194de351dd9210d0d17442f6b16a0c98bbd94d3e137538c6bb8202e4540a46743e20daf13495e9049e1149810bca670007efe0e438001711eb957fbe2b0f7c19
bd120e89a822c8c85c1a2d29b1aed258cb150b77d344851f8383ff29b325f785a21368a084cda3a167f0a1f26ca3cc1e2e52dc2490d303e5d15b9be1301f2313
19
bf833e4dac0fda2db2c779a67d819510afed43f30f1f0ee015ce94842c8e1f2b987d53d9b27389ca7a32e082a81919f6fb9beff25e8c11e80a94a8cd57580cb8
8a4d30c9a418530bf26b95a39791751d24ad950687dddc5d8d9d2f54777f9d09fc39170de165ae82ee578325a3439f758ae9e3c2f4d4b98ae8942bbe17da7a1d
1a
b0145dee6ea82115473f1877dc199473e91ffa0980abee02f4719b8d198a730ed350e61e4a145c650968686a29354d3913e47d804d1401d51e48d23a4fba0708
5df154225fa126191d8d6fdf0bc8e313e40065ad8873fa2105f3cd7e4678cdba8a8ff221581898e3c0f7a2424c02c11684269b984585feda69997497c8c8be58
1b
af92340a65ca98764e2776ed3aaed07470ae4cc9915b2891554e392050ccc79cfd8d7e139ffd985cfac790e4ddaaddfeb9b6657263e1d744a1cda5955b674e10
1fb0d41efbf2d96598958676df2bea9c5a4cd06f20b8d61faf6666b6d720003d5f5d18dcecd0f43f908cccd9f9c45a61f8f3c0ccdb167a01900ffad29da523bc
