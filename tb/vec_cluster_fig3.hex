14
3
d
63dcc9ad84d3e5a6064e014de00d9fb4abc35a4795cfcecf3fa12d78e0715c0408d0bbc377af735934e612b37af7a077f3deed9aeb3c69ce3d0fd17c18d4c1f8
52f73c7aa997bdc66318d5964305d280b3a2683848aabce9588b4ade62f108f4289cb5e150b686365b504f2da90a2c9b0e074318a713a30fc5ed73f65e66e87b
12f5d894589be2a88f58f1963bc14e30a86f52526bf192c717cee129a26a19269ae2d75c1ab7e1532dbabf6bc11971959c76255f1f5f10accaebf727b4c769aa
1466cbad3f4a29ad2363bd68079b7a9d46d30ee5b59b62a9b77c618d93d1dd10d4ab1a877165df8821408e47b0d4c6fba137ae7c77c8f9b46a05fabceb544497
38959f8228ecf884f7785bdae896545376077cbd9b99a1359dae918912e1190ab2daa3ae63897769c558e572d2f524b0326761626a96650b91787d17fae9ab84
370d1e01c4b818c01a0ee39aa3c5decf4d0fe945155f886b883c4b16c9f43e7233c970ef864f5d1b8fbab32ad8b92935a244b11b931a28312074b07afa57479e
bdfe2cf18d2ea9e7cff947972c8571bed485bc7484f3d646c21d93dfe2b2af88e6cf281adc7a8db5b4a21c3d0c59f966f77b226cfd826dc3cfd9db5f0e018e57
1d078fd0c4500c3625b55c39321665c6f48130b8489c6bea9a7e01a064c159745e35eb60d1aa6f6d3186970252e3e6610b1a41e55986d4cadb71ad37af94a05a
6bc58eca78b7c5ef21301085cef69b61b63b08e863b550fa05fbbd89e5e1d5db386e76aa9d9e706ae02899d7c664e8d749afd0d0eaaf994d9620328730cb685d
7f5b39272c1a67bcd7019ca3b1f2afb8baef09f9116ad20731b03271f330080622eb0f335c92aa9a59c7a9713ef0f280bb37a9c06409c86af98fee9c3428956c
3
3
3dc823ecc845fd491df150c8b36f6891c56fdeec1be7390072a59a161e44faa2e3bf8e3245ccbf17861b2efedf94b0a657e9029a3d394ec803fd634e71137c03
98ba9de82900d86a8f72e16e4fbf87ab35eedc7e69019df13bda560a4af6cd5354e37917045614f42bb251fba565fd7969b4ddee3d6366b4c0c77aa18e004e23
14
aba7417d07a09282cde4cc2d880f3710b63dbfdaf78aab26c7ae54156dcc9c94b68c19e9fe2c35c7aec6a64f61448437532fe297867e97d4ca7229edc655d367
4ca58dcbc146cba71b5d40bfcff3db0190ab0beb3eee0cfe86d8e749e496c1bba1388b5f7b7d6fbc49b884bd8f8f44778f576506943b6d54313ddabef7b793c3
17
226b1d99adc9c4f1173d4c1d0169b31fba8ea6a842f16b2c1cc7148780acfc4567142fbaf40e496dc1f9e8b483e360ac275e998e48e541e9ed3dae578ae49720
64168ced8dc2de9fac2b053583e1ee4aa99bc9099b3eb6a52ab972e6d1833d4c15775c61f2fb965f773e374f268b9481872f2e8f40f8ac63b77f791c052e7f32
