3ce407c3c5caf699c6f06f88bca5
104247fd8b4b9d36eaf9ce828ba9
56c2e8a5defefb0864e11a36578e
0109f4602c4c144a5497fa0e3a94
c8de52fa9feffb8eac2be2133c28
393094630dc818bfa1283297f74d
15bbc72ad6020dd4510b71d78708
5fcf78c463f0506540826c6fce71
18e65a86c86c1bc32bd00c3c9077
98feaac286fd0d8e0b52ecceb940
3a7cd3611c3b619a20c392798c54
1d811a219df51211de60fa87ec92
590fd5c76924c5f3bbaf26129442
9ee9a118e47fd10c3d03f133d265
902baca346dbeda6fd2917ef8184
fde1512ae4eb38dbd1aa5fc64c91
2ead5a5ec3711449757203602ad6
677bfeb93d40057077c19f91a42d
1dfbbdacf1c1ed7b82be34b1f84b
efff1521ca16cea1dd06cb697cfa
381479aa0bbc0cc81be5ec068e63
47110ffeff9c55073b4c90dc8359
4b05e6864f82d0b29ac115e26d6a
9bae70593922e2c9c9075e3bb604
5cf21406d10cc62425667ad4d1a2
c6fd9b13c4b07e04d4dae3ca8371
e104d0133d091f2431f1cea27733
7137e4f36f196c1bf7b03c3302e6
ce13c06caf5c89c6b073cc84f16d
46331171acafc6590ac84fcc8777
9db803514d0c90941c36416ec471
a24a0819815181d67f55016caf1c
756f52efe432539d64e273b54a2b
004e34b6c46278ebb4f9d20aa57f
18d00b4c6a7c03956403bcdb557f
1b2070d42f069e98a23dc55b32fd
12ae1e606328681235a5d9ce0427
9f3a0725025486368f76a18f672e
a40c5f66c5267501de6ba6b439c4
bc9516d5e08627166166741e4cae
fe8a526091e2ad78b3e0342a11c4
555e78ac259e5edb56ae5de19fb3
bdac5a9734eff5166ab1c4867af4
9b65bf672a3d4a9a3b7eaab77b61
20c6c35eab42a4f465a557c5475a
6238f05207148f4093fa5687fcb3
cdff4c716043fe73343f8ec0f33e
bcc11bc6bd468ab8a2483b040a33
bdbcd0e5fc9484e57ac6177b0f21
81afa6d3a23eb4887e41a3248d87
8fc7588a3a05e51035ffad9d4425
7fea04f103a043eaae6b2823b3d7
278d174e2ce06592a40d7c705567
480ea09096dcdcee991eed2c1251
6b39587c0972bdbc59a3ca466122
3c5e3fbe171b48da2ccacc6cedb0
220ff418c4e49012ae4fea5a6b82
2d78ada87bf6c0b69280c81e80c7
b095732ed18b5cdf5a40284139c3
88a6d59eb2ee3d3747789d58dee5
261f4ed20ab2eb463848086744ae
c4e97a50a3016ea192a21db6ab6e
a6e7c9962f6837f35bda8081719d
0b8a48bb03b8e8a1be662dbbc7d3
